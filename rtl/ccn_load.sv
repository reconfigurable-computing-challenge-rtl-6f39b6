// ccn_load: the Load kernel. Reads input events from DDR bank 0 through an
// AXI4 read master and streams their nodes into partition A.
//
// Memory layout: event e starts at src_base + e*EVENT_BYTES. An event is
// BEATS_PER_EVENT beats of AXI_DW bits; each beat holds NODES_PER_BEAT nodes
// in SLOT_W-bit slots, node k of the beat in bits [k*SLOT_W +: SLOT_W], its
// IN_F 16-bit features in the low bits of the slot (feature 0, energy, in
// the lowest word). Events with fewer hits are zero-padded to N_NODES.
//
// Operation: a 'start' pulse (while idle) latches src_base and num_events.
// One INCR burst of BEATS_PER_EVENT beats is requested per event; up to
// MAX_OUTSTANDING bursts are requested ahead of the data so that the
// stream keeps running across event boundaries. R beats go straight to the
// output stream (rready = out_ready); rlast marks the end of an event.
// 'done' rises after the last beat of the last event and stays high until
// the next start; 'rd_error' records any non-OKAY response.
//
// Timing: one beat (two nodes) per clock while memory and consumer keep up.
//
// Reading from bank 0 over AXI DMA is the paper's; burst sizes, the
// layout and the control signals are this design's choice.
module ccn_load
  import ccn_pkg::*;
#(
  parameter int MAX_OUTSTANDING = 4
) (
  input  logic clk,
  input  logic rst_n,
  // control (written by the host runtime)
  input  logic                start,
  input  logic [AXI_AW-1:0]   src_base,
  input  logic [31:0]         num_events,
  output logic                busy,
  output logic                done,
  output logic                rd_error,
  // AXI4 read address channel
  output logic [AXI_AW-1:0]   m_araddr,
  output logic [7:0]          m_arlen,
  output logic [2:0]          m_arsize,
  output logic [1:0]          m_arburst,
  output logic                m_arvalid,
  input  logic                m_arready,
  // AXI4 read data channel
  input  logic [AXI_DW-1:0]   m_rdata,
  input  logic [1:0]          m_rresp,
  input  logic                m_rlast,
  input  logic                m_rvalid,
  output logic                m_rready,
  // node stream to partition A
  output logic                                           out_valid,
  input  logic                                           out_ready,
  output logic [NODES_PER_BEAT-1:0][IN_F-1:0][W16-1:0]   out_data,
  output logic                                           out_last
);
  logic [AXI_AW-1:0] base_q;
  logic [31:0]       n_q, ar_cnt, ev_cnt;
  logic [7:0]        beat;

  assign m_arlen   = 8'(BEATS_PER_EVENT - 1);
  assign m_arsize  = 3'($clog2(AXI_DW / 8));
  assign m_arburst = 2'b01;  // INCR
  assign m_araddr  = base_q + AXI_AW'(ar_cnt) * AXI_AW'(EVENT_BYTES);
  assign m_arvalid = busy && (ar_cnt < n_q) && ((ar_cnt - ev_cnt) < 32'(MAX_OUTSTANDING));

  assign out_valid = busy && m_rvalid;
  assign m_rready  = busy && out_ready;
  assign out_last  = m_rlast;
  always_comb begin
    for (int k = 0; k < NODES_PER_BEAT; k++)
      out_data[k] = m_rdata[k * SLOT_W +: IN_F * W16];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base_q   <= '0;
      n_q      <= '0;
      ar_cnt   <= '0;
      ev_cnt   <= '0;
      beat     <= '0;
      busy     <= 1'b0;
      done     <= 1'b0;
      rd_error <= 1'b0;
    end else if (!busy) begin
      if (start) begin
        base_q   <= src_base;
        n_q      <= num_events;
        ar_cnt   <= '0;
        ev_cnt   <= '0;
        beat     <= '0;
        rd_error <= 1'b0;
        busy     <= (num_events != 0);
        done     <= (num_events == 0);
      end
    end else begin
      if (m_arvalid && m_arready) ar_cnt <= ar_cnt + 1;
      if (m_rvalid && m_rready) begin
        if (m_rresp != 2'b00) rd_error <= 1'b1;
        beat <= m_rlast ? '0 : beat + 1'b1;
        if (m_rlast) begin
          ev_cnt <= ev_cnt + 1;
          if (ev_cnt + 1 == n_q) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

`ifndef SYNTHESIS
  // Every burst must end after exactly BEATS_PER_EVENT beats.
  a_burst_len: assert property (@(posedge clk) disable iff (!rst_n)
    m_rvalid && m_rready |-> m_rlast == (int'(beat) == BEATS_PER_EVENT - 1));
`endif
endmodule
