// ccn_store: the Store kernel. Writes the per-node results of each event to
// DDR bank 1 through an AXI4 write master.
//
// Input: a stream of NODES_PER_BEAT nodes per beat; each node carries six
// 16-bit words: energy, signal, x, y, z and, in word 5, the condensation
// point flag in bit 0. Memory layout mirrors the Load kernel: event e is
// written at dst_base + e*EVENT_BYTES as BEATS_PER_EVENT beats, node k of a
// beat in slot k (SLOT_W bits, the six words in the low 96 bits, the rest
// zero).
//
// Operation: a 'start' pulse (while idle) latches dst_base and num_events.
// One AW burst of BEATS_PER_EVENT beats is issued per event, at most
// MAX_OUTSTANDING ahead of the write responses. W beats are the input beats
// (in_ready = wready); wlast is generated by a beat counter, and an
// assertion checks that it agrees with the stream's 'last'. 'done' rises
// when the last write response has arrived; 'wr_error' records any
// non-OKAY response.
//
// Timing: one beat (two nodes) per clock while memory and producer keep up.
//
// Writing the results to bank 1 over AXI DMA is the paper's; burst sizes,
// the record layout and the control signals are this design's choice.
module ccn_store
  import ccn_pkg::*;
#(
  parameter int MAX_OUTSTANDING = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                start,
  input  logic [AXI_AW-1:0]   dst_base,
  input  logic [31:0]         num_events,
  output logic                busy,
  output logic                done,
  output logic                wr_error,
  // AXI4 write address channel
  output logic [AXI_AW-1:0]   m_awaddr,
  output logic [7:0]          m_awlen,
  output logic [2:0]          m_awsize,
  output logic [1:0]          m_awburst,
  output logic                m_awvalid,
  input  logic                m_awready,
  // AXI4 write data channel
  output logic [AXI_DW-1:0]   m_wdata,
  output logic [AXI_DW/8-1:0] m_wstrb,
  output logic                m_wlast,
  output logic                m_wvalid,
  input  logic                m_wready,
  // AXI4 write response channel
  input  logic [1:0]          m_bresp,
  input  logic                m_bvalid,
  output logic                m_bready,
  // result stream from the output layer
  input  logic                                       in_valid,
  output logic                                       in_ready,
  input  logic [NODES_PER_BEAT-1:0][5:0][W16-1:0]    in_data,
  input  logic                                       in_last
);
  logic [AXI_AW-1:0] base_q;
  logic [31:0]       n_q, aw_cnt, b_cnt;
  logic [7:0]        beat;

  assign m_awlen   = 8'(BEATS_PER_EVENT - 1);
  assign m_awsize  = 3'($clog2(AXI_DW / 8));
  assign m_awburst = 2'b01;
  assign m_awaddr  = base_q + AXI_AW'(aw_cnt) * AXI_AW'(EVENT_BYTES);
  assign m_awvalid = busy && (aw_cnt < n_q) && ((aw_cnt - b_cnt) < 32'(MAX_OUTSTANDING));

  assign m_wvalid  = busy && in_valid;
  assign in_ready  = busy && m_wready;
  assign m_wlast   = (int'(beat) == BEATS_PER_EVENT - 1);
  assign m_wstrb   = '1;
  assign m_bready  = 1'b1;
  always_comb begin
    m_wdata = '0;
    for (int k = 0; k < NODES_PER_BEAT; k++) begin
      m_wdata[k * SLOT_W +: 5 * W16] = in_data[k][4:0];
      m_wdata[k * SLOT_W + 5 * W16]  = in_data[k][5][0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base_q   <= '0;
      n_q      <= '0;
      aw_cnt   <= '0;
      b_cnt    <= '0;
      beat     <= '0;
      busy     <= 1'b0;
      done     <= 1'b0;
      wr_error <= 1'b0;
    end else if (!busy) begin
      if (start) begin
        base_q   <= dst_base;
        n_q      <= num_events;
        aw_cnt   <= '0;
        b_cnt    <= '0;
        beat     <= '0;
        wr_error <= 1'b0;
        busy     <= (num_events != 0);
        done     <= (num_events == 0);
      end
    end else begin
      if (m_awvalid && m_awready) aw_cnt <= aw_cnt + 1;
      if (m_wvalid && m_wready) beat <= m_wlast ? '0 : beat + 1'b1;
      if (m_bvalid) begin
        if (m_bresp != 2'b00) wr_error <= 1'b1;
        b_cnt <= b_cnt + 1;
        if (b_cnt + 1 == n_q) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

`ifndef SYNTHESIS
  a_last_agrees: assert property (@(posedge clk) disable iff (!rst_n)
    m_wvalid && m_wready |-> in_last == m_wlast);
`endif
endmodule
