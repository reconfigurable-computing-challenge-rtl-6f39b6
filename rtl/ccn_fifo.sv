// ccn_fifo: synchronous FIFO used as the buffer on every skip connection
// and between partitions.
//
// Skip connections in the network bypass event-level GravNetConv stages,
// which take in a whole event before they return it, so the bypassed data
// must wait for up to a few events. The FIFO holds DEPTH words of W bits in
// a memory array, with read and write pointers and an occupancy counter.
//
// Interface: valid/ready on both sides; in_ready is low when full,
// out_valid is high when not empty, and out_data shows the oldest word.
// Timing: a word written in one clock can be read in the next; one word per
// clock in and out at the same time.
//
// The paper only mentions buffering on these paths; the FIFO is this
// design's choice.
module ccn_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic          push, pop;
  logic [$clog2(DEPTH+1)-1:0] count;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      if (push && !pop)      count <= count + 1'b1;
      else if (pop && !push) count <= count - 1'b1;
    end
  end
endmodule
