// ccn_concat: the Concat operator. Joins two node streams and concatenates
// the feature vectors of matching nodes: features 0..FA-1 of the output come
// from stream a, features FA..FA+FB-1 from stream b.
//
// The two inputs must carry the same events in the same order with the same
// number of nodes per beat; a beat is taken from both inputs in the same
// clock, only when both are valid and the output register is free. The
// output 'last' flag is the one of stream a, and an assertion checks that
// both inputs agree on event boundaries.
//
// Timing: one register stage, one beat per clock.
//
// The operator follows the paper; the handshake is this design's choice.
module ccn_concat #(
  parameter int LANES = 4,
  parameter int FA    = 16,
  parameter int FB    = 16,
  parameter int W     = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                                a_valid,
  output logic                                a_ready,
  input  logic [LANES-1:0][FA-1:0][W-1:0]     a_data,
  input  logic                                a_last,
  input  logic                                b_valid,
  output logic                                b_ready,
  input  logic [LANES-1:0][FB-1:0][W-1:0]     b_data,
  input  logic                                b_last,
  output logic                                out_valid,
  input  logic                                out_ready,
  output logic [LANES-1:0][FA+FB-1:0][W-1:0]  out_data,
  output logic                                out_last
);
  logic can_take;
  assign can_take = !out_valid || out_ready;
  assign a_ready  = can_take && b_valid;
  assign b_ready  = can_take && a_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
    end else if (can_take) begin
      out_valid <= a_valid && b_valid;
      if (a_valid && b_valid) begin
        for (int l = 0; l < LANES; l++) out_data[l] <= {b_data[l], a_data[l]};
        out_last <= a_last;
      end
    end
  end

`ifndef SYNTHESIS
  a_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    a_valid && b_valid |-> a_last == b_last);
`endif
endmodule
