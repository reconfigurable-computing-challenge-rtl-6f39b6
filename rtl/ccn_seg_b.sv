// ccn_seg_b: partition B (an AI Engine partition in the paper, 8-bit).
//
// A Dense layer (H -> H) is followed by the two Linear layers that produce
// the inputs of the first GravNetConv: S_DIM coordinates of the learned
// space and FLR features to propagate. The two Linear layers share their
// predecessor, so they are fused into one Linear operator whose GC_IN
// outputs are the concatenation [coordinates, features]. The Dense output is
// also multicast to the skip output, which meets the GravNetConv result in
// the Concat of partition D.
//
// Interface: valid/ready node streams of LANES nodes per beat with 'last';
// weights through the configuration bus.
// Timing: one beat per clock; skip output after one clock, GravNetConv
// output after two.
//
// Layer order follows the network figure; fusing the Linear pair follows
// the paper's operator fusion rule. Widths are this design's choice.
module ccn_seg_b
  import ccn_pkg::*;
#(
  parameter int LANES = P_AIE
) (
  input  logic clk,
  input  logic rst_n,
  input  cfg_t cfg,
  input  logic                               in_valid,
  output logic                               in_ready,
  input  logic [LANES-1:0][H-1:0][W8-1:0]    in_data,
  input  logic                               in_last,
  output logic                               gc_valid,
  input  logic                               gc_ready,
  output logic [LANES-1:0][GC_IN-1:0][W8-1:0] gc_data,
  output logic                               gc_last,
  output logic                               skip_valid,
  input  logic                               skip_ready,
  output logic [LANES-1:0][H-1:0][W8-1:0]    skip_data,
  output logic                               skip_last
);
  localparam int BW = LANES * H * W8 + 1;

  logic                          d_valid, d_ready, d_last;
  logic [LANES-1:0][H-1:0][W8-1:0] d_data;
  logic [1:0]         f_valid, f_ready;
  logic [1:0][BW-1:0] f_data;

  ccn_dense #(.LANES(LANES), .IN(H), .OUT(H), .IW(W8), .WW(W8), .OW(W8),
              .RELU(1'b1), .SHIFT(SHIFT8), .LAYER_ID(L_B_DENSE)) u_dense (
    .clk, .rst_n, .cfg, .in_valid, .in_ready, .in_data, .in_last,
    .out_valid(d_valid), .out_ready(d_ready), .out_data(d_data), .out_last(d_last)
  );

  ccn_fork #(.W(BW), .N(2)) u_fork (
    .in_valid(d_valid), .in_ready(d_ready), .in_data({d_last, d_data}),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data)
  );

  ccn_dense #(.LANES(LANES), .IN(H), .OUT(GC_IN), .IW(W8), .WW(W8), .OW(W8),
              .RELU(1'b0), .SHIFT(SHIFT8), .LAYER_ID(L_B_LINEAR)) u_linear (
    .clk, .rst_n, .cfg,
    .in_valid(f_valid[0]), .in_ready(f_ready[0]),
    .in_data(f_data[0][BW-2:0]), .in_last(f_data[0][BW-1]),
    .out_valid(gc_valid), .out_ready(gc_ready), .out_data(gc_data), .out_last(gc_last)
  );

  assign skip_valid = f_valid[1];
  assign f_ready[1] = skip_ready;
  assign skip_data  = f_data[1][BW-2:0];
  assign skip_last  = f_data[1][BW-1];
endmodule
