// ccn_seg_d: partition D (an AI Engine partition in the paper, 8-bit).
//
// The GravNetConv result of partition C (GC_OUT features) is concatenated
// with the skip from partition B (H features), then passes three Dense
// layers. The output of the second Dense leaves as skip 2 (to the last
// Concat of partition F) and the output of the third as skip 3 (to the
// first Concat of F). The third Dense also feeds the fused pair of Linear
// layers that make the coordinates and features for the second GravNetConv.
//
// Interface: valid/ready node streams of LANES nodes per beat with 'last';
// weights through the configuration bus.
// Timing: one beat per clock; GravNetConv output five clocks after input.
//
// The chain and the two taps follow the network figure. Feature order in
// the Concat (GravNetConv result first) and all widths are this design's
// choice.
module ccn_seg_d
  import ccn_pkg::*;
#(
  parameter int LANES = P_AIE
) (
  input  logic clk,
  input  logic rst_n,
  input  cfg_t cfg,
  input  logic                                 gin_valid,
  output logic                                 gin_ready,
  input  logic [LANES-1:0][GC_OUT-1:0][W8-1:0] gin_data,
  input  logic                                 gin_last,
  input  logic                                 bskip_valid,
  output logic                                 bskip_ready,
  input  logic [LANES-1:0][H-1:0][W8-1:0]      bskip_data,
  input  logic                                 bskip_last,
  output logic                                 gc_valid,
  input  logic                                 gc_ready,
  output logic [LANES-1:0][GC_IN-1:0][W8-1:0]  gc_data,
  output logic                                 gc_last,
  output logic                                 skip2_valid,
  input  logic                                 skip2_ready,
  output logic [LANES-1:0][H-1:0][W8-1:0]      skip2_data,
  output logic                                 skip2_last,
  output logic                                 skip3_valid,
  input  logic                                 skip3_ready,
  output logic [LANES-1:0][H-1:0][W8-1:0]      skip3_data,
  output logic                                 skip3_last
);
  localparam int CI = GC_OUT + H;
  localparam int BW = LANES * H * W8 + 1;

  logic c_valid, c_ready, c_last;
  logic [LANES-1:0][CI-1:0][W8-1:0] c_data;
  logic d1_valid, d1_ready, d1_last;
  logic [LANES-1:0][H-1:0][W8-1:0] d1_data;
  logic d2_valid, d2_ready, d2_last;
  logic [LANES-1:0][H-1:0][W8-1:0] d2_data;
  logic d3_valid, d3_ready, d3_last;
  logic [LANES-1:0][H-1:0][W8-1:0] d3_data;
  logic [1:0] f2_valid, f2_ready, f3_valid, f3_ready;
  logic [1:0][BW-1:0] f2_data, f3_data;

  ccn_concat #(.LANES(LANES), .FA(GC_OUT), .FB(H), .W(W8)) u_concat (
    .clk, .rst_n,
    .a_valid(gin_valid), .a_ready(gin_ready), .a_data(gin_data), .a_last(gin_last),
    .b_valid(bskip_valid), .b_ready(bskip_ready), .b_data(bskip_data), .b_last(bskip_last),
    .out_valid(c_valid), .out_ready(c_ready), .out_data(c_data), .out_last(c_last)
  );

  ccn_dense #(.LANES(LANES), .IN(CI), .OUT(H), .IW(W8), .WW(W8), .OW(W8),
              .RELU(1'b1), .SHIFT(SHIFT8), .LAYER_ID(L_D_DENSE1)) u_d1 (
    .clk, .rst_n, .cfg,
    .in_valid(c_valid), .in_ready(c_ready), .in_data(c_data), .in_last(c_last),
    .out_valid(d1_valid), .out_ready(d1_ready), .out_data(d1_data), .out_last(d1_last)
  );

  ccn_dense #(.LANES(LANES), .IN(H), .OUT(H), .IW(W8), .WW(W8), .OW(W8),
              .RELU(1'b1), .SHIFT(SHIFT8), .LAYER_ID(L_D_DENSE2)) u_d2 (
    .clk, .rst_n, .cfg,
    .in_valid(d1_valid), .in_ready(d1_ready), .in_data(d1_data), .in_last(d1_last),
    .out_valid(d2_valid), .out_ready(d2_ready), .out_data(d2_data), .out_last(d2_last)
  );

  ccn_fork #(.W(BW), .N(2)) u_f2 (
    .in_valid(d2_valid), .in_ready(d2_ready), .in_data({d2_last, d2_data}),
    .out_valid(f2_valid), .out_ready(f2_ready), .out_data(f2_data)
  );
  assign skip2_valid = f2_valid[1];
  assign f2_ready[1] = skip2_ready;
  assign skip2_data  = f2_data[1][BW-2:0];
  assign skip2_last  = f2_data[1][BW-1];

  ccn_dense #(.LANES(LANES), .IN(H), .OUT(H), .IW(W8), .WW(W8), .OW(W8),
              .RELU(1'b1), .SHIFT(SHIFT8), .LAYER_ID(L_D_DENSE3)) u_d3 (
    .clk, .rst_n, .cfg,
    .in_valid(f2_valid[0]), .in_ready(f2_ready[0]),
    .in_data(f2_data[0][BW-2:0]), .in_last(f2_data[0][BW-1]),
    .out_valid(d3_valid), .out_ready(d3_ready), .out_data(d3_data), .out_last(d3_last)
  );

  ccn_fork #(.W(BW), .N(2)) u_f3 (
    .in_valid(d3_valid), .in_ready(d3_ready), .in_data({d3_last, d3_data}),
    .out_valid(f3_valid), .out_ready(f3_ready), .out_data(f3_data)
  );
  assign skip3_valid = f3_valid[1];
  assign f3_ready[1] = skip3_ready;
  assign skip3_data  = f3_data[1][BW-2:0];
  assign skip3_last  = f3_data[1][BW-1];

  ccn_dense #(.LANES(LANES), .IN(H), .OUT(GC_IN), .IW(W8), .WW(W8), .OW(W8),
              .RELU(1'b0), .SHIFT(SHIFT8), .LAYER_ID(L_D_LINEAR)) u_linear (
    .clk, .rst_n, .cfg,
    .in_valid(f3_valid[0]), .in_ready(f3_ready[0]),
    .in_data(f3_data[0][BW-2:0]), .in_last(f3_data[0][BW-1]),
    .out_valid(gc_valid), .out_ready(gc_ready), .out_data(gc_data), .out_last(gc_last)
  );
endmodule
