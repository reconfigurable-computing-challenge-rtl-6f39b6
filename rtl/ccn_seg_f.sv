// ccn_seg_f: partition F (an AI Engine partition in the paper, 8-bit).
//
// The second GravNetConv result (GC_OUT features) is concatenated with
// skip 3 of partition D and passes two Dense layers. The second Dense output
// is then concatenated with skip 2 of partition D and with the lower Dense
// output of partition A; the three-way Concat is built from two two-way
// joins. A final Dense layer (2*H + H_SKIP -> H) feeds partition G.
//
// Interface: valid/ready node streams of LANES nodes per beat with 'last';
// weights through the configuration bus.
// Timing: one beat per clock; output six clocks after input.
//
// The chain and the three skip inputs follow the network figure; feature
// order in the Concats and all widths are this design's choice.
module ccn_seg_f
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
  input  logic                                 skip3_valid,
  output logic                                 skip3_ready,
  input  logic [LANES-1:0][H-1:0][W8-1:0]      skip3_data,
  input  logic                                 skip3_last,
  input  logic                                 skip2_valid,
  output logic                                 skip2_ready,
  input  logic [LANES-1:0][H-1:0][W8-1:0]      skip2_data,
  input  logic                                 skip2_last,
  input  logic                                 askip_valid,
  output logic                                 askip_ready,
  input  logic [LANES-1:0][H_SKIP-1:0][W8-1:0] askip_data,
  input  logic                                 askip_last,
  output logic                                 out_valid,
  input  logic                                 out_ready,
  output logic [LANES-1:0][H-1:0][W8-1:0]      out_data,
  output logic                                 out_last
);
  localparam int C1 = GC_OUT + H;
  localparam int C2 = 2 * H;
  localparam int C3 = 2 * H + H_SKIP;

  logic c1_valid, c1_ready, c1_last;
  logic [LANES-1:0][C1-1:0][W8-1:0] c1_data;
  logic f1_valid, f1_ready, f1_last;
  logic [LANES-1:0][H-1:0][W8-1:0] f1_data;
  logic f2_valid, f2_ready, f2_last;
  logic [LANES-1:0][H-1:0][W8-1:0] f2_data;
  logic c2_valid, c2_ready, c2_last;
  logic [LANES-1:0][C2-1:0][W8-1:0] c2_data;
  logic c3_valid, c3_ready, c3_last;
  logic [LANES-1:0][C3-1:0][W8-1:0] c3_data;

  ccn_concat #(.LANES(LANES), .FA(GC_OUT), .FB(H), .W(W8)) u_c1 (
    .clk, .rst_n,
    .a_valid(gin_valid), .a_ready(gin_ready), .a_data(gin_data), .a_last(gin_last),
    .b_valid(skip3_valid), .b_ready(skip3_ready), .b_data(skip3_data), .b_last(skip3_last),
    .out_valid(c1_valid), .out_ready(c1_ready), .out_data(c1_data), .out_last(c1_last)
  );

  ccn_dense #(.LANES(LANES), .IN(C1), .OUT(H), .IW(W8), .WW(W8), .OW(W8),
              .RELU(1'b1), .SHIFT(SHIFT8), .LAYER_ID(L_F_DENSE1)) u_f1 (
    .clk, .rst_n, .cfg,
    .in_valid(c1_valid), .in_ready(c1_ready), .in_data(c1_data), .in_last(c1_last),
    .out_valid(f1_valid), .out_ready(f1_ready), .out_data(f1_data), .out_last(f1_last)
  );

  ccn_dense #(.LANES(LANES), .IN(H), .OUT(H), .IW(W8), .WW(W8), .OW(W8),
              .RELU(1'b1), .SHIFT(SHIFT8), .LAYER_ID(L_F_DENSE2)) u_f2 (
    .clk, .rst_n, .cfg,
    .in_valid(f1_valid), .in_ready(f1_ready), .in_data(f1_data), .in_last(f1_last),
    .out_valid(f2_valid), .out_ready(f2_ready), .out_data(f2_data), .out_last(f2_last)
  );

  ccn_concat #(.LANES(LANES), .FA(H), .FB(H), .W(W8)) u_c2 (
    .clk, .rst_n,
    .a_valid(f2_valid), .a_ready(f2_ready), .a_data(f2_data), .a_last(f2_last),
    .b_valid(skip2_valid), .b_ready(skip2_ready), .b_data(skip2_data), .b_last(skip2_last),
    .out_valid(c2_valid), .out_ready(c2_ready), .out_data(c2_data), .out_last(c2_last)
  );

  ccn_concat #(.LANES(LANES), .FA(C2), .FB(H_SKIP), .W(W8)) u_c3 (
    .clk, .rst_n,
    .a_valid(c2_valid), .a_ready(c2_ready), .a_data(c2_data), .a_last(c2_last),
    .b_valid(askip_valid), .b_ready(askip_ready), .b_data(askip_data), .b_last(askip_last),
    .out_valid(c3_valid), .out_ready(c3_ready), .out_data(c3_data), .out_last(c3_last)
  );

  ccn_dense #(.LANES(LANES), .IN(C3), .OUT(H), .IW(W8), .WW(W8), .OW(W8),
              .RELU(1'b1), .SHIFT(SHIFT8), .LAYER_ID(L_F_DENSE3)) u_f3 (
    .clk, .rst_n, .cfg,
    .in_valid(c3_valid), .in_ready(c3_ready), .in_data(c3_data), .in_last(c3_last),
    .out_valid, .out_ready, .out_data, .out_last
  );
endmodule
