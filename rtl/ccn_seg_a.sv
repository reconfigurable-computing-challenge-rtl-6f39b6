// ccn_seg_a: partition A, the input encoders (programmable logic, 16-bit).
//
// Each node arrives with IN_F 16-bit features (energy, time, x, y, z). The
// node stream is multicast three ways: into the upper Dense layer, whose
// H outputs feed partition B; into the lower Dense layer, whose H_SKIP
// outputs bypass the network up to the last Concat of partition F; and, as
// the energy word alone, to the multiplier of partition G.
// Both layers compute with 16-bit inputs and weights and requantise their
// outputs to 8 bits, the precision of the partitions that follow.
//
// Interface: valid/ready streams of LANES nodes per beat with an event
// 'last' flag; weights through the configuration bus.
// Timing: one beat per clock, one clock of latency on each output.
//
// The structure (two Dense layers and the energy tap) is that of the
// network figure; widths and the 16-to-8-bit requantisation are this
// design's choices.
module ccn_seg_a
  import ccn_pkg::*;
#(
  parameter int LANES = P_FPGA
) (
  input  logic clk,
  input  logic rst_n,
  input  cfg_t cfg,
  input  logic                                 in_valid,
  output logic                                 in_ready,
  input  logic [LANES-1:0][IN_F-1:0][W16-1:0]  in_data,
  input  logic                                 in_last,
  output logic                                 main_valid,
  input  logic                                 main_ready,
  output logic [LANES-1:0][H-1:0][W8-1:0]      main_data,
  output logic                                 main_last,
  output logic                                 skip_valid,
  input  logic                                 skip_ready,
  output logic [LANES-1:0][H_SKIP-1:0][W8-1:0] skip_data,
  output logic                                 skip_last,
  output logic                                 en_valid,
  input  logic                                 en_ready,
  output logic [LANES-1:0][0:0][W16-1:0]       en_data,
  output logic                                 en_last
);
  localparam int BW = LANES * IN_F * W16 + 1;

  logic [2:0]         f_valid, f_ready;
  logic [2:0][BW-1:0] f_data;

  ccn_fork #(.W(BW), .N(3)) u_fork (
    .in_valid, .in_ready, .in_data({in_last, in_data}),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data)
  );

  ccn_dense #(.LANES(LANES), .IN(IN_F), .OUT(H), .IW(W16), .WW(W16), .OW(W8),
              .RELU(1'b1), .SHIFT(SHIFT16), .LAYER_ID(L_A_DENSE)) u_dense (
    .clk, .rst_n, .cfg,
    .in_valid(f_valid[0]), .in_ready(f_ready[0]),
    .in_data(f_data[0][BW-2:0]), .in_last(f_data[0][BW-1]),
    .out_valid(main_valid), .out_ready(main_ready), .out_data(main_data), .out_last(main_last)
  );

  ccn_dense #(.LANES(LANES), .IN(IN_F), .OUT(H_SKIP), .IW(W16), .WW(W16), .OW(W8),
              .RELU(1'b1), .SHIFT(SHIFT16), .LAYER_ID(L_A_SKIP)) u_skip (
    .clk, .rst_n, .cfg,
    .in_valid(f_valid[1]), .in_ready(f_ready[1]),
    .in_data(f_data[1][BW-2:0]), .in_last(f_data[1][BW-1]),
    .out_valid(skip_valid), .out_ready(skip_ready), .out_data(skip_data), .out_last(skip_last)
  );

  // Energy tap: feature 0 of every node, registered like the layer outputs.
  logic [LANES-1:0][IN_F-1:0][W16-1:0] f2_nodes;
  assign f2_nodes  = f_data[2][BW-2:0];
  assign f_ready[2] = !en_valid || en_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en_valid <= 1'b0;
      en_data  <= '0;
      en_last  <= 1'b0;
    end else if (f_ready[2]) begin
      en_valid <= f_valid[2];
      if (f_valid[2]) begin
        for (int l = 0; l < LANES; l++) en_data[l][0] <= f2_nodes[l][0];
        en_last <= f_data[2][BW-1];
      end
    end
  end
endmodule
