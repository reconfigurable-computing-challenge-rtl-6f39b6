// ccn_seg_g: partition G, the output layer (programmable logic, 16-bit).
//
// A Linear layer with 16-bit weights turns the H features of each node into
// N_HEADS 16-bit head values: energy, signal, position x/y/z, two
// condensation coordinates and beta. The node's energy head is then
// multiplied by the node's measured input energy, delivered from partition
// A through a skip buffer: energy_out = sat16((head * e_in) >>> MULT_SHIFT).
// All other heads pass unchanged. The condensation coordinates and beta are
// what the condensation point selection (outside this module) consumes.
//
// Interface: valid/ready node streams of LANES nodes per beat with 'last';
// weights through the configuration bus.
// Timing: one beat per clock; output three clocks after input.
//
// The heads and the energy multiplication follow the network figure. That
// the output layer is one fused Linear layer without activation, the head
// order and the multiplier scaling are this design's choices.
module ccn_seg_g
  import ccn_pkg::*;
#(
  parameter int LANES = P_FPGA
) (
  input  logic clk,
  input  logic rst_n,
  input  cfg_t cfg,
  input  logic                                  in_valid,
  output logic                                  in_ready,
  input  logic [LANES-1:0][H-1:0][W8-1:0]       in_data,
  input  logic                                  in_last,
  input  logic                                  en_valid,
  output logic                                  en_ready,
  input  logic [LANES-1:0][0:0][W16-1:0]        en_data,
  input  logic                                  en_last,
  output logic                                  out_valid,
  input  logic                                  out_ready,
  output logic [LANES-1:0][N_HEADS-1:0][W16-1:0] out_data,
  output logic                                  out_last
);
  logic h_valid, h_ready, h_last;
  logic [LANES-1:0][N_HEADS-1:0][W16-1:0] h_data;
  logic j_valid, j_ready, j_last;
  logic [LANES-1:0][N_HEADS:0][W16-1:0] j_data;

  ccn_dense #(.LANES(LANES), .IN(H), .OUT(N_HEADS), .IW(W8), .WW(W16), .OW(W16),
              .RELU(1'b0), .SHIFT(SHIFT16), .LAYER_ID(L_G_OUT)) u_out (
    .clk, .rst_n, .cfg, .in_valid, .in_ready, .in_data, .in_last,
    .out_valid(h_valid), .out_ready(h_ready), .out_data(h_data), .out_last(h_last)
  );

  ccn_concat #(.LANES(LANES), .FA(N_HEADS), .FB(1), .W(W16)) u_join (
    .clk, .rst_n,
    .a_valid(h_valid), .a_ready(h_ready), .a_data(h_data), .a_last(h_last),
    .b_valid(en_valid), .b_ready(en_ready), .b_data(en_data), .b_last(en_last),
    .out_valid(j_valid), .out_ready(j_ready), .out_data(j_data), .out_last(j_last)
  );

  // Energy multiplier.
  logic [LANES-1:0][N_HEADS-1:0][W16-1:0] m_data;
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [2*W16-1:0] p;
      p = ($signed(j_data[l][HD_ENERGY]) * $signed(j_data[l][N_HEADS])) >>> MULT_SHIFT;
      m_data[l] = j_data[l][N_HEADS-1:0];
      if (p > 32'sd32767)       m_data[l][HD_ENERGY] = 16'h7fff;
      else if (p < -32'sd32768) m_data[l][HD_ENERGY] = 16'h8000;
      else                      m_data[l][HD_ENERGY] = p[15:0];
    end
  end

  assign j_ready = !out_valid || out_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
    end else if (j_ready) begin
      out_valid <= j_valid;
      if (j_valid) begin
        out_data <= m_data;
        out_last <= j_last;
      end
    end
  end
endmodule
