// ccn_dense: per-node fully connected layer (the Dense and Linear operators).
//
// For every node of a beat it computes y[o] = sat(relu((sum_i W[o][i]*x[i]
// + (b[o] << SHIFT)) >>> SHIFT)), where the ReLU is present only when RELU
// is set. A Dense operator is a Linear layer fused with its following ReLU;
// a Linear operator is the same unit with RELU = 0. The LANES nodes of a
// beat are computed in parallel with one shared set of weights, which is how
// the spatial parallelisation factor P replicates an operator chain.
//
// Interface: valid/ready node stream in and out; the beat carries LANES
// nodes of IN (resp. OUT) signed words and a 'last' flag that marks the
// final beat of an event and is passed through unchanged. Weights and biases
// are written through the configuration bus (see ccn_pkg) and are kept in
// registers cleared at reset.
//
// Timing: one register stage; a beat is accepted every clock when the
// output is free, so the result appears one clock after the input.
//
// The operator function follows the paper; the fixed-point format (shift,
// saturation), the single pipeline stage and the configuration bus are
// this design's choices.
module ccn_dense
  import ccn_pkg::*;
#(
  parameter int   LANES    = 2,
  parameter int   IN       = 5,
  parameter int   OUT      = 16,
  parameter int   IW       = 8,   // input word width
  parameter int   WW       = 8,   // weight and bias width
  parameter int   OW       = 8,   // output word width
  parameter bit   RELU     = 1'b1,
  parameter int   SHIFT    = 6,
  parameter logic [7:0] LAYER_ID = 8'd0
) (
  input  logic clk,
  input  logic rst_n,
  input  cfg_t cfg,
  input  logic                              in_valid,
  output logic                              in_ready,
  input  logic [LANES-1:0][IN-1:0][IW-1:0]  in_data,
  input  logic                              in_last,
  output logic                              out_valid,
  input  logic                              out_ready,
  output logic [LANES-1:0][OUT-1:0][OW-1:0] out_data,
  output logic                              out_last
);
  localparam int AW = IW + WW + $clog2(IN + 1) + SHIFT + 2;

  logic signed [WW-1:0] w [OUT][IN];
  logic signed [WW-1:0] b [OUT];

  // Configuration writes: address o*(IN+1)+i selects W[o][i], i == IN the bias.
  localparam int OB = (OUT > 1) ? $clog2(OUT) : 1;
  localparam int IB = (IN > 1) ? $clog2(IN) : 1;
  logic [11:0] cfg_o, cfg_i;
  assign cfg_o = cfg.addr / 12'(IN + 1);
  assign cfg_i = cfg.addr % 12'(IN + 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < OUT; o++) begin
        b[o] <= '0;
        for (int i = 0; i < IN; i++) w[o][i] <= '0;
      end
    end else if (cfg.we && cfg.layer == LAYER_ID && int'(cfg_o) < OUT) begin
      if (int'(cfg_i) == IN) b[cfg_o[OB-1:0]] <= WW'(cfg.data);
      else                   w[cfg_o[OB-1:0]][cfg_i[IB-1:0]] <= WW'(cfg.data);
    end
  end

  // Multiply-accumulate, ReLU and saturation for every lane. The products
  // are enumerated by one flat index k = (l*OUT + o)*IN + i.
  logic signed [AW-1:0] acc [LANES*OUT];
  logic [LANES-1:0][OUT-1:0][OW-1:0] y;
  always_comb begin
    for (int k = 0; k < LANES * OUT; k++)
      acc[k] = AW'(b[k % OUT]) <<< SHIFT;
    for (int k = 0; k < LANES * OUT * IN; k++)
      acc[k / IN] += AW'($signed(in_data[k / (OUT * IN)][k % IN])) * AW'(w[(k / IN) % OUT][k % IN]);
    for (int k = 0; k < LANES * OUT; k++) begin
      logic signed [AW-1:0] a;
      a = acc[k] >>> SHIFT;
      if (RELU && a < 0) a = '0;
      if (a > AW'((2 ** (OW - 1)) - 1))   y[k / OUT][k % OUT] = {1'b0, {(OW-1){1'b1}}};
      else if (a < -AW'(2 ** (OW - 1)))   y[k / OUT][k % OUT] = {1'b1, {(OW-1){1'b0}}};
      else                                y[k / OUT][k % OUT] = a[OW-1:0];
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_data <= y;
        out_last <= in_last;
      end
    end
  end

`ifndef SYNTHESIS
  // A beat that is offered must stay unchanged until it is taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data) && $stable(out_last));
`endif
endmodule
