// ccn_lane_conv: the Retile step between partitions with different
// parallelism. It turns a stream of LI nodes per beat into a stream of LO
// nodes per beat, node order unchanged. LO must be a multiple of LI or LI a
// multiple of LO.
//
// Widening (LO = k*LI) collects k input beats in a register and then offers
// them as one output beat; the output 'last' is that of the final input
// beat. Narrowing (LI = k*LO) holds one input beat and hands out its k
// pieces, lowest nodes first; 'last' goes with the final piece. Equal widths
// need no converter and are not allowed here.
//
// Timing: widening sustains LI nodes per clock at the input, narrowing LO
// nodes per clock at the output; the result is registered.
//
// The paper says a Retile kernel reshapes tensors between operators whose
// layouts differ; this lane converter is this design's form of it.
module ccn_lane_conv #(
  parameter int LI = 2,
  parameter int LO = 4,
  parameter int F  = 16,
  parameter int W  = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [LI-1:0][F-1:0][W-1:0] in_data,
  input  logic                        in_last,
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [LO-1:0][F-1:0][W-1:0] out_data,
  output logic                        out_last
);
  if (LO > LI) begin : g_widen
    localparam int K  = LO / LI;
    localparam int CW = $clog2(K);
    logic [CW-1:0] cnt;
    logic [LO-1:0][F-1:0][W-1:0] buf_q;
    logic last_q;

    assign in_ready  = !out_valid || out_ready;
    assign out_data  = buf_q;
    assign out_last  = last_q;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        cnt       <= '0;
        buf_q     <= '0;
        last_q    <= 1'b0;
        out_valid <= 1'b0;
      end else begin
        if (out_valid && out_ready) out_valid <= 1'b0;
        if (in_valid && in_ready) begin
          for (int l = 0; l < LI; l++) buf_q[int'(cnt) * LI + l] <= in_data[l];
          if (int'(cnt) == K - 1) begin
            cnt       <= '0;
            last_q    <= in_last;
            out_valid <= 1'b1;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
      end
    end

`ifndef SYNTHESIS
    // An event must end on a full output beat.
    a_last_aligned: assert property (@(posedge clk) disable iff (!rst_n)
      in_valid && in_ready && in_last |-> int'(cnt) == K - 1);
`endif
  end else begin : g_narrow
    localparam int K  = LI / LO;
    localparam int CW = (K > 1) ? $clog2(K) : 1;
    logic [CW-1:0] idx;
    logic [LI-1:0][F-1:0][W-1:0] hold_q;
    logic last_q, held;

    assign out_valid = held;
    assign in_ready  = !held || (out_ready && int'(idx) == K - 1);
    assign out_last  = last_q && int'(idx) == K - 1;
    always_comb begin
      for (int l = 0; l < LO; l++) out_data[l] = hold_q[int'(idx) * LO + l];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        idx    <= '0;
        hold_q <= '0;
        last_q <= 1'b0;
        held   <= 1'b0;
      end else begin
        if (held && out_ready) begin
          if (int'(idx) == K - 1) begin
            idx  <= '0;
            held <= 1'b0;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        if (in_valid && in_ready) begin
          hold_q <= in_data;
          last_q <= in_last;
          held   <= 1'b1;
        end
      end
    end
  end

`ifndef SYNTHESIS
  initial begin
    assert (LI != LO && (LO % LI == 0 || LI % LO == 0))
      else $error("ccn_lane_conv: LI and LO must differ and divide");
  end
`endif
endmodule
