// ccn_cps_standin: behavioural stand-in for the condensation point
// selection, for testbenches only. The real algorithm is outside this
// design. The model takes in a whole event of (ccoord0, ccoord1, beta) node
// words, applies ccn_tb_pkg::cps_standin to the betas and returns one flag
// per node (bit 0 of a 16-bit word), two nodes per beat, with 'last' on the
// final beat. It holds at most two events. 'stall' (percent) withholds
// in_ready and out_valid at random.
module ccn_cps_standin
  import ccn_pkg::*;
  import ccn_tb_pkg::*;
#(
  parameter int L = P_FPGA
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [L-1:0][2:0][15:0]  in_data,
  input  logic                     in_last,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [L-1:0][0:0][15:0]  out_data,
  output logic                     out_last
);
  int stall = 0;
  int beta[$];
  logic [L-1:0][0:0][15:0] oq[$];
  bit olq[$];
  int n_events_held = 0;

  always @(posedge clk) begin
    if (!rst_n) begin
      in_ready <= 1'b0; out_valid <= 1'b0; out_data <= '0; out_last <= 1'b0;
    end else begin
      if (in_valid && in_ready) begin
        for (int l = 0; l < L; l++) beta.push_back(sx(32'(in_data[l][2]), 16));
        if (in_last) begin
          automatic int sel[$];
          cps_standin(beta, sel);
          for (int n = 0; n < sel.size(); n += L) begin
            logic [L-1:0][0:0][15:0] b;
            for (int l = 0; l < L; l++) b[l][0] = 16'(sel[n + l]);
            oq.push_back(b);
            olq.push_back(n + L >= sel.size());
          end
          beta = {};
          n_events_held++;
        end
      end
      if (out_valid && out_ready && out_last) n_events_held--;
      if (!out_valid || out_ready) begin
        if (oq.size() > 0 && ($urandom_range(0, 99) >= stall)) begin
          out_valid <= 1'b1;
          out_data  <= oq.pop_front();
          out_last  <= olq.pop_front();
        end else out_valid <= 1'b0;
      end
      in_ready <= (n_events_held < 2) && ($urandom_range(0, 99) >= stall);
    end
  end
endmodule
