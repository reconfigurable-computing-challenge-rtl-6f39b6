// ccn_gravnet_standin: behavioural stand-in for a GravNetConv layer, for
// testbenches only. The real layer is outside this design; this model only
// has the same stream ports and the same event-level behaviour: it takes in
// a whole event (up to the beat with 'last'), computes
// ccn_tb_pkg::gravnet_standin on it, and sends the event back. It holds at
// most two events; a new event is taken in while the previous one is sent.
// 'stall' (percent) withholds in_ready and out_valid at random.
module ccn_gravnet_standin
  import ccn_pkg::*;
  import ccn_tb_pkg::*;
#(
  parameter int L = P_FPGA
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [L-1:0][GC_IN-1:0][7:0] in_data,
  input  logic                         in_last,
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic [L-1:0][GC_OUT-1:0][7:0] out_data,
  output logic                         out_last
);
  int stall = 0;
  int cur[$][$];                       // nodes of the event being received
  logic [L-1:0][GC_OUT-1:0][7:0] oq[$];  // beats ready to send
  bit olq[$];
  int n_events_held = 0;

  always @(posedge clk) begin
    if (!rst_n) begin
      in_ready <= 1'b0; out_valid <= 1'b0; out_data <= '0; out_last <= 1'b0;
    end else begin
      if (in_valid && in_ready) begin
        for (int l = 0; l < L; l++) begin
          automatic int nd[$] = {};
          for (int f = 0; f < GC_IN; f++) nd.push_back(sx(32'(in_data[l][f]), 8));
          cur.push_back(nd);
        end
        if (in_last) begin
          automatic int y[$][$];
          gravnet_standin(cur, y);
          for (int n = 0; n < y.size(); n += L) begin
            logic [L-1:0][GC_OUT-1:0][7:0] b;
            for (int l = 0; l < L; l++) for (int f = 0; f < GC_OUT; f++) b[l][f] = 8'(y[n + l][f]);
            oq.push_back(b);
            olq.push_back(n + L >= y.size());
          end
          cur = {};
          n_events_held++;
        end
      end
      if (out_valid && out_ready) begin
        if (out_last) n_events_held--;
      end
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
