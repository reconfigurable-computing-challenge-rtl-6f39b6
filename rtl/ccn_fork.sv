// ccn_fork: sends one stream to N consumers (a multicast edge of the
// dataflow graph). A beat is handed to all consumers in the same clock: it
// is offered to each consumer only while all the others are ready, and the
// input is acknowledged when all are ready. No storage, no added latency.
// The handshake is this design's choice.
module ccn_fork #(
  parameter int W = 32,
  parameter int N = 2
) (
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [W-1:0]        in_data,
  output logic [N-1:0]        out_valid,
  input  logic [N-1:0]        out_ready,
  output logic [N-1:0][W-1:0] out_data
);
  assign in_ready = &out_ready;
  always_comb begin
    for (int k = 0; k < N; k++) begin
      logic others;
      others = 1'b1;
      for (int j = 0; j < N; j++) if (j != k) others &= out_ready[j];
      out_valid[k] = in_valid && others;
      out_data[k]  = in_data;
    end
  end
endmodule
