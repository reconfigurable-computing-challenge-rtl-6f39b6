// tb_ccn_fifo: self-checking test of the skip-connection FIFO.
//
// Random pushes and pops against a queue model: data must leave in order,
// in_ready must fall exactly when DEPTH words are held and out_valid exactly
// when none are. A phase with simultaneous push and pop checks one word per
// clock through a non-empty FIFO; the first word written into an empty FIFO
// must be readable one clock later.
module tb_ccn_fifo;
  localparam int W = 12, D = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv, ir, ov, ordy;
  logic [W-1:0] id, od;
  ccn_fifo #(.W(W), .DEPTH(D)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id),
                                    .out_valid(ov), .out_ready(ordy), .out_data(od));

  logic [W-1:0] model[$];
  int mode = 0;   // 0 random, 1 fill, 2 drain, 3 stream
  int n_full = 0, n_empty = 0, n_pop = 0;

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (ir != (model.size() < D)) begin failures++; $display("in_ready %0d with %0d held", ir, model.size()); end
    checks++;
    if (ov != (model.size() > 0)) begin failures++; $display("out_valid %0d with %0d held", ov, model.size()); end
    if (!ir) n_full++;
    if (!ov) n_empty++;
    if (ov && ordy) begin
      checks++;
      n_pop++;
      if (od != model.pop_front()) begin failures++; $display("data mismatch"); end
    end
    if (iv && ir) model.push_back(id);
    if (iv && ir) id <= W'($urandom);
    case (mode)
      0: begin iv <= $urandom_range(0, 1); ordy <= $urandom_range(0, 1); end
      1: begin iv <= 1'b1; ordy <= 1'b0; end
      2: begin iv <= 1'b0; ordy <= 1'b1; end
      default: begin iv <= 1'b1; ordy <= 1'b1; end
    endcase
  end

  initial begin
    int p0;
    iv = 0; ordy = 0; id = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 20; rep++) begin
      mode = 0; repeat (200) @(posedge clk);
      mode = 1; repeat (10) @(posedge clk);
      mode = 2; repeat (10) @(posedge clk);
    end
    mode = 1; repeat (3) @(posedge clk);
    mode = 3; repeat (3) @(posedge clk);
    p0 = n_pop;
    repeat (50) @(posedge clk);
    checks++;
    if (n_pop - p0 != 50) begin failures++; $display("stream rate %0d/50", n_pop - p0); end
    checks++;
    if (n_full == 0 || n_empty == 0) begin failures++; $display("full/empty never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
