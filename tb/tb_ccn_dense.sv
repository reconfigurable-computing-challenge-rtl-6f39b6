// tb_ccn_dense: self-checking test of the Dense/Linear operator.
//
// Two instances share one configuration bus: a 16-bit Dense (ReLU, 8-bit
// output) and an 8-bit Linear (no ReLU, 16-bit weights) with different layer
// identifiers, so a write to one layer must not reach the other. Random
// beats enter under random backpressure and every output node is compared
// with the reference layer of ccn_tb_pkg. A last phase without backpressure
// checks the rate of one beat per clock and the one-clock latency.
module tb_ccn_dense;
  import ccn_pkg::*;
  import ccn_tb_pkg::*;

  localparam int L = 2, IN0 = 5, OUT0 = 6, IN1 = 6, OUT1 = 3;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // Instance 0: Dense, 16-bit in/weights, 8-bit out.
  logic v0, r0, lst0, ov0, or0, ol0;
  logic [L-1:0][IN0-1:0][15:0] d0;
  logic [L-1:0][OUT0-1:0][7:0] od0;
  ccn_dense #(.LANES(L), .IN(IN0), .OUT(OUT0), .IW(16), .WW(16), .OW(8), .RELU(1'b1),
              .SHIFT(8), .LAYER_ID(8'd0)) dut0 (
    .clk, .rst_n, .cfg, .in_valid(v0), .in_ready(r0), .in_data(d0), .in_last(lst0),
    .out_valid(ov0), .out_ready(or0), .out_data(od0), .out_last(ol0));

  // Instance 1: Linear, 8-bit in, 16-bit weights and out.
  logic v1, r1, lst1, ov1, or1, ol1;
  logic [L-1:0][IN1-1:0][7:0] d1;
  logic [L-1:0][OUT1-1:0][15:0] od1;
  ccn_dense #(.LANES(L), .IN(IN1), .OUT(OUT1), .IW(8), .WW(16), .OW(16), .RELU(1'b0),
              .SHIFT(6), .LAYER_ID(8'd7)) dut1 (
    .clk, .rst_n, .cfg, .in_valid(v1), .in_ready(r1), .in_data(d1), .in_last(lst1),
    .out_valid(ov1), .out_ready(or1), .out_data(od1), .out_last(ol1));

  int exp0[$], exp1[$];      // expected words, in output order
  bit expl0[$], expl1[$];
  bit bp = 1;                // random backpressure enabled
  bit run = 0;               // stimulus enabled once weights are loaded
  int n_in0 = 0, n_out0 = 0, n_relu_zero = 0, n_sat = 0;

  task automatic write_layer(int layer, int n_in, int n_out);
    for (int o = 0; o < n_out; o++)
      for (int i = 0; i <= n_in; i++) begin
        cfg.we <= 1'b1; cfg.layer <= 8'(layer); cfg.addr <= 12'(o * (n_in + 1) + i);
        cfg.data <= 16'(wgen(layer, o, i, 16));
        @(posedge clk);
      end
    cfg.we <= 1'b0;
  endtask

  // Drivers: new random beat whenever the current one is taken.
  task automatic new_beat0();
    for (int l = 0; l < L; l++) for (int i = 0; i < IN0; i++) d0[l][i] <= 16'($urandom_range(0, 700));
    lst0 <= ($urandom_range(0, 3) == 0);
  endtask
  task automatic new_beat1();
    for (int l = 0; l < L; l++) for (int i = 0; i < IN1; i++) d1[l][i] <= 8'($urandom);
    lst1 <= $urandom_range(0, 1);
  endtask

  always @(posedge clk) if (rst_n) begin
    // scoreboard input side
    if (v0 && r0) begin
      for (int l = 0; l < L; l++) begin
        automatic int x[$] = {};
        automatic int y[$] = {};
        for (int i = 0; i < IN0; i++) x.push_back(int'(d0[l][i]));
        dense_ref(0, x, IN0, OUT0, 16, 8, 8, 1'b1, y);
        foreach (y[k]) exp0.push_back(y[k]);
      end
      expl0.push_back(lst0);
      n_in0++;
    end
    if (v1 && r1) begin
      for (int l = 0; l < L; l++) begin
        automatic int x[$] = {};
        automatic int y[$] = {};
        for (int i = 0; i < IN1; i++) x.push_back(sx(32'(d1[l][i]), 8));
        dense_ref(7, x, IN1, OUT1, 16, 16, 6, 1'b0, y);
        foreach (y[k]) exp1.push_back(y[k]);
      end
      expl1.push_back(lst1);
    end
    // output side
    if (ov0 && or0) begin
      n_out0++;
      for (int l = 0; l < L; l++) for (int o = 0; o < OUT0; o++) begin
        automatic int e;
        e = exp0.pop_front();
        checks++;
        if (sx(32'(od0[l][o]), 8) != e) begin
          failures++;
          $display("dense0 mismatch lane %0d out %0d: got %0d exp %0d", l, o, sx(32'(od0[l][o]), 8), e);
        end
        if (e == 0) n_relu_zero++;
        if (e == 127) n_sat++;
      end
      checks++;
      if (ol0 != expl0.pop_front()) failures++;
    end
    if (ov1 && or1) begin
      for (int l = 0; l < L; l++) for (int o = 0; o < OUT1; o++) begin
        automatic int e;
        e = exp1.pop_front();
        checks++;
        if (sx(32'(od1[l][o]), 16) != e) begin
          failures++;
          $display("dense1 mismatch lane %0d out %0d: got %0d exp %0d", l, o, sx(32'(od1[l][o]), 16), e);
        end
      end
      checks++;
      if (ol1 != expl1.pop_front()) failures++;
    end
    // next stimulus
    if (v0 && r0) new_beat0();
    if (v1 && r1) new_beat1();
    v0  <= !run ? 1'b0 : bp ? $urandom_range(0, 3) != 0 : 1'b1;
    v1  <= !run ? 1'b0 : bp ? $urandom_range(0, 1) != 0 : 1'b1;
    or0 <= bp ? $urandom_range(0, 2) != 0 : 1'b1;
    or1 <= bp ? $urandom_range(0, 2) != 0 : 1'b1;
  end

  initial begin
    int c0, t0;
    cfg = '0; v0 = 0; v1 = 0; or0 = 0; or1 = 0;
    new_beat0(); new_beat1();
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Layer 0 gets its weights; layer 7 gets its own. A write to layer 3
    // (no such instance here) must change nothing.
    write_layer(0, IN0, OUT0);
    write_layer(7, IN1, OUT1);
    cfg.we <= 1'b1; cfg.layer <= 8'd3; cfg.addr <= 12'd0; cfg.data <= 16'h7fff;
    @(posedge clk); cfg.we <= 1'b0;
    run = 1;
    repeat (2000) @(posedge clk);
    // Rate phase: no backpressure, one beat per clock.
    bp = 0;
    repeat (5) @(posedge clk);
    c0 = n_out0; t0 = 0;
    repeat (100) @(posedge clk);
    checks++;
    if (n_out0 - c0 != 100) begin
      failures++;
      $display("rate: %0d beats in 100 clocks", n_out0 - c0);
    end
    // Latency: output count trails input count by exactly one beat.
    checks++;
    if (n_in0 - n_out0 != 1) begin failures++; $display("latency: in %0d out %0d", n_in0, n_out0); end
    checks++;
    if (n_relu_zero == 0 || n_sat == 0) begin
      failures++; $display("coverage: relu zeros %0d saturations %0d", n_relu_zero, n_sat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
