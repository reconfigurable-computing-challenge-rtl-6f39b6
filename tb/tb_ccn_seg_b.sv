// tb_ccn_seg_b: self-checking test of partition B.
//
// Random 8-bit nodes, four per beat, pass the Dense layer and the fused
// Linear pair. The GravNetConv output must equal Linear(Dense(x)) and the
// skip output Dense(x), each checked node by node against the reference
// layers, with independent random backpressure on the two outputs. Without
// backpressure both outputs must run at one beat per clock.
module tb_ccn_seg_b;
  import ccn_pkg::*;
  import ccn_tb_pkg::*;
  localparam int L = P_AIE;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  cfg_t cfg;

  logic iv, ir, il, gv, gr, gl, sv, sr, sl;
  logic [L-1:0][H-1:0][7:0] id, sd;
  logic [L-1:0][GC_IN-1:0][7:0] gd;

  ccn_seg_b dut (.clk, .rst_n, .cfg, .in_valid(iv), .in_ready(ir), .in_data(id), .in_last(il),
    .gc_valid(gv), .gc_ready(gr), .gc_data(gd), .gc_last(gl),
    .skip_valid(sv), .skip_ready(sr), .skip_data(sd), .skip_last(sl));

  int qg[$], qs[$];
  bit lg[$], ls[$];
  bit bp = 1, run = 0;
  int nin = 0, ng = 0, ns = 0;

  task automatic write_layer(int layer, int n_in, int n_out, int ww);
    for (int o = 0; o < n_out; o++)
      for (int i = 0; i <= n_in; i++) begin
        cfg.we <= 1'b1; cfg.layer <= 8'(layer); cfg.addr <= 12'(o * (n_in + 1) + i);
        cfg.data <= 16'(wgen(layer, o, i, ww));
        @(posedge clk);
      end
    cfg.we <= 1'b0;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (iv && ir) begin
      for (int l = 0; l < L; l++) begin
        automatic int x[$] = {};
        automatic int y[$] = {};
        automatic int z[$] = {};
        for (int i = 0; i < H; i++) x.push_back(sx(32'(id[l][i]), 8));
        dense_ref(L_B_DENSE, x, H, H, 8, 8, SHIFT8, 1'b1, y);
        foreach (y[k]) qs.push_back(y[k]);
        dense_ref(L_B_LINEAR, y, H, GC_IN, 8, 8, SHIFT8, 1'b0, z);
        foreach (z[k]) qg.push_back(z[k]);
      end
      lg.push_back(il); ls.push_back(il);
      nin++;
    end
    if (gv && gr) begin
      ng++;
      for (int l = 0; l < L; l++) for (int o = 0; o < GC_IN; o++) begin
        automatic int e = qg.pop_front();
        checks++;
        if (sx(32'(gd[l][o]), 8) != e) begin failures++; $display("gc mismatch %0d vs %0d", sx(32'(gd[l][o]), 8), e); end
      end
      checks++; if (gl != lg.pop_front()) failures++;
    end
    if (sv && sr) begin
      ns++;
      for (int l = 0; l < L; l++) for (int o = 0; o < H; o++) begin
        automatic int e = qs.pop_front();
        checks++;
        if (sx(32'(sd[l][o]), 8) != e) begin failures++; $display("skip mismatch"); end
      end
      checks++; if (sl != ls.pop_front()) failures++;
    end
    if (iv && ir) begin
      for (int l = 0; l < L; l++) for (int i = 0; i < H; i++) id[l][i] <= 8'($urandom_range(0, 255));
      il <= ((nin + 1) % 32 == 31);
    end
    iv <= run && (!bp || $urandom_range(0, 3) != 0);
    gr <= !bp || $urandom_range(0, 2) != 0;
    sr <= !bp || $urandom_range(0, 2) != 0;
  end

  initial begin
    int g0, s0;
    cfg = '0; iv = 0; gr = 0; sr = 0; il = 0; id = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    write_layer(L_B_DENSE, H, H, 8);
    write_layer(L_B_LINEAR, H, GC_IN, 8);
    run = 1;
    repeat (2000) @(posedge clk);
    bp = 0;
    repeat (5) @(posedge clk);
    g0 = ng; s0 = ns;
    repeat (100) @(posedge clk);
    checks++;
    if (ng - g0 != 100 || ns - s0 != 100) begin failures++; $display("rate %0d %0d /100", ng - g0, ns - s0); end
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
