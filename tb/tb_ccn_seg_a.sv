// tb_ccn_seg_a: self-checking test of partition A.
//
// Loads both layers of A with generated 16-bit weights, streams random
// nodes (positive energy and time, signed positions) under random
// backpressure on each of the three outputs independently, and checks
// every output node: the upper Dense (H words), the lower Dense (H_SKIP
// words) and the energy tap, each against the reference layer, plus the
// event 'last' flag. Without backpressure each output must deliver one
// beat per clock.
module tb_ccn_seg_a;
  import ccn_pkg::*;
  import ccn_tb_pkg::*;
  localparam int L = P_FPGA;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  cfg_t cfg;

  logic iv, ir, il, mv, mr, ml, sv, sr, sl, ev, er, el;
  logic [L-1:0][IN_F-1:0][15:0] id;
  logic [L-1:0][H-1:0][7:0] md;
  logic [L-1:0][H_SKIP-1:0][7:0] sd;
  logic [L-1:0][0:0][15:0] ed;

  ccn_seg_a dut (.clk, .rst_n, .cfg, .in_valid(iv), .in_ready(ir), .in_data(id), .in_last(il),
    .main_valid(mv), .main_ready(mr), .main_data(md), .main_last(ml),
    .skip_valid(sv), .skip_ready(sr), .skip_data(sd), .skip_last(sl),
    .en_valid(ev), .en_ready(er), .en_data(ed), .en_last(el));

  int qm[$], qs[$], qe[$];
  bit lm[$], ls[$], le[$];
  bit bp = 1, run = 0;
  int nin = 0, nm = 0;

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
        for (int i = 0; i < IN_F; i++) x.push_back(sx(32'(id[l][i]), 16));
        dense_ref(L_A_DENSE, x, IN_F, H, 16, 8, SHIFT16, 1'b1, y);
        foreach (y[k]) qm.push_back(y[k]);
        dense_ref(L_A_SKIP, x, IN_F, H_SKIP, 16, 8, SHIFT16, 1'b1, y);
        foreach (y[k]) qs.push_back(y[k]);
        qe.push_back(x[0]);
      end
      lm.push_back(il); ls.push_back(il); le.push_back(il);
      nin++;
    end
    if (mv && mr) begin
      nm++;
      for (int l = 0; l < L; l++) for (int o = 0; o < H; o++) begin
        automatic int e = qm.pop_front();
        checks++;
        if (sx(32'(md[l][o]), 8) != e) begin failures++; $display("main mismatch %0d vs %0d", sx(32'(md[l][o]), 8), e); end
      end
      checks++; if (ml != lm.pop_front()) failures++;
    end
    if (sv && sr) begin
      for (int l = 0; l < L; l++) for (int o = 0; o < H_SKIP; o++) begin
        automatic int e = qs.pop_front();
        checks++;
        if (sx(32'(sd[l][o]), 8) != e) begin failures++; $display("skip mismatch"); end
      end
      checks++; if (sl != ls.pop_front()) failures++;
    end
    if (ev && er) begin
      for (int l = 0; l < L; l++) begin
        checks++;
        if (sx(32'(ed[l][0]), 16) != qe.pop_front()) begin failures++; $display("energy mismatch"); end
      end
      checks++; if (el != le.pop_front()) failures++;
    end
    if (iv && ir) begin
      for (int l = 0; l < L; l++) begin
        id[l][0] <= 16'($urandom_range(0, 400));
        id[l][1] <= 16'($urandom_range(0, 200));
        for (int i = 2; i < IN_F; i++) id[l][i] <= 16'($urandom_range(0, 600) - 300);
      end
      il <= ((nin + 1) % 64 == 63);
    end
    iv <= run && (!bp || $urandom_range(0, 3) != 0);
    mr <= !bp || $urandom_range(0, 2) != 0;
    sr <= !bp || $urandom_range(0, 2) != 0;
    er <= !bp || $urandom_range(0, 2) != 0;
  end

  initial begin
    int c0;
    cfg = '0; iv = 0; mr = 0; sr = 0; er = 0; il = 0; id = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    write_layer(L_A_DENSE, IN_F, H, 16);
    write_layer(L_A_SKIP, IN_F, H_SKIP, 16);
    run = 1;
    repeat (2000) @(posedge clk);
    bp = 0;
    repeat (5) @(posedge clk);
    c0 = nm;
    repeat (100) @(posedge clk);
    checks++;
    if (nm - c0 != 100) begin failures++; $display("rate %0d/100", nm - c0); end
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
