// tb_ccn_seg_d: self-checking test of partition D.
//
// The GravNetConv input and the skip from B are driven independently with
// random gaps, so the Concat must wait for either side. The reference pairs
// the n-th beat of each input, concatenates them (GravNetConv features
// first) and runs the three Dense layers and the fused Linear pair; the
// GravNetConv output and both skip outputs are compared node by node under
// independent random backpressure. Without gaps all three outputs run at
// one beat per clock.
module tb_ccn_seg_d;
  import ccn_pkg::*;
  import ccn_tb_pkg::*;
  localparam int L = P_AIE;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  cfg_t cfg;

  logic gv, gr, gl, bv, br, bl, ov, ordy, ol, s2v, s2r, s2l, s3v, s3r, s3l;
  logic [L-1:0][GC_OUT-1:0][7:0] gd;
  logic [L-1:0][H-1:0][7:0] bd, s2d, s3d;
  logic [L-1:0][GC_IN-1:0][7:0] od;

  ccn_seg_d dut (.clk, .rst_n, .cfg,
    .gin_valid(gv), .gin_ready(gr), .gin_data(gd), .gin_last(gl),
    .bskip_valid(bv), .bskip_ready(br), .bskip_data(bd), .bskip_last(bl),
    .gc_valid(ov), .gc_ready(ordy), .gc_data(od), .gc_last(ol),
    .skip2_valid(s2v), .skip2_ready(s2r), .skip2_data(s2d), .skip2_last(s2l),
    .skip3_valid(s3v), .skip3_ready(s3r), .skip3_data(s3d), .skip3_last(s3l));

  int ig[$][$], ib[$][$];   // accepted input beats, flattened per beat
  bit il[$];
  int qo[$], q2[$], q3[$];
  bit lo[$], l2[$], l3[$];
  bit bp = 1, run = 0;
  int ng = 0, nb = 0, no = 0, n2 = 0, n3 = 0;

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
    if (gv && gr) begin
      automatic int f[$] = {};
      for (int l = 0; l < L; l++) for (int i = 0; i < GC_OUT; i++) f.push_back(sx(32'(gd[l][i]), 8));
      ig.push_back(f); il.push_back(gl);
    end
    if (bv && br) begin
      automatic int f[$] = {};
      for (int l = 0; l < L; l++) for (int i = 0; i < H; i++) f.push_back(sx(32'(bd[l][i]), 8));
      ib.push_back(f);
    end
    while (ig.size() > 0 && ib.size() > 0) begin
      automatic int a[$] = ig.pop_front();
      automatic int b[$] = ib.pop_front();
      automatic bit last = il.pop_front();
      for (int l = 0; l < L; l++) begin
        automatic int x[$] = {};
        automatic int y1[$] = {};
        automatic int y2[$] = {};
        automatic int y3[$] = {};
        automatic int z[$] = {};
        for (int i = 0; i < GC_OUT; i++) x.push_back(a[l * GC_OUT + i]);
        for (int i = 0; i < H; i++) x.push_back(b[l * H + i]);
        dense_ref(L_D_DENSE1, x, GC_OUT + H, H, 8, 8, SHIFT8, 1'b1, y1);
        dense_ref(L_D_DENSE2, y1, H, H, 8, 8, SHIFT8, 1'b1, y2);
        dense_ref(L_D_DENSE3, y2, H, H, 8, 8, SHIFT8, 1'b1, y3);
        dense_ref(L_D_LINEAR, y3, H, GC_IN, 8, 8, SHIFT8, 1'b0, z);
        foreach (y2[k]) q2.push_back(y2[k]);
        foreach (y3[k]) q3.push_back(y3[k]);
        foreach (z[k]) qo.push_back(z[k]);
      end
      lo.push_back(last); l2.push_back(last); l3.push_back(last);
    end
    if (ov && ordy) begin
      no++;
      for (int l = 0; l < L; l++) for (int o = 0; o < GC_IN; o++) begin
        automatic int e = qo.pop_front();
        checks++;
        if (sx(32'(od[l][o]), 8) != e) begin failures++; $display("gc mismatch %0d vs %0d", sx(32'(od[l][o]), 8), e); end
      end
      checks++; if (ol != lo.pop_front()) failures++;
    end
    if (s2v && s2r) begin
      n2++;
      for (int l = 0; l < L; l++) for (int o = 0; o < H; o++) begin
        automatic int e = q2.pop_front();
        checks++;
        if (sx(32'(s2d[l][o]), 8) != e) begin failures++; $display("skip2 mismatch"); end
      end
      checks++; if (s2l != l2.pop_front()) failures++;
    end
    if (s3v && s3r) begin
      n3++;
      for (int l = 0; l < L; l++) for (int o = 0; o < H; o++) begin
        automatic int e = q3.pop_front();
        checks++;
        if (sx(32'(s3d[l][o]), 8) != e) begin failures++; $display("skip3 mismatch"); end
      end
      checks++; if (s3l != l3.pop_front()) failures++;
    end
    if (gv && gr) begin
      for (int l = 0; l < L; l++) for (int i = 0; i < GC_OUT; i++) gd[l][i] <= 8'($urandom);
      ng++; gl <= ((ng + 1) % 32 == 0);
    end
    if (bv && br) begin
      for (int l = 0; l < L; l++) for (int i = 0; i < H; i++) bd[l][i] <= 8'($urandom_range(0, 127));
      nb++; bl <= ((nb + 1) % 32 == 0);
    end
    gv   <= run && (!bp || $urandom_range(0, 2) != 0);
    bv   <= run && (!bp || $urandom_range(0, 3) != 0);
    ordy <= !bp || $urandom_range(0, 3) != 0;
    s2r  <= !bp || $urandom_range(0, 3) != 0;
    s3r  <= !bp || $urandom_range(0, 3) != 0;
  end

  initial begin
    int o0, a0, b0;
    cfg = '0; gv = 0; bv = 0; ordy = 0; s2r = 0; s3r = 0; gl = 0; bl = 0; gd = '0; bd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    write_layer(L_D_DENSE1, GC_OUT + H, H, 8);
    write_layer(L_D_DENSE2, H, H, 8);
    write_layer(L_D_DENSE3, H, H, 8);
    write_layer(L_D_LINEAR, H, GC_IN, 8);
    run = 1;
    repeat (2000) @(posedge clk);
    bp = 0;
    repeat (10) @(posedge clk);
    o0 = no; a0 = n2; b0 = n3;
    repeat (100) @(posedge clk);
    checks++;
    if (no - o0 != 100 || n2 - a0 != 100 || n3 - b0 != 100) begin
      failures++; $display("rate %0d %0d %0d /100", no - o0, n2 - a0, n3 - b0);
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
