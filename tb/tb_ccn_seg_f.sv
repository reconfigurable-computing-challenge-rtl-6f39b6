// tb_ccn_seg_f: self-checking test of partition F.
//
// Four inputs (second GravNetConv result, skip 3 and skip 2 of partition D,
// the lower Dense of partition A) are driven independently with random
// gaps. The reference pairs the n-th beat of every input and computes
// Dense3([Dense2(Dense1([gc, skip3])), skip2, askip]); the output is
// compared node by node under random backpressure. Without gaps the
// output runs at one beat per clock.
module tb_ccn_seg_f;
  import ccn_pkg::*;
  import ccn_tb_pkg::*;
  localparam int L = P_AIE;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  cfg_t cfg;

  logic [3:0] v, r, lst;
  logic [L-1:0][GC_OUT-1:0][7:0] gd;
  logic [L-1:0][H-1:0][7:0] s3d, s2d, od;
  logic [L-1:0][H_SKIP-1:0][7:0] ad;
  logic ov, ordy, ol;
  localparam int NF [4] = '{GC_OUT, H, H, H_SKIP};

  ccn_seg_f dut (.clk, .rst_n, .cfg,
    .gin_valid(v[0]), .gin_ready(r[0]), .gin_data(gd), .gin_last(lst[0]),
    .skip3_valid(v[1]), .skip3_ready(r[1]), .skip3_data(s3d), .skip3_last(lst[1]),
    .skip2_valid(v[2]), .skip2_ready(r[2]), .skip2_data(s2d), .skip2_last(lst[2]),
    .askip_valid(v[3]), .askip_ready(r[3]), .askip_data(ad), .askip_last(lst[3]),
    .out_valid(ov), .out_ready(ordy), .out_data(od), .out_last(ol));

  int iq [4][$][$];
  bit il[$];
  int qo[$];
  bit lo[$];
  bit bp = 1, run = 0;
  int nin [4] = '{0, 0, 0, 0};
  int no = 0;

  task automatic write_layer(int layer, int n_in, int n_out, int ww);
    for (int o = 0; o < n_out; o++)
      for (int i = 0; i <= n_in; i++) begin
        cfg.we <= 1'b1; cfg.layer <= 8'(layer); cfg.addr <= 12'(o * (n_in + 1) + i);
        cfg.data <= 16'(wgen(layer, o, i, ww));
        @(posedge clk);
      end
    cfg.we <= 1'b0;
  endtask

  function automatic int word(int s, int l, int i);
    case (s)
      0: return sx(32'(gd[l][i]), 8);
      1: return sx(32'(s3d[l][i]), 8);
      2: return sx(32'(s2d[l][i]), 8);
      default: return sx(32'(ad[l][i]), 8);
    endcase
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < 4; s++) if (v[s] && r[s]) begin
      automatic int f[$] = {};
      for (int l = 0; l < L; l++) for (int i = 0; i < NF[s]; i++) f.push_back(word(s, l, i));
      iq[s].push_back(f);
      if (s == 0) il.push_back(lst[0]);
    end
    while (iq[0].size() > 0 && iq[1].size() > 0 && iq[2].size() > 0 && iq[3].size() > 0) begin
      automatic int g[$] = iq[0].pop_front();
      automatic int s3[$] = iq[1].pop_front();
      automatic int s2[$] = iq[2].pop_front();
      automatic int a[$] = iq[3].pop_front();
      for (int l = 0; l < L; l++) begin
        automatic int x[$] = {};
        automatic int y1[$] = {};
        automatic int y2[$] = {};
        automatic int z[$] = {};
        for (int i = 0; i < GC_OUT; i++) x.push_back(g[l * GC_OUT + i]);
        for (int i = 0; i < H; i++) x.push_back(s3[l * H + i]);
        dense_ref(L_F_DENSE1, x, GC_OUT + H, H, 8, 8, SHIFT8, 1'b1, y1);
        dense_ref(L_F_DENSE2, y1, H, H, 8, 8, SHIFT8, 1'b1, y2);
        for (int i = 0; i < H; i++) y2.push_back(s2[l * H + i]);
        for (int i = 0; i < H_SKIP; i++) y2.push_back(a[l * H_SKIP + i]);
        dense_ref(L_F_DENSE3, y2, 2 * H + H_SKIP, H, 8, 8, SHIFT8, 1'b1, z);
        foreach (z[k]) qo.push_back(z[k]);
      end
      lo.push_back(il.pop_front());
    end
    if (ov && ordy) begin
      no++;
      checks++;
      if (qo.size() < L * H) begin failures++; $display("output beat with no input behind it"); end
      for (int l = 0; l < L; l++) for (int o = 0; o < H; o++) begin
        automatic int e = qo.pop_front();
        checks++;
        if (sx(32'(od[l][o]), 8) != e) begin failures++; $display("out mismatch %0d vs %0d", sx(32'(od[l][o]), 8), e); end
      end
      checks++; if (ol != lo.pop_front()) failures++;
    end
    for (int s = 0; s < 4; s++) if (v[s] && r[s]) begin
      nin[s]++;
      lst[s] <= ((nin[s] + 1) % 32 == 0);
      case (s)
        0: for (int l = 0; l < L; l++) for (int i = 0; i < GC_OUT; i++) gd[l][i] <= 8'($urandom);
        1: for (int l = 0; l < L; l++) for (int i = 0; i < H; i++) s3d[l][i] <= 8'($urandom_range(0, 127));
        2: for (int l = 0; l < L; l++) for (int i = 0; i < H; i++) s2d[l][i] <= 8'($urandom_range(0, 127));
        default: for (int l = 0; l < L; l++) for (int i = 0; i < H_SKIP; i++) ad[l][i] <= 8'($urandom_range(0, 127));
      endcase
    end
    for (int s = 0; s < 4; s++) v[s] <= run && (!bp || $urandom_range(0, 3) != 0);
    ordy <= !bp || $urandom_range(0, 3) != 0;
  end

  initial begin
    int o0;
    cfg = '0; v = '0; ordy = 0; lst = '0; gd = '0; s3d = '0; s2d = '0; ad = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    write_layer(L_F_DENSE1, GC_OUT + H, H, 8);
    write_layer(L_F_DENSE2, H, H, 8);
    write_layer(L_F_DENSE3, 2 * H + H_SKIP, H, 8);
    run = 1;
    repeat (2000) @(posedge clk);
    bp = 0;
    repeat (10) @(posedge clk);
    o0 = no;
    repeat (100) @(posedge clk);
    checks++;
    if (no - o0 != 100) begin failures++; $display("rate %0d/100", no - o0); end
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
