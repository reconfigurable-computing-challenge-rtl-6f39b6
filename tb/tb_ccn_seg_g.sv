// tb_ccn_seg_g: self-checking test of partition G.
//
// Feature beats from partition F and input-energy beats from the energy
// skip buffer are driven independently with random gaps. The reference
// computes the eight output heads with the 16-bit Linear layer and replaces
// the energy head by sat16((head * energy) >>> MULT_SHIFT); every head of
// every node is compared under random backpressure. Without gaps
// the output runs at one beat per clock.
module tb_ccn_seg_g;
  import ccn_pkg::*;
  import ccn_tb_pkg::*;
  localparam int L = P_FPGA;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  cfg_t cfg;

  logic iv, ir, il, ev, er, el, ov, ordy, ol;
  logic [L-1:0][H-1:0][7:0] id;
  logic [L-1:0][0:0][15:0] ed;
  logic [L-1:0][N_HEADS-1:0][15:0] od;

  ccn_seg_g dut (.clk, .rst_n, .cfg, .in_valid(iv), .in_ready(ir), .in_data(id), .in_last(il),
    .en_valid(ev), .en_ready(er), .en_data(ed), .en_last(el),
    .out_valid(ov), .out_ready(ordy), .out_data(od), .out_last(ol));

  int qi[$][$], qe[$][$];
  bit ql[$];
  int qo[$];
  bit lo[$];
  bit bp = 1, run = 0;
  int ni = 0, ne = 0, no = 0, n_sat = 0;

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
      automatic int f[$] = {};
      for (int l = 0; l < L; l++) for (int i = 0; i < H; i++) f.push_back(sx(32'(id[l][i]), 8));
      qi.push_back(f); ql.push_back(il);
    end
    if (ev && er) begin
      automatic int f[$] = {};
      for (int l = 0; l < L; l++) f.push_back(sx(32'(ed[l][0]), 16));
      qe.push_back(f);
    end
    while (qi.size() > 0 && qe.size() > 0) begin
      automatic int f[$] = qi.pop_front();
      automatic int e[$] = qe.pop_front();
      for (int l = 0; l < L; l++) begin
        automatic int x[$] = {};
        automatic int y[$] = {};
        for (int i = 0; i < H; i++) x.push_back(f[l * H + i]);
        dense_ref(L_G_OUT, x, H, N_HEADS, 16, 16, SHIFT16, 1'b0, y);
        y[HD_ENERGY] = sat((longint'(y[HD_ENERGY]) * longint'(e[l])) >>> MULT_SHIFT, 16);
        if (y[HD_ENERGY] == 32767 || y[HD_ENERGY] == -32768) n_sat++;
        foreach (y[k]) qo.push_back(y[k]);
      end
      lo.push_back(ql.pop_front());
    end
    if (ov && ordy) begin
      no++;
      for (int l = 0; l < L; l++) for (int o = 0; o < N_HEADS; o++) begin
        automatic int e = qo.pop_front();
        checks++;
        if (sx(32'(od[l][o]), 16) != e) begin failures++; $display("head %0d mismatch %0d vs %0d", o, sx(32'(od[l][o]), 16), e); end
      end
      checks++; if (ol != lo.pop_front()) failures++;
    end
    if (iv && ir) begin
      for (int l = 0; l < L; l++) for (int i = 0; i < H; i++) id[l][i] <= 8'($urandom_range(0, 127));
      ni++; il <= ((ni + 1) % 64 == 0);
    end
    if (ev && er) begin
      for (int l = 0; l < L; l++) ed[l][0] <= ($urandom_range(0, 3) == 0) ? 16'd32767 : 16'($urandom_range(0, 32767));
      ne++; el <= ((ne + 1) % 64 == 0);
    end
    iv   <= run && (!bp || $urandom_range(0, 3) != 0);
    ev   <= run && (!bp || $urandom_range(0, 2) != 0);
    ordy <= !bp || $urandom_range(0, 3) != 0;
  end

  initial begin
    int o0;
    cfg = '0; iv = 0; ev = 0; ordy = 0; il = 0; el = 0; id = '0; ed = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    write_layer(L_G_OUT, H, N_HEADS, 16);
    run = 1;
    repeat (2000) @(posedge clk);
    bp = 0;
    repeat (10) @(posedge clk);
    o0 = no;
    repeat (100) @(posedge clk);
    checks++;
    if (no - o0 != 100) begin failures++; $display("rate %0d/100", no - o0); end
    $display("energy products saturated: %0d", n_sat);
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
