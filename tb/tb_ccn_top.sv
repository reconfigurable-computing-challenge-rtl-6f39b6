// tb_ccn_top: end-to-end test of the whole accelerator at its default sizes.
//
// A memory model stands for both DDR banks; behavioural stand-ins take the
// place of the two GravNetConv layers and the condensation point selection.
// All weights are loaded through the configuration bus. Events of random
// calorimeter hits (some with fewer than 128 hits, zero-padded) are placed
// in bank 0, the kernels are started, and after Store reports done every
// result word in bank 1 is compared with a node-by-node software model of
// the whole network (ccn_tb_pkg reference layers and stand-ins).
//
// Run 1: memory and external layers stall at random (backpressure through
//        the whole pipeline, skip FIFOs filling and draining).
// Run 2: no stalls; the interval between completed events in steady state
//        must not exceed 85 clocks, the 2.94 million events per second the
//        paper reports at 250 MHz (this design should reach 64 clocks).
// Run 3: one event alone; its start-to-done latency must stay below the
//        10 us (2500 clocks at 250 MHz) trigger budget the paper states.
// Each mechanism (Retile widening and narrowing, Concat waits, skip FIFO
// use, backpressure on Load, several read bursts in flight, zero padding,
// multicast stalls) is counted and must have happened at least once.
module tb_ccn_top;
  import ccn_pkg::*;
  import ccn_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;   // 250 MHz
  int checks = 0, failures = 0;

  cfg_t cfg;
  logic start, load_busy, load_done, store_busy, store_done, axi_error;
  logic [AXI_AW-1:0] src_base, dst_base;
  logic [31:0] num_events;
  logic [AXI_AW-1:0] araddr, awaddr;
  logic [7:0] arlen, awlen;
  logic [2:0] arsize, awsize;
  logic [1:0] arburst, awburst, rresp, bresp;
  logic arvalid, arready, rlast, rvalid, rready, awvalid, awready, wlast, wvalid, wready, bvalid, bready;
  logic [AXI_DW-1:0] rdata, wdata;
  logic [AXI_DW/8-1:0] wstrb;
  logic g1tv, g1tr, g1tl, g1rv, g1rr, g1rl, g2tv, g2tr, g2tl, g2rv, g2rr, g2rl;
  logic [P_FPGA-1:0][GC_IN-1:0][7:0] g1td, g2td;
  logic [P_FPGA-1:0][GC_OUT-1:0][7:0] g1rd, g2rd;
  logic ctv, ctr, ctl, crv, crr, crl;
  logic [P_FPGA-1:0][2:0][15:0] ctd;
  logic [P_FPGA-1:0][0:0][15:0] crd;

  ccn_top dut (.clk, .rst_n, .cfg, .start, .src_base, .dst_base, .num_events,
    .load_busy, .load_done, .store_busy, .store_done, .axi_error,
    .m_araddr(araddr), .m_arlen(arlen), .m_arsize(arsize), .m_arburst(arburst), .m_arvalid(arvalid),
    .m_arready(arready), .m_rdata(rdata), .m_rresp(rresp), .m_rlast(rlast), .m_rvalid(rvalid), .m_rready(rready),
    .m_awaddr(awaddr), .m_awlen(awlen), .m_awsize(awsize), .m_awburst(awburst), .m_awvalid(awvalid),
    .m_awready(awready), .m_wdata(wdata), .m_wstrb(wstrb), .m_wlast(wlast), .m_wvalid(wvalid), .m_wready(wready),
    .m_bresp(bresp), .m_bvalid(bvalid), .m_bready(bready),
    .gc1_tx_valid(g1tv), .gc1_tx_ready(g1tr), .gc1_tx_data(g1td), .gc1_tx_last(g1tl),
    .gc1_rx_valid(g1rv), .gc1_rx_ready(g1rr), .gc1_rx_data(g1rd), .gc1_rx_last(g1rl),
    .gc2_tx_valid(g2tv), .gc2_tx_ready(g2tr), .gc2_tx_data(g2td), .gc2_tx_last(g2tl),
    .gc2_rx_valid(g2rv), .gc2_rx_ready(g2rr), .gc2_rx_data(g2rd), .gc2_rx_last(g2rl),
    .cps_tx_valid(ctv), .cps_tx_ready(ctr), .cps_tx_data(ctd), .cps_tx_last(ctl),
    .cps_rx_valid(crv), .cps_rx_ready(crr), .cps_rx_data(crd), .cps_rx_last(crl));

  ccn_axi_mem u_mem (.clk, .rst_n, .araddr, .arlen, .arvalid, .arready, .rdata, .rresp, .rlast, .rvalid, .rready,
    .awaddr, .awlen, .awvalid, .awready, .wdata, .wlast, .wvalid, .wready, .bresp, .bvalid, .bready);
  ccn_gravnet_standin u_gc1 (.clk, .rst_n, .in_valid(g1tv), .in_ready(g1tr), .in_data(g1td), .in_last(g1tl),
    .out_valid(g1rv), .out_ready(g1rr), .out_data(g1rd), .out_last(g1rl));
  ccn_gravnet_standin u_gc2 (.clk, .rst_n, .in_valid(g2tv), .in_ready(g2tr), .in_data(g2td), .in_last(g2tl),
    .out_valid(g2rv), .out_ready(g2rr), .out_data(g2rd), .out_last(g2rl));
  ccn_cps_standin u_cps (.clk, .rst_n, .in_valid(ctv), .in_ready(ctr), .in_data(ctd), .in_last(ctl),
    .out_valid(crv), .out_ready(crr), .out_data(crd), .out_last(crl));

  // ---------------- mechanism counters ----------------
  int n_widen = 0, n_narrow = 0, n_join_wait = 0, n_skip_fifo = 0, n_load_bp = 0, n_fork_wait = 0;
  int n_padded = 0, n_store_bp = 0;
  int ev_done_cyc[$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (dut.u_rt_ab.out_valid && dut.u_rt_ab.out_ready) n_widen++;
    if (dut.u_rt_fg.out_valid && dut.u_rt_fg.out_ready) n_narrow++;
    if (dut.u_seg_d.u_concat.a_valid != dut.u_seg_d.u_concat.b_valid) n_join_wait++;
    if (dut.u_q_bskip.count > 1 && dut.u_q_askip.count > 1 && dut.u_q_energy.count > 1) n_skip_fifo++;
    if (dut.u_load.out_valid && !dut.u_load.out_ready) n_load_bp++;
    if (dut.u_seg_a.u_fork.in_valid && !dut.u_seg_a.u_fork.in_ready) n_fork_wait++;
    if (dut.u_store.in_valid && !dut.u_store.in_ready) n_store_bp++;
    if (wvalid && wready && wlast) ev_done_cyc.push_back(cyc);
  end

  // ---------------- configuration ----------------
  task automatic write_layer(int layer, int n_in, int n_out, int ww);
    for (int o = 0; o < n_out; o++)
      for (int i = 0; i <= n_in; i++) begin
        cfg.we <= 1'b1; cfg.layer <= 8'(layer); cfg.addr <= 12'(o * (n_in + 1) + i);
        cfg.data <= 16'(wgen(layer, o, i, ww));
        @(posedge clk);
      end
    cfg.we <= 1'b0;
  endtask

  // ---------------- reference model of one event ----------------
  function automatic void cat(ref int a[$], input int b[$]);
    foreach (b[k]) a.push_back(b[k]);
  endfunction

  // x: N_NODES nodes of IN_F features; res: per node energy, signal, x, y, z, flag
  function automatic void model_event(input int x[$][$], output int res[$][$]);
    int h[$][$], s[$][$], bq[$][$], g1in[$][$], g1[$][$], d2[$][$], d3[$][$], g2in[$][$], g2[$][$];
    int heads[$][$], beta[$], sel[$];
    foreach (x[n]) begin
      automatic int y[$];
      dense_ref(L_A_DENSE, x[n], IN_F, H, 16, 8, SHIFT16, 1'b1, y); h.push_back(y);
      dense_ref(L_A_SKIP, x[n], IN_F, H_SKIP, 16, 8, SHIFT16, 1'b1, y); s.push_back(y);
      dense_ref(L_B_DENSE, h[n], H, H, 8, 8, SHIFT8, 1'b1, y); bq.push_back(y);
      dense_ref(L_B_LINEAR, bq[n], H, GC_IN, 8, 8, SHIFT8, 1'b0, y); g1in.push_back(y);
    end
    gravnet_standin(g1in, g1);
    foreach (x[n]) begin
      automatic int c[$] = {};
      automatic int y[$];
      cat(c, g1[n]); cat(c, bq[n]);
      dense_ref(L_D_DENSE1, c, GC_OUT + H, H, 8, 8, SHIFT8, 1'b1, y);
      dense_ref(L_D_DENSE2, y, H, H, 8, 8, SHIFT8, 1'b1, y); d2.push_back(y);
      dense_ref(L_D_DENSE3, y, H, H, 8, 8, SHIFT8, 1'b1, y); d3.push_back(y);
      dense_ref(L_D_LINEAR, y, H, GC_IN, 8, 8, SHIFT8, 1'b0, y); g2in.push_back(y);
    end
    gravnet_standin(g2in, g2);
    foreach (x[n]) begin
      automatic int c[$] = {};
      automatic int y[$];
      cat(c, g2[n]); cat(c, d3[n]);
      dense_ref(L_F_DENSE1, c, GC_OUT + H, H, 8, 8, SHIFT8, 1'b1, y);
      dense_ref(L_F_DENSE2, y, H, H, 8, 8, SHIFT8, 1'b1, y);
      cat(y, d2[n]); cat(y, s[n]);
      dense_ref(L_F_DENSE3, y, 2 * H + H_SKIP, H, 8, 8, SHIFT8, 1'b1, y);
      dense_ref(L_G_OUT, y, H, N_HEADS, 16, 16, SHIFT16, 1'b0, y);
      y[HD_ENERGY] = sat((longint'(y[HD_ENERGY]) * longint'(x[n][0])) >>> MULT_SHIFT, 16);
      heads.push_back(y);
      beta.push_back(y[HD_BETA]);
    end
    cps_standin(beta, sel);
    res = {};
    foreach (x[n]) begin
      automatic int r[$] = {};
      for (int k = 0; k < 5; k++) r.push_back(heads[n][k]);
      r.push_back(sel[n]);
      res.push_back(r);
    end
  endfunction

  // ---------------- event generation and checking ----------------
  int exp_res[$][$][$];   // per event, per node, 6 words

  task automatic place_events(longint base, int nev);
    exp_res = {};
    for (int e = 0; e < nev; e++) begin
      automatic int hits = (e % 3 == 1) ? int'($urandom_range(20, N_NODES - 1)) : N_NODES;
      automatic int x[$][$] = {};
      automatic int r[$][$];
      for (int n = 0; n < N_NODES; n++) begin
        automatic int nd[$] = {};
        if (n < hits) begin
          nd.push_back($urandom_range(1, 600));             // energy
          nd.push_back($urandom_range(0, 255));             // time
          for (int f = 2; f < IN_F; f++) nd.push_back(int'($urandom_range(0, 400)) - 200);
        end else begin
          for (int f = 0; f < IN_F; f++) nd.push_back(0);
          n_padded++;
        end
        x.push_back(nd);
      end
      for (int b = 0; b < BEATS_PER_EVENT; b++) begin
        logic [AXI_DW-1:0] w;
        w = '0;
        for (int k = 0; k < NODES_PER_BEAT; k++)
          for (int f = 0; f < IN_F; f++) w[k * SLOT_W + f * 16 +: 16] = 16'(x[b * NODES_PER_BEAT + k][f]);
        u_mem.mem[base / (AXI_DW / 8) + e * BEATS_PER_EVENT + b] = w;
      end
      model_event(x, r);
      exp_res.push_back(r);
    end
  endtask

  task automatic check_results(longint base, int nev);
    int bad = 0;
    for (int e = 0; e < nev; e++)
      for (int b = 0; b < BEATS_PER_EVENT; b++) begin
        logic [AXI_DW-1:0] w;
        longint a;
        a = base / (AXI_DW / 8) + e * BEATS_PER_EVENT + b;
        w = u_mem.mem.exists(a) ? u_mem.mem[a] : '0;
        for (int k = 0; k < NODES_PER_BEAT; k++) begin
          automatic int r[$] = exp_res[e][b * NODES_PER_BEAT + k];
          for (int f = 0; f < 5; f++) begin
            checks++;
            if (sx(32'(w[k * SLOT_W + f * 16 +: 16]), 16) != r[f]) begin
              failures++;
              if (bad++ < 10) $display("event %0d node %0d word %0d: got %0d exp %0d", e, b * 2 + k, f,
                                       sx(32'(w[k * SLOT_W + f * 16 +: 16]), 16), r[f]);
            end
          end
          checks++;
          if (int'(w[k * SLOT_W + 80]) != r[5]) begin failures++; if (bad++ < 10) $display("event %0d node %0d flag", e, b * 2 + k); end
        end
      end
  endtask

  task automatic run(longint sb, longint db, int nev, output int clocks);
    src_base <= sb; dst_base <= db; num_events <= 32'(nev);
    @(posedge clk); start <= 1'b1; @(posedge clk); start <= 1'b0;
    @(posedge clk);
    clocks = 2;
    while (!store_done) begin @(posedge clk); clocks++; end
  endtask

  initial begin
    int t, n_sel;
    cfg = '0; start = 0; src_base = '0; dst_base = '0; num_events = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    write_layer(L_A_DENSE, IN_F, H, 16);
    write_layer(L_A_SKIP, IN_F, H_SKIP, 16);
    write_layer(L_B_DENSE, H, H, 8);
    write_layer(L_B_LINEAR, H, GC_IN, 8);
    write_layer(L_D_DENSE1, GC_OUT + H, H, 8);
    write_layer(L_D_DENSE2, H, H, 8);
    write_layer(L_D_DENSE3, H, H, 8);
    write_layer(L_D_LINEAR, H, GC_IN, 8);
    write_layer(L_F_DENSE1, GC_OUT + H, H, 8);
    write_layer(L_F_DENSE2, H, H, 8);
    write_layer(L_F_DENSE3, 2 * H + H_SKIP, H, 8);
    write_layer(L_G_OUT, H, N_HEADS, 16);

    // Run 1: random stalls everywhere.
    u_mem.stall = 25; u_gc1.stall = 20; u_gc2.stall = 30; u_cps.stall = 20;
    place_events(64'h0010_0000, 6);
    run(64'h0010_0000, 64'h0800_0000, 6, t);
    check_results(64'h0800_0000, 6);
    n_sel = 0;
    foreach (exp_res[e]) foreach (exp_res[e][n]) n_sel += exp_res[e][n][5];
    $display("run 1: 6 events in %0d clocks, %0d condensation points", t, n_sel);
    for (int f = 0; f < 6; f++) begin
      automatic int nz = 0;
      foreach (exp_res[e]) foreach (exp_res[e][n]) nz += (exp_res[e][n][f] != 0);
      $display("  result word %0d nonzero in %0d of %0d nodes", f, nz, 6 * N_NODES);
    end

    // Run 2: no stalls, throughput.
    u_mem.stall = 0; u_gc1.stall = 0; u_gc2.stall = 0; u_cps.stall = 0;
    place_events(64'h0020_0000, 12);
    ev_done_cyc = {};
    run(64'h0020_0000, 64'h0900_0000, 12, t);
    check_results(64'h0900_0000, 12);
    begin
      int worst = 0;
      for (int e = 4; e < ev_done_cyc.size(); e++)
        if (ev_done_cyc[e] - ev_done_cyc[e - 1] > worst) worst = ev_done_cyc[e] - ev_done_cyc[e - 1];
      $display("run 2: 12 events in %0d clocks, steady-state interval %0d clocks per event", t, worst);
      checks++;
      if (ev_done_cyc.size() != 12 || worst > 85 || worst == 0) begin failures++; $display("throughput check failed"); end
    end

    // Run 3: a single event, latency.
    place_events(64'h0030_0000, 1);
    run(64'h0030_0000, 64'h0a00_0000, 1, t);
    check_results(64'h0a00_0000, 1);
    $display("run 3: single-event latency %0d clocks (%0d ns at 250 MHz)", t, t * 4);
    checks++;
    if (t >= 2500) begin failures++; $display("latency above 10 us"); end

    checks++;
    if (axi_error) failures++;
    $display("mechanisms: widen %0d narrow %0d join-wait %0d skip-fifo %0d load-backpressure %0d fork-wait %0d padded-nodes %0d store-backpressure %0d bursts-in-flight %0d",
             n_widen, n_narrow, n_join_wait, n_skip_fifo, n_load_bp, n_fork_wait, n_padded, n_store_bp, u_mem.max_rq);
    checks++; if (n_widen == 0) failures++;
    checks++; if (n_narrow == 0) failures++;
    checks++; if (n_join_wait == 0) failures++;
    checks++; if (n_skip_fifo == 0) failures++;
    checks++; if (n_load_bp == 0) failures++;
    checks++; if (n_fork_wait == 0) failures++;
    checks++; if (n_padded == 0) failures++;
    checks++; if (n_store_bp == 0) failures++;
    checks++; if (u_mem.max_rq < 2) failures++;
    checks++; if (n_sel == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
