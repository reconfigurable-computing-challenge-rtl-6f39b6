// tb_ccn_store: self-checking test of the Store kernel.
//
// Streams NEV events of random per-node results (energy, signal, x, y, z,
// condensation flag) into the kernel and, once it reports done, compares
// every slot of the memory model of DDR bank 1 at dst_base + e*EVENT_BYTES
// with the expected record layout, unused slot bits included. Run 1 stalls
// the memory and the producer at random; run 2 stalls neither and must
// finish within BEATS_PER_EVENT clocks per event plus a short tail.
module tb_ccn_store;
  import ccn_pkg::*;
  import ccn_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NEV = 5;
  localparam longint BASE = 64'h2000_0000;

  logic start, busy, done, wr_error;
  logic [AXI_AW-1:0] awaddr;
  logic [7:0] awlen;
  logic [2:0] awsize;
  logic [1:0] awburst, bresp;
  logic awvalid, awready, wlast, wvalid, wready, bvalid, bready;
  logic [AXI_DW-1:0] wdata;
  logic [AXI_DW/8-1:0] wstrb;
  logic iv, ir, il;
  logic [NODES_PER_BEAT-1:0][5:0][15:0] id;
  bit bp = 1, run = 0;

  logic awready1, wready1, bvalid1, awready2, wready2, bvalid2;
  logic [1:0] bresp1, bresp2;
  ccn_axi_mem #(.STALL(30)) u_mem1 (.clk, .rst_n, .araddr('0), .arlen('0), .arvalid(1'b0), .arready(),
    .rdata(), .rresp(), .rlast(), .rvalid(), .rready(1'b1),
    .awaddr, .awlen, .awvalid(awvalid && bp), .awready(awready1), .wdata, .wlast, .wvalid(wvalid && bp),
    .wready(wready1), .bresp(bresp1), .bvalid(bvalid1), .bready(bready && bp));
  ccn_axi_mem #(.STALL(0)) u_mem2 (.clk, .rst_n, .araddr('0), .arlen('0), .arvalid(1'b0), .arready(),
    .rdata(), .rresp(), .rlast(), .rvalid(), .rready(1'b1),
    .awaddr, .awlen, .awvalid(awvalid && !bp), .awready(awready2), .wdata, .wlast, .wvalid(wvalid && !bp),
    .wready(wready2), .bresp(bresp2), .bvalid(bvalid2), .bready(bready && !bp));
  assign awready = bp ? awready1 : awready2;
  assign wready  = bp ? wready1 : wready2;
  assign bvalid  = bp ? bvalid1 : bvalid2;
  assign bresp   = bp ? bresp1 : bresp2;

  ccn_store dut (.clk, .rst_n, .start, .dst_base(BASE), .num_events(32'(NEV)), .busy, .done, .wr_error,
    .m_awaddr(awaddr), .m_awlen(awlen), .m_awsize(awsize), .m_awburst(awburst), .m_awvalid(awvalid),
    .m_awready(awready), .m_wdata(wdata), .m_wstrb(wstrb), .m_wlast(wlast), .m_wvalid(wvalid),
    .m_wready(wready), .m_bresp(bresp), .m_bvalid(bvalid), .m_bready(bready),
    .in_valid(iv), .in_ready(ir), .in_data(id), .in_last(il));

  logic [AXI_DW-1:0] expw[$];
  int nsent = 0;

  function automatic logic [AXI_DW-1:0] pack(logic [NODES_PER_BEAT-1:0][5:0][15:0] d);
    logic [AXI_DW-1:0] w;
    w = '0;
    for (int k = 0; k < NODES_PER_BEAT; k++) begin
      for (int f = 0; f < 5; f++) w[k * SLOT_W + f * 16 +: 16] = d[k][f];
      w[k * SLOT_W + 80] = d[k][5][0];
    end
    return w;
  endfunction

  task automatic new_beat();
    for (int k = 0; k < NODES_PER_BEAT; k++) begin
      for (int f = 0; f < 5; f++) id[k][f] <= 16'($urandom);
      id[k][5] <= 16'($urandom_range(0, 1));
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (iv && ir) begin
      expw.push_back(pack(id));
      nsent++;
      new_beat();
      il <= ((nsent + 1) % BEATS_PER_EVENT == 0);
    end
    iv <= run && nsent + (iv && ir ? 1 : 0) < NEV * BEATS_PER_EVENT && (!bp || $urandom_range(0, 3) != 0);
  end

  task automatic compare(bit first);
    for (int b = 0; b < NEV * BEATS_PER_EVENT; b++) begin
      logic [AXI_DW-1:0] got, e;
      longint a;
      a = BASE / (AXI_DW / 8) + b;
      got = first ? (u_mem1.mem.exists(a) ? u_mem1.mem[a] : '0) : (u_mem2.mem.exists(a) ? u_mem2.mem[a] : '0);
      e = expw.pop_front();
      checks++;
      if (got !== e) begin failures++; $display("beat %0d differs", b); end
    end
  endtask

  initial begin
    int t0;
    start = 0; iv = 0; il = 0; id = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    new_beat();
    @(posedge clk); start <= 1; @(posedge clk); start <= 0; run = 1;
    wait (done);
    @(posedge clk);
    compare(1);
    checks++;
    if (wr_error) failures++;
    // run 2
    run = 0; bp = 0; nsent = 0;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0; run = 1;
    @(posedge clk);
    t0 = 1;
    while (!done) begin @(posedge clk); t0++; end
    compare(0);
    checks++;
    if (t0 > NEV * BEATS_PER_EVENT + 12) begin failures++; $display("run 2 took %0d clocks", t0); end
    $display("run 2: %0d events in %0d clocks", NEV, t0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
