// tb_ccn_load: self-checking test of the Load kernel.
//
// Events of random nodes are placed in a memory model of DDR bank 0 at
// src_base + e*EVENT_BYTES, some of them shorter than N_NODES and therefore
// zero-padded. The kernel is started for all of them and every streamed
// node is compared with memory, together with the 'last' flag at the end
// of each event. Run 1 uses a memory that stalls at random and a consumer
// that stalls at random; it must also keep more than one burst in flight.
// Run 2 uses neither and checks the rate of one beat per clock: the stream
// must deliver all events in BEATS_PER_EVENT clocks each plus the startup.
module tb_ccn_load;
  import ccn_pkg::*;
  import ccn_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NEV = 6;
  localparam longint BASE = 64'h1000_0000;

  logic start, busy, done, rd_error;
  logic [AXI_AW-1:0] araddr;
  logic [7:0] arlen;
  logic [2:0] arsize;
  logic [1:0] arburst, rresp;
  logic arvalid, arready, rlast, rvalid, rready;
  logic [AXI_DW-1:0] rdata;
  logic ov, ordy, ol;
  logic [NODES_PER_BEAT-1:0][IN_F-1:0][15:0] od;
  bit bp = 1;

  // The memory with stalls serves run 1, the one without serves run 2.
  logic arready1, rlast1, rvalid1, arready2, rlast2, rvalid2;
  logic [AXI_DW-1:0] rdata1, rdata2;
  logic [1:0] rresp1, rresp2;
  ccn_axi_mem #(.STALL(30)) u_mem1 (.clk, .rst_n, .araddr, .arlen, .arvalid(arvalid && bp), .arready(arready1),
    .rdata(rdata1), .rresp(rresp1), .rlast(rlast1), .rvalid(rvalid1), .rready(rready && bp),
    .awaddr('0), .awlen('0), .awvalid(1'b0), .awready(), .wdata('0), .wlast(1'b0), .wvalid(1'b0),
    .wready(), .bresp(), .bvalid(), .bready(1'b1));
  ccn_axi_mem #(.STALL(0)) u_mem2 (.clk, .rst_n, .araddr, .arlen, .arvalid(arvalid && !bp), .arready(arready2),
    .rdata(rdata2), .rresp(rresp2), .rlast(rlast2), .rvalid(rvalid2), .rready(rready && !bp),
    .awaddr('0), .awlen('0), .awvalid(1'b0), .awready(), .wdata('0), .wlast(1'b0), .wvalid(1'b0),
    .wready(), .bresp(), .bvalid(), .bready(1'b1));
  assign arready = bp ? arready1 : arready2;
  assign rdata   = bp ? rdata1 : rdata2;
  assign rresp   = bp ? rresp1 : rresp2;
  assign rlast   = bp ? rlast1 : rlast2;
  assign rvalid  = bp ? rvalid1 : rvalid2;

  ccn_load dut (.clk, .rst_n, .start, .src_base(BASE), .num_events(32'(NEV)), .busy, .done, .rd_error,
    .m_araddr(araddr), .m_arlen(arlen), .m_arsize(arsize), .m_arburst(arburst), .m_arvalid(arvalid),
    .m_arready(arready), .m_rdata(rdata), .m_rresp(rresp), .m_rlast(rlast), .m_rvalid(rvalid),
    .m_rready(rready), .out_valid(ov), .out_ready(ordy), .out_data(od), .out_last(ol));

  int exp_nodes[$][$];   // expected node features in stream order
  int nbeats = 0, nlast = 0, n_padded = 0;

  always @(posedge clk) if (rst_n) begin
    if (ov && ordy) begin
      nbeats++;
      for (int k = 0; k < NODES_PER_BEAT; k++) begin
        automatic int e[$] = exp_nodes.pop_front();
        for (int f = 0; f < IN_F; f++) begin
          checks++;
          if (sx(32'(od[k][f]), 16) != e[f]) begin failures++; $display("node mismatch"); end
        end
      end
      checks++;
      if (ol != (nbeats % BEATS_PER_EVENT == 0)) begin failures++; $display("last wrong at beat %0d", nbeats); end
      if (ol) nlast++;
    end
    ordy <= !bp || $urandom_range(0, 3) != 0;
  end

  // Fill both memories with NEV events; event e has 128 - 16*e real hits.
  task automatic fill();
    exp_nodes = {};
    for (int e = 0; e < NEV; e++)
      for (int b = 0; b < BEATS_PER_EVENT; b++) begin
        logic [AXI_DW-1:0] word;
        word = '0;
        for (int k = 0; k < NODES_PER_BEAT; k++) begin
          automatic int nd[$] = {};
          automatic int node = b * NODES_PER_BEAT + k;
          for (int f = 0; f < IN_F; f++) begin
            automatic int v = (node < N_NODES - 16 * e) ? int'($urandom_range(0, 2000)) - 1000 : 0;
            if (node >= N_NODES - 16 * e && f == 0) n_padded++;
            word[k * SLOT_W + f * 16 +: 16] = 16'(v);
            nd.push_back(v);
          end
          exp_nodes.push_back(nd);
        end
        u_mem1.mem[BASE / (AXI_DW / 8) + e * BEATS_PER_EVENT + b] = word;
        u_mem2.mem[BASE / (AXI_DW / 8) + e * BEATS_PER_EVENT + b] = word;
      end
  endtask

  initial begin
    int t0;
    start = 0; ordy = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // run 1: random stalls
    fill();
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    wait (done);
    @(posedge clk);
    checks++;
    if (nlast != NEV || exp_nodes.size() != 0) begin failures++; $display("run 1: %0d events, %0d nodes left", nlast, exp_nodes.size()); end
    checks++;
    if (u_mem1.max_rq < 2) begin failures++; $display("never more than one burst in flight"); end
    checks++;
    if (rd_error) failures++;
    // run 2: no stalls, full rate
    bp = 0;
    fill();
    nlast = 0; nbeats = 0;
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    @(posedge clk);
    t0 = 1;
    while (!done) begin @(posedge clk); t0++; end
    checks++;
    if (nlast != NEV || exp_nodes.size() != 0) begin failures++; $display("run 2: %0d events", nlast); end
    checks++;
    if (t0 > NEV * BEATS_PER_EVENT + 10) begin failures++; $display("run 2 took %0d clocks", t0); end
    checks++;
    if (n_padded == 0) failures++;
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
