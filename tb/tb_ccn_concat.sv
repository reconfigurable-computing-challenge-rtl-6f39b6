// tb_ccn_concat: self-checking test of the Concat operator.
//
// Streams a and b are driven independently with random valid gaps, so the
// join often has to wait for one side; the output is stalled at random.
// Each output beat must be the concatenation of the next a beat and the next
// b beat (a features first), with the 'last' flag of a. A phase without
// gaps checks one beat per clock.
module tb_ccn_concat;
  localparam int L = 4, FA = 3, FB = 2, W = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic av, ar, al, bv, br, bl, ov, ordy, ol;
  logic [L-1:0][FA-1:0][W-1:0] ad;
  logic [L-1:0][FB-1:0][W-1:0] bd;
  logic [L-1:0][FA+FB-1:0][W-1:0] od;

  ccn_concat #(.LANES(L), .FA(FA), .FB(FB), .W(W)) dut (
    .clk, .rst_n, .a_valid(av), .a_ready(ar), .a_data(ad), .a_last(al),
    .b_valid(bv), .b_ready(br), .b_data(bd), .b_last(bl),
    .out_valid(ov), .out_ready(ordy), .out_data(od), .out_last(ol));

  logic [L-1:0][FA-1:0][W-1:0] qa[$];
  logic [L-1:0][FB-1:0][W-1:0] qb[$];
  bit ql[$];
  bit bp = 1, run = 0;
  int na = 0, nb = 0, nout = 0, a_waits = 0, b_waits = 0;

  always @(posedge clk) if (rst_n) begin
    if (av && ar) begin qa.push_back(ad); ql.push_back(al); end
    if (bv && br) qb.push_back(bd);
    if (av && !bv) a_waits++;
    if (bv && !av) b_waits++;
    if (ov && ordy) begin
      automatic logic [L-1:0][FA-1:0][W-1:0] ea = qa.pop_front();
      automatic logic [L-1:0][FB-1:0][W-1:0] eb = qb.pop_front();
      nout++;
      for (int l = 0; l < L; l++) begin
        checks++;
        if (od[l] != {eb[l], ea[l]}) begin
          failures++;
          $display("lane %0d got %h exp %h", l, od[l], {eb[l], ea[l]});
        end
      end
      checks++;
      if (ol != ql.pop_front()) failures++;
    end
    // a and b carry the same event framing: every 8th beat is last.
    if (av && ar) begin ad <= {L*FA*W{1'b0}} | {$urandom, $urandom, $urandom}; al <= ((na + 1) % 8 == 7); na++; end
    if (bv && br) begin bd <= {$urandom, $urandom}; bl <= ((nb + 1) % 8 == 7); nb++; end
    av   <= run && (!bp || $urandom_range(0, 2) != 0);
    bv   <= run && (!bp || $urandom_range(0, 3) != 0);
    ordy <= !bp || $urandom_range(0, 3) != 0;
  end

  initial begin
    int c0;
    av = 0; bv = 0; ordy = 0; al = 0; bl = 0;
    ad = {$urandom, $urandom, $urandom}; bd = {$urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1;
    run = 1;
    repeat (3000) @(posedge clk);
    bp = 0;
    repeat (5) @(posedge clk);
    c0 = nout;
    repeat (100) @(posedge clk);
    checks++;
    if (nout - c0 != 100) begin failures++; $display("rate %0d/100", nout - c0); end
    checks++;
    if (a_waits == 0 || b_waits == 0) begin failures++; $display("no waits seen"); end
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
