// tb_ccn_lane_conv: self-checking test of the Retile lane converter.
//
// A widening converter (2 -> 4 nodes per beat) and a narrowing one (4 -> 2)
// are driven with random gaps and random backpressure. Node order and the
// event 'last' flag must be preserved: the flag must appear on the output
// beat that holds the final node of each event. Phases without gaps check
// the rates: the widener emits a beat every second clock, the narrower a
// beat every clock.
module tb_ccn_lane_conv;
  localparam int F = 3, W = 8, EV = 16;   // EV nodes per event
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // widen 2 -> 4
  logic wiv, wir, wil, wov, wrdy, wol;
  logic [1:0][F-1:0][W-1:0] wid;
  logic [3:0][F-1:0][W-1:0] wod;
  ccn_lane_conv #(.LI(2), .LO(4), .F(F), .W(W)) dut_w (
    .clk, .rst_n, .in_valid(wiv), .in_ready(wir), .in_data(wid), .in_last(wil),
    .out_valid(wov), .out_ready(wrdy), .out_data(wod), .out_last(wol));
  // narrow 4 -> 2
  logic niv, nir, nil, nov, nrdy, nol;
  logic [3:0][F-1:0][W-1:0] nid;
  logic [1:0][F-1:0][W-1:0] nod;
  ccn_lane_conv #(.LI(4), .LO(2), .F(F), .W(W)) dut_n (
    .clk, .rst_n, .in_valid(niv), .in_ready(nir), .in_data(nid), .in_last(nil),
    .out_valid(nov), .out_ready(nrdy), .out_data(nod), .out_last(nol));

  logic [F-1:0][W-1:0] wq[$], nq[$];   // expected nodes
  int wcnt = 0, ncnt = 0, wout = 0, nout = 0, wcnt_out = 0, ncnt_out = 0;
  bit bp = 1, run = 0;

  always @(posedge clk) if (rst_n) begin
    if (wiv && wir) begin for (int l = 0; l < 2; l++) wq.push_back(wid[l]); end
    if (niv && nir) begin for (int l = 0; l < 4; l++) nq.push_back(nid[l]); end
    if (wov && wrdy) begin
      wout++;
      for (int l = 0; l < 4; l++) begin
        checks++;
        if (wod[l] != wq.pop_front()) begin failures++; $display("widen node mismatch"); end
      end
      wcnt_out += 4;
      checks++;
      if (wol != (wcnt_out % EV == 0)) begin failures++; $display("widen last wrong at %0d", wcnt_out); end
    end
    if (nov && nrdy) begin
      nout++;
      for (int l = 0; l < 2; l++) begin
        checks++;
        if (nod[l] != nq.pop_front()) begin failures++; $display("narrow node mismatch"); end
      end
      ncnt_out += 2;
      checks++;
      if (nol != (ncnt_out % EV == 0)) begin failures++; $display("narrow last wrong at %0d", ncnt_out); end
    end
    if (wiv && wir) begin
      wid <= {$urandom, $urandom};
      wcnt += 2;
      wil <= ((wcnt + 2) % EV == 0);
    end
    if (niv && nir) begin
      nid <= {$urandom, $urandom, $urandom};
      ncnt += 4;
      nil <= ((ncnt + 4) % EV == 0);
    end
    wiv  <= run && (!bp || $urandom_range(0, 2) != 0);
    niv  <= run && (!bp || $urandom_range(0, 2) != 0);
    wrdy  <= !bp || $urandom_range(0, 2) != 0;
    nrdy <= !bp || $urandom_range(0, 2) != 0;
  end

  initial begin
    int w0, n0;
    wiv = 0; niv = 0; wrdy = 0; nrdy = 0; wil = 0; nil = 0;
    wid = {$urandom, $urandom}; nid = {$urandom, $urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1;
    run = 1;
    repeat (3000) @(posedge clk);
    bp = 0;
    repeat (10) @(posedge clk);
    w0 = wout; n0 = nout;
    repeat (100) @(posedge clk);
    checks++;
    if (wout - w0 != 50) begin failures++; $display("widen rate %0d/50", wout - w0); end
    checks++;
    if (nout - n0 != 100) begin failures++; $display("narrow rate %0d/100", nout - n0); end
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
