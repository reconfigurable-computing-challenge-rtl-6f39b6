// ccn_axi_mem: behavioural model of a DDR bank behind an AXI4 slave port,
// for testbenches only (the real memory and its controller are not part of
// the design).
//
// Storage is an associative array of AXI_DW-bit words indexed by byte
// address / (AXI_DW/8); unwritten words read as zero. Read bursts are queued
// and answered in order, write bursts are stored and acknowledged in order.
// With STALL > 0 (or the variable 'stall' set at run time) the model withholds arready, rvalid, awready, wready and
// bvalid at random, STALL percent of the time; READ_LAT clocks pass between
// a read request and its first data beat. Only INCR bursts of full-width
// beats are modelled.
module ccn_axi_mem
  import ccn_pkg::*;
#(
  parameter int STALL    = 0,
  parameter int READ_LAT = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [AXI_AW-1:0]   araddr,
  input  logic [7:0]          arlen,
  input  logic                arvalid,
  output logic                arready,
  output logic [AXI_DW-1:0]   rdata,
  output logic [1:0]          rresp,
  output logic                rlast,
  output logic                rvalid,
  input  logic                rready,
  input  logic [AXI_AW-1:0]   awaddr,
  input  logic [7:0]          awlen,
  input  logic                awvalid,
  output logic                awready,
  input  logic [AXI_DW-1:0]   wdata,
  input  logic                wlast,
  input  logic                wvalid,
  output logic                wready,
  output logic [1:0]          bresp,
  output logic                bvalid,
  input  logic                bready
);
  localparam int WB = AXI_DW / 8;

  logic [AXI_DW-1:0] mem [longint];
  longint rq_addr[$], wq_addr[$];
  int     rq_len[$], rq_time[$], wq_len[$];
  int     rbeat = 0, wbeat = 0, pend_b = 0, cyc = 0;
  int     max_rq = 0;   // most read bursts waiting at once
  int     stall = STALL; // may be changed by the testbench at run time

  function automatic bit go();
    return stall == 0 || $urandom_range(0, 99) >= stall;
  endfunction

  function automatic logic [AXI_DW-1:0] rd(longint a);
    if (mem.exists(a)) return mem[a];
    return '0;
  endfunction

  assign rresp = 2'b00;
  assign bresp = 2'b00;

  always @(posedge clk) begin
    cyc++;
    if (!rst_n) begin
      arready <= 1'b0; rvalid <= 1'b0; awready <= 1'b0; wready <= 1'b0; bvalid <= 1'b0;
      rlast <= 1'b0; rdata <= '0;
    end else begin
      // read address
      if (arvalid && arready) begin
        rq_addr.push_back(longint'(araddr)); rq_len.push_back(int'(arlen)); rq_time.push_back(cyc + READ_LAT);
        if (rq_addr.size() > max_rq) max_rq = rq_addr.size();
      end
      arready <= go();
      // read data
      if (rvalid && rready) begin
        if (rlast) begin
          void'(rq_addr.pop_front()); void'(rq_len.pop_front()); void'(rq_time.pop_front());
          rbeat = 0;
        end else rbeat++;
      end
      if (!rvalid || rready) begin
        if (rq_addr.size() > 0 && rq_time[0] <= cyc && go()) begin
          rvalid <= 1'b1;
          rdata  <= rd(rq_addr[0] / WB + rbeat);
          rlast  <= (rbeat == rq_len[0]);
        end else rvalid <= 1'b0;
      end
      // write address and data
      if (awvalid && awready) begin wq_addr.push_back(longint'(awaddr)); wq_len.push_back(int'(awlen)); end
      awready <= go();
      if (wvalid && wready) begin
        mem[wq_addr[0] / WB + wbeat] = wdata;
        if (wlast) begin
          if (wbeat != wq_len[0]) $error("ccn_axi_mem: wlast after %0d beats, burst of %0d", wbeat + 1, wq_len[0] + 1);
          void'(wq_addr.pop_front()); void'(wq_len.pop_front());
          wbeat = 0;
          pend_b++;
        end else wbeat++;
      end
      // data may only be taken for an announced burst
      wready <= go() && (wq_addr.size() > 0);
      // write responses
      if (bvalid && bready) pend_b--;
      bvalid <= (bvalid && !bready) || (pend_b > 0 && go());
    end
  end
endmodule
