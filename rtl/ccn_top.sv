// ccn_top: CaloClusterNet trigger accelerator, Load -> A .. G -> Store.
//
// The design streams calorimeter events from DDR through the seven network
// partitions and writes the per-node results back to DDR, without any help
// from the host once started. Partitions A and G run with 2 nodes per beat
// and 16-bit values, partitions B, D and F with 4 nodes per beat and 8-bit
// values; lane converters (the Retile step) sit at every boundary between
// the two. The GravNetConv layers of partitions C and E and the condensation
// point selection (CPS) of partition G are not part of this RTL: each is
// reached through a pair of stream ports (tx to the layer, rx back from it),
// at 2 nodes per beat.
//
// Skip connections run around the event-level stages and wait in FIFOs:
//   B Dense       -> D Concat        (around C)
//   D Dense 2, 3  -> F Concats       (around E)
//   A lower Dense -> F last Concat   (around B..E)
//   input energy  -> G multiplier    (around B..F)
//   G heads       -> Store           (around CPS)
// Their depths are given in whole events by the *_EVENTS parameters; each
// must exceed the number of events the bypassed stages can hold.
//
// Interface: weight configuration bus (cfg), start/done control of the Load
// and Store kernels, one AXI4 read master (bank 0) and one AXI4 write master
// (bank 1), and the stream ports of the external layers. All streams are
// valid/ready with a 'last' flag on the final beat of each event.
//
// Timing: with every stage keeping up, one beat of two nodes enters per
// clock, so an event of 128 nodes takes 64 clocks (3.9 million events per
// second at 250 MHz).
//
// Partitioning, the skip topology and the parallelism follow the paper;
// FIFO depths, widths and the external-layer ports are this design's.
module ccn_top
  import ccn_pkg::*;
#(
  parameter int BSKIP_EVENTS  = 4,
  parameter int DSKIP_EVENTS  = 4,
  parameter int ASKIP_EVENTS  = 8,
  parameter int ENERGY_EVENTS = 8,
  parameter int RESULT_EVENTS = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  cfg_t cfg,
  // Load / Store control
  input  logic                start,
  input  logic [AXI_AW-1:0]   src_base,
  input  logic [AXI_AW-1:0]   dst_base,
  input  logic [31:0]         num_events,
  output logic                load_busy,
  output logic                load_done,
  output logic                store_busy,
  output logic                store_done,
  output logic                axi_error,
  // AXI4 read master (DDR bank 0)
  output logic [AXI_AW-1:0]   m_araddr,
  output logic [7:0]          m_arlen,
  output logic [2:0]          m_arsize,
  output logic [1:0]          m_arburst,
  output logic                m_arvalid,
  input  logic                m_arready,
  input  logic [AXI_DW-1:0]   m_rdata,
  input  logic [1:0]          m_rresp,
  input  logic                m_rlast,
  input  logic                m_rvalid,
  output logic                m_rready,
  // AXI4 write master (DDR bank 1)
  output logic [AXI_AW-1:0]   m_awaddr,
  output logic [7:0]          m_awlen,
  output logic [2:0]          m_awsize,
  output logic [1:0]          m_awburst,
  output logic                m_awvalid,
  input  logic                m_awready,
  output logic [AXI_DW-1:0]   m_wdata,
  output logic [AXI_DW/8-1:0] m_wstrb,
  output logic                m_wlast,
  output logic                m_wvalid,
  input  logic                m_wready,
  input  logic [1:0]          m_bresp,
  input  logic                m_bvalid,
  output logic                m_bready,
  // GravNetConv of partition C
  output logic                                  gc1_tx_valid,
  input  logic                                  gc1_tx_ready,
  output logic [P_FPGA-1:0][GC_IN-1:0][W8-1:0]  gc1_tx_data,
  output logic                                  gc1_tx_last,
  input  logic                                  gc1_rx_valid,
  output logic                                  gc1_rx_ready,
  input  logic [P_FPGA-1:0][GC_OUT-1:0][W8-1:0] gc1_rx_data,
  input  logic                                  gc1_rx_last,
  // GravNetConv of partition E
  output logic                                  gc2_tx_valid,
  input  logic                                  gc2_tx_ready,
  output logic [P_FPGA-1:0][GC_IN-1:0][W8-1:0]  gc2_tx_data,
  output logic                                  gc2_tx_last,
  input  logic                                  gc2_rx_valid,
  output logic                                  gc2_rx_ready,
  input  logic [P_FPGA-1:0][GC_OUT-1:0][W8-1:0] gc2_rx_data,
  input  logic                                  gc2_rx_last,
  // Condensation point selection of partition G: ccoord0, ccoord1, beta out,
  // one flag per node (bit 0 of a 16-bit word) back
  output logic                                  cps_tx_valid,
  input  logic                                  cps_tx_ready,
  output logic [P_FPGA-1:0][2:0][W16-1:0]       cps_tx_data,
  output logic                                  cps_tx_last,
  input  logic                                  cps_rx_valid,
  output logic                                  cps_rx_ready,
  input  logic [P_FPGA-1:0][0:0][W16-1:0]       cps_rx_data,
  input  logic                                  cps_rx_last
);
  localparam int EV2 = N_NODES / P_FPGA;  // beats per event at 2 nodes per beat
  localparam int EV4 = N_NODES / P_AIE;   // beats per event at 4 nodes per beat

  logic rd_error, wr_error;
  assign axi_error = rd_error || wr_error;

  // ---------------- Load -> A ----------------
  logic ld_valid, ld_ready, ld_last;
  logic [P_FPGA-1:0][IN_F-1:0][W16-1:0] ld_data;

  ccn_load u_load (
    .clk, .rst_n, .start, .src_base, .num_events,
    .busy(load_busy), .done(load_done), .rd_error,
    .m_araddr, .m_arlen, .m_arsize, .m_arburst, .m_arvalid, .m_arready,
    .m_rdata, .m_rresp, .m_rlast, .m_rvalid, .m_rready,
    .out_valid(ld_valid), .out_ready(ld_ready), .out_data(ld_data), .out_last(ld_last)
  );

  logic a_valid, a_ready, a_last;
  logic [P_FPGA-1:0][H-1:0][W8-1:0] a_data;
  logic as_valid, as_ready, as_last;
  logic [P_FPGA-1:0][H_SKIP-1:0][W8-1:0] as_data;
  logic en_valid, en_ready, en_last;
  logic [P_FPGA-1:0][0:0][W16-1:0] en_data;

  ccn_seg_a u_seg_a (
    .clk, .rst_n, .cfg,
    .in_valid(ld_valid), .in_ready(ld_ready), .in_data(ld_data), .in_last(ld_last),
    .main_valid(a_valid), .main_ready(a_ready), .main_data(a_data), .main_last(a_last),
    .skip_valid(as_valid), .skip_ready(as_ready), .skip_data(as_data), .skip_last(as_last),
    .en_valid, .en_ready, .en_data, .en_last
  );

  // ---------------- A -> B ----------------
  logic ab_valid, ab_ready, ab_last;
  logic [P_AIE-1:0][H-1:0][W8-1:0] ab_data;
  ccn_lane_conv #(.LI(P_FPGA), .LO(P_AIE), .F(H), .W(W8)) u_rt_ab (
    .clk, .rst_n,
    .in_valid(a_valid), .in_ready(a_ready), .in_data(a_data), .in_last(a_last),
    .out_valid(ab_valid), .out_ready(ab_ready), .out_data(ab_data), .out_last(ab_last)
  );

  // A lower Dense skip: buffer at 2 lanes, widen to 4 lanes for F.
  localparam int ASW = P_FPGA * H_SKIP * W8 + 1;
  logic asq_valid, asq_ready;
  logic [ASW-1:0] asq_data;
  ccn_fifo #(.W(ASW), .DEPTH(ASKIP_EVENTS * EV2)) u_q_askip (
    .clk, .rst_n,
    .in_valid(as_valid), .in_ready(as_ready), .in_data({as_last, as_data}),
    .out_valid(asq_valid), .out_ready(asq_ready), .out_data(asq_data)
  );
  logic asw_valid, asw_ready, asw_last;
  logic [P_AIE-1:0][H_SKIP-1:0][W8-1:0] asw_data;
  ccn_lane_conv #(.LI(P_FPGA), .LO(P_AIE), .F(H_SKIP), .W(W8)) u_rt_askip (
    .clk, .rst_n,
    .in_valid(asq_valid), .in_ready(asq_ready), .in_data(asq_data[ASW-2:0]), .in_last(asq_data[ASW-1]),
    .out_valid(asw_valid), .out_ready(asw_ready), .out_data(asw_data), .out_last(asw_last)
  );

  // Input energy skip to G.
  localparam int ENW = P_FPGA * W16 + 1;
  logic enq_valid, enq_ready;
  logic [ENW-1:0] enq_data;
  ccn_fifo #(.W(ENW), .DEPTH(ENERGY_EVENTS * EV2)) u_q_energy (
    .clk, .rst_n,
    .in_valid(en_valid), .in_ready(en_ready), .in_data({en_last, en_data}),
    .out_valid(enq_valid), .out_ready(enq_ready), .out_data(enq_data)
  );

  // ---------------- B ----------------
  logic b_gc_valid, b_gc_ready, b_gc_last;
  logic [P_AIE-1:0][GC_IN-1:0][W8-1:0] b_gc_data;
  logic bs_valid, bs_ready, bs_last;
  logic [P_AIE-1:0][H-1:0][W8-1:0] bs_data;

  ccn_seg_b u_seg_b (
    .clk, .rst_n, .cfg,
    .in_valid(ab_valid), .in_ready(ab_ready), .in_data(ab_data), .in_last(ab_last),
    .gc_valid(b_gc_valid), .gc_ready(b_gc_ready), .gc_data(b_gc_data), .gc_last(b_gc_last),
    .skip_valid(bs_valid), .skip_ready(bs_ready), .skip_data(bs_data), .skip_last(bs_last)
  );

  ccn_lane_conv #(.LI(P_AIE), .LO(P_FPGA), .F(GC_IN), .W(W8)) u_rt_bc (
    .clk, .rst_n,
    .in_valid(b_gc_valid), .in_ready(b_gc_ready), .in_data(b_gc_data), .in_last(b_gc_last),
    .out_valid(gc1_tx_valid), .out_ready(gc1_tx_ready), .out_data(gc1_tx_data), .out_last(gc1_tx_last)
  );

  localparam int HSW = P_AIE * H * W8 + 1;
  logic bsq_valid, bsq_ready;
  logic [HSW-1:0] bsq_data;
  ccn_fifo #(.W(HSW), .DEPTH(BSKIP_EVENTS * EV4)) u_q_bskip (
    .clk, .rst_n,
    .in_valid(bs_valid), .in_ready(bs_ready), .in_data({bs_last, bs_data}),
    .out_valid(bsq_valid), .out_ready(bsq_ready), .out_data(bsq_data)
  );

  // ---------------- C -> D ----------------
  logic cd_valid, cd_ready, cd_last;
  logic [P_AIE-1:0][GC_OUT-1:0][W8-1:0] cd_data;
  ccn_lane_conv #(.LI(P_FPGA), .LO(P_AIE), .F(GC_OUT), .W(W8)) u_rt_cd (
    .clk, .rst_n,
    .in_valid(gc1_rx_valid), .in_ready(gc1_rx_ready), .in_data(gc1_rx_data), .in_last(gc1_rx_last),
    .out_valid(cd_valid), .out_ready(cd_ready), .out_data(cd_data), .out_last(cd_last)
  );

  logic d_gc_valid, d_gc_ready, d_gc_last;
  logic [P_AIE-1:0][GC_IN-1:0][W8-1:0] d_gc_data;
  logic ds2_valid, ds2_ready, ds2_last, ds3_valid, ds3_ready, ds3_last;
  logic [P_AIE-1:0][H-1:0][W8-1:0] ds2_data, ds3_data;

  ccn_seg_d u_seg_d (
    .clk, .rst_n, .cfg,
    .gin_valid(cd_valid), .gin_ready(cd_ready), .gin_data(cd_data), .gin_last(cd_last),
    .bskip_valid(bsq_valid), .bskip_ready(bsq_ready),
    .bskip_data(bsq_data[HSW-2:0]), .bskip_last(bsq_data[HSW-1]),
    .gc_valid(d_gc_valid), .gc_ready(d_gc_ready), .gc_data(d_gc_data), .gc_last(d_gc_last),
    .skip2_valid(ds2_valid), .skip2_ready(ds2_ready), .skip2_data(ds2_data), .skip2_last(ds2_last),
    .skip3_valid(ds3_valid), .skip3_ready(ds3_ready), .skip3_data(ds3_data), .skip3_last(ds3_last)
  );

  ccn_lane_conv #(.LI(P_AIE), .LO(P_FPGA), .F(GC_IN), .W(W8)) u_rt_de (
    .clk, .rst_n,
    .in_valid(d_gc_valid), .in_ready(d_gc_ready), .in_data(d_gc_data), .in_last(d_gc_last),
    .out_valid(gc2_tx_valid), .out_ready(gc2_tx_ready), .out_data(gc2_tx_data), .out_last(gc2_tx_last)
  );

  logic ds2q_valid, ds2q_ready, ds3q_valid, ds3q_ready;
  logic [HSW-1:0] ds2q_data, ds3q_data;
  ccn_fifo #(.W(HSW), .DEPTH(DSKIP_EVENTS * EV4)) u_q_dskip2 (
    .clk, .rst_n,
    .in_valid(ds2_valid), .in_ready(ds2_ready), .in_data({ds2_last, ds2_data}),
    .out_valid(ds2q_valid), .out_ready(ds2q_ready), .out_data(ds2q_data)
  );
  ccn_fifo #(.W(HSW), .DEPTH(DSKIP_EVENTS * EV4)) u_q_dskip3 (
    .clk, .rst_n,
    .in_valid(ds3_valid), .in_ready(ds3_ready), .in_data({ds3_last, ds3_data}),
    .out_valid(ds3q_valid), .out_ready(ds3q_ready), .out_data(ds3q_data)
  );

  // ---------------- E -> F ----------------
  logic ef_valid, ef_ready, ef_last;
  logic [P_AIE-1:0][GC_OUT-1:0][W8-1:0] ef_data;
  ccn_lane_conv #(.LI(P_FPGA), .LO(P_AIE), .F(GC_OUT), .W(W8)) u_rt_ef (
    .clk, .rst_n,
    .in_valid(gc2_rx_valid), .in_ready(gc2_rx_ready), .in_data(gc2_rx_data), .in_last(gc2_rx_last),
    .out_valid(ef_valid), .out_ready(ef_ready), .out_data(ef_data), .out_last(ef_last)
  );

  logic f_valid, f_ready, f_last;
  logic [P_AIE-1:0][H-1:0][W8-1:0] f_data;
  ccn_seg_f u_seg_f (
    .clk, .rst_n, .cfg,
    .gin_valid(ef_valid), .gin_ready(ef_ready), .gin_data(ef_data), .gin_last(ef_last),
    .skip3_valid(ds3q_valid), .skip3_ready(ds3q_ready),
    .skip3_data(ds3q_data[HSW-2:0]), .skip3_last(ds3q_data[HSW-1]),
    .skip2_valid(ds2q_valid), .skip2_ready(ds2q_ready),
    .skip2_data(ds2q_data[HSW-2:0]), .skip2_last(ds2q_data[HSW-1]),
    .askip_valid(asw_valid), .askip_ready(asw_ready), .askip_data(asw_data), .askip_last(asw_last),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data), .out_last(f_last)
  );

  // ---------------- F -> G ----------------
  logic fg_valid, fg_ready, fg_last;
  logic [P_FPGA-1:0][H-1:0][W8-1:0] fg_data;
  ccn_lane_conv #(.LI(P_AIE), .LO(P_FPGA), .F(H), .W(W8)) u_rt_fg (
    .clk, .rst_n,
    .in_valid(f_valid), .in_ready(f_ready), .in_data(f_data), .in_last(f_last),
    .out_valid(fg_valid), .out_ready(fg_ready), .out_data(fg_data), .out_last(fg_last)
  );

  logic g_valid, g_ready, g_last;
  logic [P_FPGA-1:0][N_HEADS-1:0][W16-1:0] g_data;
  ccn_seg_g u_seg_g (
    .clk, .rst_n, .cfg,
    .in_valid(fg_valid), .in_ready(fg_ready), .in_data(fg_data), .in_last(fg_last),
    .en_valid(enq_valid), .en_ready(enq_ready),
    .en_data(enq_data[ENW-2:0]), .en_last(enq_data[ENW-1]),
    .out_valid(g_valid), .out_ready(g_ready), .out_data(g_data), .out_last(g_last)
  );

  // ---------------- G -> CPS, results -> Store ----------------
  localparam int GW = P_FPGA * N_HEADS * W16 + 1;
  logic [1:0]         gf_valid, gf_ready;
  logic [1:0][GW-1:0] gf_data;
  ccn_fork #(.W(GW), .N(2)) u_fork_g (
    .in_valid(g_valid), .in_ready(g_ready), .in_data({g_last, g_data}),
    .out_valid(gf_valid), .out_ready(gf_ready), .out_data(gf_data)
  );

  logic [P_FPGA-1:0][N_HEADS-1:0][W16-1:0] g0_nodes, g1_nodes;
  assign g0_nodes     = gf_data[0][GW-2:0];
  assign g1_nodes     = gf_data[1][GW-2:0];
  assign cps_tx_valid = gf_valid[0];
  assign gf_ready[0]  = cps_tx_ready;
  assign cps_tx_last  = gf_data[0][GW-1];
  always_comb begin
    for (int l = 0; l < P_FPGA; l++) begin
      cps_tx_data[l][0] = g0_nodes[l][HD_CC];
      cps_tx_data[l][1] = g0_nodes[l][HD_CC + 1];
      cps_tx_data[l][2] = g0_nodes[l][HD_BETA];
    end
  end

  // Energy, signal and position wait for the CPS flags.
  localparam int RW = P_FPGA * 5 * W16 + 1;
  logic [P_FPGA-1:0][4:0][W16-1:0] res_nodes;
  always_comb begin
    for (int l = 0; l < P_FPGA; l++) res_nodes[l] = g1_nodes[l][4:0];
  end
  logic rq_valid, rq_ready;
  logic [RW-1:0] rq_data;
  ccn_fifo #(.W(RW), .DEPTH(RESULT_EVENTS * EV2)) u_q_result (
    .clk, .rst_n,
    .in_valid(gf_valid[1]), .in_ready(gf_ready[1]), .in_data({gf_data[1][GW-1], res_nodes}),
    .out_valid(rq_valid), .out_ready(rq_ready), .out_data(rq_data)
  );

  logic st_valid, st_ready, st_last;
  logic [P_FPGA-1:0][5:0][W16-1:0] st_data;
  ccn_concat #(.LANES(P_FPGA), .FA(5), .FB(1), .W(W16)) u_join_cps (
    .clk, .rst_n,
    .a_valid(rq_valid), .a_ready(rq_ready), .a_data(rq_data[RW-2:0]), .a_last(rq_data[RW-1]),
    .b_valid(cps_rx_valid), .b_ready(cps_rx_ready), .b_data(cps_rx_data), .b_last(cps_rx_last),
    .out_valid(st_valid), .out_ready(st_ready), .out_data(st_data), .out_last(st_last)
  );

  ccn_store u_store (
    .clk, .rst_n, .start, .dst_base, .num_events,
    .busy(store_busy), .done(store_done), .wr_error,
    .m_awaddr, .m_awlen, .m_awsize, .m_awburst, .m_awvalid, .m_awready,
    .m_wdata, .m_wstrb, .m_wlast, .m_wvalid, .m_wready,
    .m_bresp, .m_bvalid, .m_bready,
    .in_valid(st_valid), .in_ready(st_ready), .in_data(st_data), .in_last(st_last)
  );
endmodule
