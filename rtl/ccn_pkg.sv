// ccn_pkg: sizes, number formats and shared types of the CaloClusterNet
// dataflow accelerator.
//
// The network is a chain of seven partitions A..G. A, C, E and G sit in
// programmable logic and process P_FPGA = 2 nodes per clock; B, D and F
// stand for the AI Engine partitions and process P_AIE = 4 nodes per clock.
// An event holds N_NODES = 128 calorimeter hits (fewer hits are zero-padded).
// Partitions A and G compute with 16-bit values, all others with 8-bit
// values. Those numbers follow the paper. All feature widths below are this
// design's own choice: the paper does not state them.
//
// Weights are not fixed in the RTL. A single configuration bus (cfg_t)
// writes every weight and bias of every layer; each layer answers to its
// LAYER_ID. Inside a layer the word at address o*(IN+1)+i is weight W[o][i]
// and the word at o*(IN+1)+IN is bias b[o].
package ccn_pkg;

  // --- sizes taken from the paper ---
  localparam int N_NODES = 128;  // inputs per inference
  localparam int P_FPGA  = 2;    // nodes per beat in programmable-logic partitions
  localparam int P_AIE   = 4;    // nodes per beat in AI Engine partitions
  localparam int W16     = 16;   // precision of partitions A and G
  localparam int W8      = 8;    // precision of partitions B..F

  // --- sizes chosen by this design ---
  localparam int IN_F     = 5;   // node features: energy, time, x, y, z
  localparam int H        = 16;  // hidden width of Dense layers
  localparam int H_SKIP   = 8;   // width of the lower Dense in partition A
  localparam int S_DIM    = 4;   // GravNetConv coordinate space
  localparam int FLR      = 8;   // GravNetConv propagated features
  localparam int GC_IN    = S_DIM + FLR;  // features sent to a GravNetConv
  localparam int GC_OUT   = 16;  // features returned by a GravNetConv
  localparam int N_HEADS  = 8;   // energy, signal, x, y, z, ccoord0, ccoord1, beta

  // Output head positions inside the output vector of partition G.
  localparam int HD_ENERGY = 0;
  localparam int HD_SIGNAL = 1;
  localparam int HD_POS    = 2;  // three words: x, y, z
  localparam int HD_CC     = 5;  // two words: condensation coordinates
  localparam int HD_BETA   = 7;

  // Requantisation: accumulators are shifted right by this amount.
  localparam int SHIFT8  = 6;
  localparam int SHIFT16 = 8;
  localparam int MULT_SHIFT = 8;  // energy head times input energy

  // Layer identifiers on the configuration bus.
  typedef enum logic [7:0] {
    L_A_DENSE   = 8'd0,   // A, upper Dense
    L_A_SKIP    = 8'd1,   // A, lower Dense (skip to F)
    L_B_DENSE   = 8'd2,
    L_B_LINEAR  = 8'd3,   // B, fused pair of Linear layers
    L_D_DENSE1  = 8'd4,
    L_D_DENSE2  = 8'd5,
    L_D_DENSE3  = 8'd6,
    L_D_LINEAR  = 8'd7,   // D, fused pair of Linear layers
    L_F_DENSE1  = 8'd8,
    L_F_DENSE2  = 8'd9,
    L_F_DENSE3  = 8'd10,
    L_G_OUT     = 8'd11   // G, output layer heads
  } layer_id_e;
  localparam int N_LAYERS = 12;

  // Weight configuration bus.
  typedef struct packed {
    logic        we;
    logic [7:0]  layer;
    logic [11:0] addr;
    logic [15:0] data;
  } cfg_t;

  // DDR layout: one AXI beat carries two nodes in two 128-bit slots.
  localparam int AXI_AW        = 64;
  localparam int AXI_DW        = 256;
  localparam int SLOT_W        = 128;
  localparam int NODES_PER_BEAT = AXI_DW / SLOT_W;
  localparam int BEATS_PER_EVENT = N_NODES / NODES_PER_BEAT;
  localparam int EVENT_BYTES   = BEATS_PER_EVENT * (AXI_DW / 8);

endpackage
