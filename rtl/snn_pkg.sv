// snn_pkg: constants and types shared by the spiking-neural-network processor.
//
// Sizes follow the processor description: a core holds up to 256 presynaptic
// and 256 postsynaptic neurons, updates four postsynaptic neurons (lanes) per
// cycle, stores 8-bit weights, 4-bit synaptic delays (0..15 timesteps) and
// 16-bit membrane potentials, and four cores are chained.  The leak shift
// (lambda is read as an unsigned fraction lambda/256) and the layout of the
// configuration struct are this design's own choices.
package snn_pkg;

  localparam int N_MAX      = 256;              // neurons per core (pre and post)
  localparam int LANES      = 4;                // SCE channels per core
  localparam int N_GRP_MAX  = N_MAX / LANES;    // 64 postsynaptic groups
  localparam int W_W        = 8;                // weight width
  localparam int D_W        = 4;                // delay width
  localparam int SRB_DEPTH  = 1 << D_W;         // 16 ring-buffer slots
  localparam int U_W        = 16;               // membrane potential width
  localparam int N_CORES    = 4;
  localparam int LEAK_SHIFT = 8;                // U*lambda >>> LEAK_SHIFT
  localparam int SYN_W      = W_W + D_W;        // one synapse entry in WTM
  localparam int WT_WORD_W  = LANES * SYN_W;    // 48-bit WTM word
  localparam int MP_WORD_W  = LANES * U_W;      // 64-bit MPM word
  localparam int PRE_AW     = $clog2(N_MAX);    // 8
  localparam int GRP_AW     = $clog2(N_GRP_MAX);// 6
  localparam int WT_AW      = PRE_AW + GRP_AW;  // 14: address = i*64 + j

  // Datapath configuration of a spiking computation engine.
  typedef enum logic [1:0] {
    SCE_LEAK  = 2'd0,   // U <- (U * lambda) >>> LEAK_SHIFT
    SCE_INTEG = 2'd1,   // U <- U + S[head + d] * W
    SCE_FIRE  = 2'd2    // spike = U > TH ; U <- U - TH on a spike
  } sce_mode_e;

  // Per-core (per-layer) run-time configuration.
  typedef struct packed {
    logic [PRE_AW:0]     n_pre;   // presynaptic neurons, 1..256
    logic [GRP_AW:0]     n_grp;   // postsynaptic groups of four, 1..64
    logic [W_W-1:0]      lambda;  // leak factor, lambda/256
    logic signed [U_W-1:0] vth;   // firing threshold
  } core_cfg_t;

endpackage
