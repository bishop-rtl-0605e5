// bishop_pkg: sizes, widths and opcodes shared by the Bishop spiking-transformer
// accelerator. A token-time bundle (TTB) packs BS_N tokens over BS_T time points of one
// feature; inside a bundle, lane k holds time t = k / BS_N and token n = k % BS_N.
// From the paper: 512-PE dense and attention arrays covering 32 output features by
// 16 TT-bundles, up to 128 sparse units, up to 10 spikes per bundle unit per cycle,
// 512 spike-generator PEs, a 144KB weight GLB with 512-bit ports, two 12KB spike GLBs,
// S scores of up to 10 bits. Own choices: bundle shape 2x5, 8-bit signed weights,
// accumulator, Y and membrane widths, GLB word layout and the opcodes.
package bishop_pkg;
  localparam int unsigned BS_T    = 2;              // time points per bundle
  localparam int unsigned BS_N    = 5;              // tokens per bundle
  localparam int unsigned BV      = BS_T * BS_N;    // spikes per bundle (paper: up to 10)
  localparam int unsigned NB      = 16;             // TT-bundles processed in parallel
  localparam int unsigned NF      = 32;             // output features processed in parallel
  localparam int unsigned NK      = 32;             // key/value tokens per attention tile
  localparam int unsigned W_W     = 8;              // signed weight width
  localparam int unsigned ACC_W   = 20;             // synaptic partial-sum width
  localparam int unsigned S_W     = 10;             // attention score width
  localparam int unsigned Y_W     = 18;             // attention output partial-sum width
  localparam int unsigned VM_W    = 24;             // membrane potential width
  localparam int unsigned SC_UNITS = 128;           // sparse-core processing units
  localparam int unsigned D_MAX   = 384;            // largest input feature count
  localparam int unsigned DI_W    = 9;              // feature index width
  localparam int unsigned SPK_WORD = NB * BV;       // spike GLB word: one feature, NB bundles
  localparam int unsigned WGT_WORD = 512;           // weight GLB port width
  localparam int unsigned SPK_DEPTH = (12 * 1024 * 8) / SPK_WORD;  // 12KB per bank
  localparam int unsigned WGT_DEPTH = (144 * 1024 * 8) / WGT_WORD; // 144KB
  localparam int unsigned SA_W    = $clog2(SPK_DEPTH);
  localparam int unsigned WA_W    = $clog2(WGT_DEPTH);

  typedef enum logic [0:0] {OP_PROJ = 1'b0, OP_ATTN = 1'b1} op_e;
  typedef enum logic [0:0] {MODE_S = 1'b0, MODE_Y = 1'b1} attn_mode_e;

  typedef logic [BV-1:0]          bundle_t;
  typedef logic signed [W_W-1:0]  weight_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // one tile operation issued to the accelerator
  typedef struct packed {
    op_e                    op;        // OP_PROJ: MLP or projection tile, OP_ATTN: attention tile
    logic                   src_bank;  // spike GLB bank read; results go to the other bank
    logic [SA_W-1:0]        in_base;   // PROJ: input spikes, ATTN: Q (word = one feature)
    logic [DI_W:0]          n_feat;    // input features (PROJ) or head features (ATTN)
    logic [WA_W-1:0]        w_base;    // PROJ: weight row of input feature 0
    logic                   w_half;    // PROJ: which 32 of the 64 weights in a row
    logic [SA_W-1:0]        k_base;    // ATTN: K words
    logic [SA_W-1:0]        v_base;    // ATTN: V words (NF features)
    logic [SA_W-1:0]        out_base;  // output spike words (NF features)
    logic [$clog2(NB+1)-1:0] theta_s;  // stratification threshold
    logic [DI_W:0]          theta_q;   // ECP threshold for Q rows
    logic [DI_W:0]          theta_k;   // ECP threshold for K tokens
    logic [3:0]             y_shift;   // power-of-two attention scale (right shift)
    logic                   y_accum;   // ATTN: add this key tile into the Y buffer
    logic                   y_fire;    // ATTN: generate spikes after this key tile
    logic                   vm_init;   // tile holds the first time points: membranes start at 0
    logic signed [VM_W-1:0] v_th;
    logic signed [VM_W-1:0] v_leak;
  } cmd_t;
endpackage
