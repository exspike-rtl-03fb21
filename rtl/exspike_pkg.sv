// exspike_pkg: shared constants and types of the ExSpike event-driven SNN
// accelerator. The sizes that follow the paper are the 32 EPE clusters, the
// 3x3 WPE block, 8-bit weights and 16-bit membrane potentials, and the SRAM
// capacities (Spike / Residual Spike SRAM 64 KB each, Neuron and Weight SRAM
// 294 KB each, Instruction SRAM 1 KB). The word layouts, the 128-bit
// instruction format and the FIFO depths are choices of this design.
package exspike_pkg;

  // ---- datapath sizes ----------------------------------------------------
  localparam int unsigned N_CLUSTER  = 32;   // EPE clusters (output channels in parallel)
  localparam int unsigned KTAPS      = 9;    // 3x3 WPE units per WPE block
  localparam int unsigned W_BITS     = 8;    // weight precision
  localparam int unsigned V_BITS     = 16;   // membrane potential / partial sum precision
  localparam int unsigned CIN_MAX    = 512;  // channels per spike word (widest model: 512)
  localparam int unsigned CH_BITS    = $clog2(CIN_MAX);
  localparam int unsigned N_LANES    = CIN_MAX / N_CLUSTER;  // 32-channel lanes in a spike word

  // ---- memories ----------------------------------------------------------
  // Spike SRAM: 64 KB = 1024 words x 512 bit, one word per spatial position.
  localparam int unsigned SPK_DEPTH  = 1024;
  localparam int unsigned SPK_AW     = $clog2(SPK_DEPTH);
  // Neuron SRAM: 294 KB = 4704 words x (32 x 16 bit).
  localparam int unsigned NRN_WIDTH  = N_CLUSTER * V_BITS;
  localparam int unsigned NRN_DEPTH  = 4704;
  localparam int unsigned NRN_AW     = $clog2(NRN_DEPTH);
  // Weight SRAM: 294 KB / 288 B = 1045 words x (32 x 9 x 8 bit).
  localparam int unsigned WGT_WIDTH  = N_CLUSTER * KTAPS * W_BITS;
  localparam int unsigned WGT_DEPTH  = 1045;
  localparam int unsigned WGT_AW     = $clog2(WGT_DEPTH);
  // Instruction SRAM: 1 KB = 64 x 128 bit.
  localparam int unsigned INS_BITS   = 128;
  localparam int unsigned INS_DEPTH  = 64;
  localparam int unsigned INS_AW     = $clog2(INS_DEPTH);
  // EAFC core: FC weight memory of 512 words x 16 outputs x 8 bit, 8 output groups.
  localparam int unsigned FC_LANES   = 16;
  localparam int unsigned FC_DEPTH   = 512;
  localparam int unsigned FC_AW      = $clog2(FC_DEPTH);
  localparam int unsigned FC_GROUPS  = 8;

  localparam int unsigned AER_DEPTH  = 16;   // AER FIFO entries
  localparam int unsigned EFIFO_DEPTH = 4;   // elastic FIFO entries

  // ---- types -------------------------------------------------------------
  // OP_TCONV: 3x3 transposed convolution, stride 2 (output map 2h x 2w)
  typedef enum logic [1:0] {OP_END = 2'd0, OP_CONV = 2'd1, OP_FC = 2'd2, OP_TCONV = 2'd3} op_e;

  // What the Attention Core does with the spikes produced by the FPEs.
  typedef enum logic [1:0] {
    ATT_NONE = 2'd0,   // write spikes back unchanged
    ATT_K    = 2'd1,   // K spikes: written back unchanged
    ATT_V    = 2'd2,   // V spikes: written back, AND with K row, OR into KV status
    ATT_Q    = 2'd3    // Q spikes: AND with KV status, result written back
  } att_mode_e;

  // Kind of spike sequence the Sparse Core has just finished filtering.
  typedef enum logic [1:0] {
    TAG_SINGLE = 2'd0, // one position, no compression
    TAG_OV     = 2'd1, // APEC overlap of a pair: partial sums are cached
    TAG_P0     = 2'd2, // first position of a pair (non-overlap part)
    TAG_P1     = 2'd3  // second position of a pair (non-overlap part)
  } seq_tag_e;

  // Address-event written into the AER FIFO.
  typedef struct packed {
    logic [SPK_AW-1:0]  pos;   // linear position y*W+x
    logic [5:0]         y;
    logic [5:0]         x;
    logic [CH_BITS-1:0] ch;    // input channel of the event
  } aer_t;

  // Layer instruction, one per Instruction SRAM word.
  typedef struct packed {
    op_e                op;
    logic [3:0]         g0;         // absolute index of the first output group
    logic               leak;       // LIF leak: potentials that do not fire are halved
    logic               src_sel;    // input map: 0 Spike SRAM, 1 Residual Spike SRAM
    logic               dst_sel;    // output map: 0 Spike SRAM, 1 Residual Spike SRAM
    logic               k_sel;      // SRAM holding the K map (attention V layer)
    logic               apec;       // enable adjacent-position event compression
    logic               fire;       // run the FPE sweep after accumulation
    logic               ksize3;     // 1: 3x3 kernel, 0: 1x1 kernel (centre tap); OP_CONV only
    att_mode_e          attn;
    logic [5:0]         h;          // input map height after pooling (1..63)
    logic [5:0]         w;          // input map width after pooling  (1..63)
    logic [9:0]         cin;        // input channels (weight rows per group)
    logic [4:0]         groups;     // output-channel groups of 32 run by this instruction (1..16)
    logic [9:0]         src_base;   // spike word address of the input map
    logic [9:0]         dst_base;   // spike word address of the output map
    logic [9:0]         k_base;     // spike word address of the K map
    logic [10:0]        w_base;     // Weight SRAM (conv) or FC weight memory base
    logic [10:0]        b_base;     // Weight SRAM word holding the group-0 biases
    logic [12:0]        n_base;     // Neuron SRAM base of this layer
    logic signed [15:0] thresh;     // firing threshold
    logic [1:0]         pool_shift; // log2 of the pooling window side: average pooling
                                    // folded into the FC weights (OP_FC) or max pooling
                                    // (OR) of the input map (OP_CONV)
    logic [2:0]         fc_group;   // EAFC: which 16-output group is computed
  } instr_t;

  // Host write targets.
  typedef enum logic [2:0] {
    MEM_SPK = 3'd0, MEM_RES = 3'd1, MEM_NRN = 3'd2, MEM_WGT = 3'd3, MEM_INS = 3'd4, MEM_FCW = 3'd5
  } mem_sel_e;

  // Saturating signed add used by the MPE, FPE and EAFC accumulators.
  function automatic logic signed [V_BITS-1:0] sat_add(logic signed [V_BITS-1:0] a,
                                                       logic signed [V_BITS-1:0] b);
    logic signed [V_BITS:0] s;
    s = {a[V_BITS-1], a} + {b[V_BITS-1], b};
    if (s[V_BITS] != s[V_BITS-1]) return s[V_BITS] ? {1'b1, {(V_BITS-1){1'b0}}} : {1'b0, {(V_BITS-1){1'b1}}};
    return s[V_BITS-1:0];
  endfunction

endpackage
