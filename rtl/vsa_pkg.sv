// vsa_pkg: sizes, types and helper functions shared by the vectorwise SNN
// accelerator. The array sizes (32 PE blocks, 3 PE arrays of 8x3 PEs, ten
// partial sums per array, 8-bit partial sums and membrane potentials, the
// SRAM capacities) follow the published architecture. Word layouts, the
// configuration record and the pipeline tag are choices of this design.
//
// Word layouts used everywhere:
//   spike word  : N_BLK x PE_ROWS bits; block b (input channel b) owns bits
//                 [b*PE_ROWS +: PE_ROWS], bit r = tile row r.
//   weight word : N_BLK x 9 bits; block b owns bits [b*9 +: 9], bit kx*3+ky
//                 is the sign (1 = -1, 0 = +1) of filter column kx, row ky.
//   membrane    : PE_ROWS x ACC_W bits, lane r = tile row r.
package vsa_pkg;

  // ---------------- array geometry ----------------
  localparam int N_BLK     = 32;               // PE blocks (input channels per group)
  localparam int PE_ROWS   = 8;                // spikes per column vector
  localparam int KH        = 3;                // filter height (weights per PE-array column)
  localparam int KW        = 3;                // filter width (PE arrays per block)
  localparam int N_PS      = PE_ROWS + KH - 1; // ten diagonal partial sums per PE array
  localparam int N_BND     = KH - 1;           // boundary partial sums at each tile edge
  localparam int PS_W      = 3;                // one diagonal sum: -3..+3
  localparam int ACC_W     = 8;                // partial sum / membrane / bias / threshold width
  localparam int TREE_W    = 18;               // internal width of the tree adder
  localparam int BITPLANES = 8;                // encoding layer input bits
  localparam int ENC_SHIFT = 7;                // >>7 after the tree in encoding mode
  localparam int TREE_SPLIT = 4;               // partial sums kept between the two tree stages

  // ---------------- memory sizes (words) ----------------
  localparam int SPK_W       = N_BLK * PE_ROWS;    // 256-bit spike word
  localparam int WGT_W       = N_BLK * KH * KW;    // 288-bit weight word
  localparam int MEM_W       = PE_ROWS * ACC_W;    // 64-bit membrane word
  localparam int BND_W       = N_BND * ACC_W;      // 16-bit boundary word
  localparam int SPK_DEPTH   = 144;   // 4.5 KB / 32 B
  localparam int TMP_DEPTH   = 144;   // 4.5 KB / 32 B
  localparam int WGT_DEPTH   = 2048;  // 72 KB / 36 B
  localparam int BIAS_DEPTH  = 256;   // 0.25 KB / 1 B
  localparam int MEM_DEPTH   = 4096;  // 32 KB / 8 B
  localparam int BND_DEPTH   = 4096;  // 8 KB / 2 B
  localparam int LBUF_DEPTH  = 32;    // 0.3125 KB / 10 B

  localparam int SPK_AW  = $clog2(SPK_DEPTH);
  localparam int WGT_AW  = $clog2(WGT_DEPTH);
  localparam int BIAS_AW = $clog2(BIAS_DEPTH);
  localparam int MEM_AW  = $clog2(MEM_DEPTH);
  localparam int BND_AW  = $clog2(BND_DEPTH);
  localparam int LBUF_AW = $clog2(LBUF_DEPTH);
  localparam int COL_W   = 6;   // column counter, up to 34 input columns
  localparam int OC_W    = 9;   // output channel count, up to 256
  localparam int GRP_W   = 4;   // channel group count, up to 8

  typedef logic [PE_ROWS-1:0]              spike_vec_t;
  typedef logic [KH*KW-1:0]                wset_t;
  typedef logic signed [PS_W-1:0]          ps_t;
  typedef ps_t [N_PS-1:0]                  ps_vec_t;     // one PE array output
  typedef ps_vec_t [KW-1:0]                blk_ps_t;     // one PE block output
  typedef logic signed [ACC_W-1:0]         acc_t;
  typedef acc_t [PE_ROWS-1:0]              acc_vec_t;
  typedef logic signed [TREE_W-1:0]        tree_t;

  // IF neuron operating mode
  typedef enum logic [1:0] {
    IF_SPIKE    = 2'd0,  // spiking layer: V += conv - bias
    IF_ENC_LOAD = 2'd1,  // encoding layer, first step: store conv - bias in membrane SRAM 2
    IF_ENC_STEP = 2'd2   // encoding layer, later steps: V += membrane SRAM 2
  } if_mode_e;

  // Where the post-processed output spikes are written
  typedef enum logic [1:0] {
    DST_TEMP   = 2'd0,
    DST_SPIKE0 = 2'd1,
    DST_SPIKE1 = 2'd2
  } dst_e;

  // Targets of the host load / read port
  typedef enum logic [2:0] {
    TGT_SPK0 = 3'd0,  // spike SRAM bank 0
    TGT_SPK1 = 3'd1,  // spike SRAM bank 1
    TGT_WGT0 = 3'd2,  // weight SRAM bank 0
    TGT_WGT1 = 3'd3,  // weight SRAM bank 1
    TGT_BIAS = 3'd4,  // bias SRAM
    TGT_THR  = 3'd5,  // threshold SRAM
    TGT_TEMP = 3'd6   // temp SRAM
  } tgt_e;

  // One layer pass, written by the host before start
  typedef struct packed {
    logic [OC_W-1:0]    n_oc;        // output channels, 1..256
    logic [GRP_W-1:0]   n_grp;       // 32-channel input groups, 1..8
    logic [COL_W-1:0]   n_col;       // input columns incl. padding, 3..34
    logic               encoding;    // bitplane (multi-bit input) mode in the accumulator
    if_mode_e           if_mode;
    logic               first_step;  // residue potential taken as zero
    logic               mem_sel;     // residue in membrane SRAM 2 (second fused layer)
    logic               use_bnd;     // add the boundary partial sums of the previous tile
    logic               src_temp;    // input spikes from temp SRAM (fused layer) instead of spike SRAM
    logic               spk_bank;    // spike ping-pong bank read this pass
    logic               wgt_bank;    // weight ping-pong bank read this pass
    logic               pool;        // 2x2 max pooling
    logic               out_half;    // pooled rows go to lanes 4..7 instead of 0..3
    dst_e               dst;
    logic [SPK_AW-1:0]  in_base;     // first input word
    logic [WGT_AW-1:0]  w_base;      // first weight word
    logic [BND_AW-1:0]  bnd_base;
    logic [MEM_AW-1:0]  mem_base;
    logic [SPK_AW-1:0]  out_base;
    logic [SPK_AW-1:0]  out_stride;  // words between 32-channel output groups
  } cfg_t;

  // Control that travels with one column through the convolution pipeline
  typedef struct packed {
    logic               valid;
    logic               first_grp;
    logic               last_grp;
    logic               use_bnd;
    logic [LBUF_AW-1:0] lbuf_addr;
    logic [BND_AW-1:0]  bnd_addr;
    logic [MEM_AW-1:0]  mem_addr;
    logic [OC_W-2:0]    oc;          // 0..255
    logic [COL_W-1:0]   col;         // output column
  } tag_t;

  // Clip a wide signed value to ACC_W bits
  function automatic acc_t sat_acc(input tree_t v);
    tree_t hi, lo;
    hi = tree_t'((1 <<< (ACC_W-1)) - 1);
    lo = -tree_t'(1 <<< (ACC_W-1));
    if (v > hi)      return acc_t'(hi);
    else if (v < lo) return acc_t'(lo);
    else             return acc_t'(v);
  endfunction

endpackage
