// vsa_accumulator: sums the PE outputs of all 32 PE blocks into one output
// column of one output channel, in a three-stage pipeline.
//   Stage 1: per block, add the three PE arrays' ten partial sums; in
//            encoding mode shift block b left by b mod 8 (block b carries
//            bitplane b mod 8 of a multi-bit input); reduce the 32 blocks
//            to TREE_SPLIT partial sums (first partial tree adder).
//   Stage 2: add the TREE_SPLIT partial sums (second partial tree adder);
//            in encoding mode shift the result right by 7.
//   Stage 3: add either the local buffer entry of this column (partial
//            result of the earlier 32-channel groups) or, on the first
//            group, the two bottom-boundary sums the previous tile left in
//            the boundary SRAM (lanes 0 and 1). The result is clipped to
//            8 bits. Not the last group: the ten sums go back to the local
//            buffer. Last group: lanes 0..7 go to the IF neuron and lanes
//            8..9 (this tile's bottom boundary) to the boundary SRAM.
// Interface: ps_in/tag_in in the same cycle; boundary SRAM through a
// synchronous read port (address in stage 2, data in stage 3) and a write
// port; out_v/out_tag three clocks after ps_in.
// From the paper: the stage split, the shifts (<<b mod 8, >>7), the local
// buffer (32 x 10 x 8 bit = 0.3125 KB) and boundary SRAM use, 8-bit outputs.
// Own choices: TREE_SPLIT = 4 sums between the stages, saturation to 8 bits,
// arithmetic (floor) >>7, and the boundary sums being added on the first
// group (addition order does not change the result before clipping).
module vsa_accumulator
  import vsa_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      encoding,
  input  tag_t                      tag_in,
  input  logic signed [PS_W-1:0]    ps_in [N_BLK][KW][N_PS],
  // boundary SRAM
  output logic                      bnd_re,
  output logic [BND_AW-1:0]         bnd_raddr,
  input  logic [BND_W-1:0]          bnd_rdata,
  output logic                      bnd_we,
  output logic [BND_AW-1:0]         bnd_waddr,
  output logic [BND_W-1:0]          bnd_wdata,
  // to the IF neuron
  output logic                      out_valid,
  output acc_t                      out_v [PE_ROWS],
  output tag_t                      out_tag
);
  localparam int PER_SPLIT = N_BLK / TREE_SPLIT;

  // ---------------- stage 1 ----------------
  tree_t blk_sum [N_BLK][N_PS];
  tree_t p1_d    [TREE_SPLIT][N_PS];
  tree_t p1_q    [TREE_SPLIT][N_PS];
  tag_t  tag1_q;

  always_comb begin
    for (int b = 0; b < N_BLK; b++) begin
      for (int k = 0; k < N_PS; k++) begin
        blk_sum[b][k] = tree_t'(ps_in[b][0][k]) + tree_t'(ps_in[b][1][k]) + tree_t'(ps_in[b][2][k]);
        if (encoding) blk_sum[b][k] = blk_sum[b][k] <<< (b % BITPLANES);
      end
    end
    for (int s = 0; s < TREE_SPLIT; s++) begin
      for (int k = 0; k < N_PS; k++) begin
        p1_d[s][k] = '0;
        for (int b = s*PER_SPLIT; b < (s+1)*PER_SPLIT; b++) p1_d[s][k] = p1_d[s][k] + blk_sum[b][k];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tag1_q <= '0;
      for (int s = 0; s < TREE_SPLIT; s++) for (int k = 0; k < N_PS; k++) p1_q[s][k] <= '0;
    end else begin
      tag1_q <= tag_in;
      p1_q   <= p1_d;
    end
  end

  // ---------------- stage 2 ----------------
  tree_t p2_d [N_PS];
  tree_t p2_q [N_PS];
  tag_t  tag2_q;

  always_comb begin
    for (int k = 0; k < N_PS; k++) begin
      p2_d[k] = '0;
      for (int s = 0; s < TREE_SPLIT; s++) p2_d[k] = p2_d[k] + p1_q[s][k];
      if (encoding) p2_d[k] = p2_d[k] >>> ENC_SHIFT;
    end
    bnd_re    = tag1_q.valid && tag1_q.first_grp && tag1_q.use_bnd;
    bnd_raddr = tag1_q.bnd_addr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tag2_q <= '0;
      for (int k = 0; k < N_PS; k++) p2_q[k] <= '0;
    end else begin
      tag2_q <= tag1_q;
      p2_q   <= p2_d;
    end
  end

  // ---------------- stage 3 ----------------
  acc_t lbuf [LBUF_DEPTH][N_PS];   // local buffer
  acc_t addend [N_PS];
  acc_t s3 [N_PS];

  always_comb begin
    for (int k = 0; k < N_PS; k++) begin
      if (!tag2_q.first_grp)
        addend[k] = lbuf[tag2_q.lbuf_addr][k];
      else if (tag2_q.use_bnd && k < N_BND)
        addend[k] = acc_t'(bnd_rdata[k*ACC_W +: ACC_W]);
      else
        addend[k] = '0;
      s3[k] = sat_acc(p2_q[k] + tree_t'(addend[k]));
    end
    bnd_we    = tag2_q.valid && tag2_q.last_grp;
    bnd_waddr = tag2_q.bnd_addr;
    for (int k = 0; k < N_BND; k++) bnd_wdata[k*ACC_W +: ACC_W] = s3[PE_ROWS+k];
  end

  always_ff @(posedge clk) begin
    if (tag2_q.valid && !tag2_q.last_grp)
      for (int k = 0; k < N_PS; k++) lbuf[tag2_q.lbuf_addr][k] <= s3[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
      for (int k = 0; k < PE_ROWS; k++) out_v[k] <= '0;
    end else begin
      out_valid <= tag2_q.valid && tag2_q.last_grp;
      out_tag   <= tag2_q;
      for (int k = 0; k < PE_ROWS; k++) out_v[k] <= s3[k];
    end
  end
endmodule
