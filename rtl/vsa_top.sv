// vsa_top: the vectorwise spiking neural network accelerator.
// A 3x3 convolution layer with binary (+1/-1) weights and binary spikes is
// computed one output column vector (8 rows of one output channel) per
// clock. 32 PE blocks take one input channel each; each block's three PE
// arrays of 8x3 AND-gate PEs see three neighbouring input columns, the
// accumulator adds the 32 blocks (and earlier 32-channel groups and the
// previous tile's boundary rows), and eight IF neurons with folded batch
// normalisation integrate the result into membrane potentials, fire and
// reset. Optional 2x2 max pooling follows, and the output spikes go to the
// temp SRAM (to be read out, or used as the input of the second layer of a
// fused pair) or back into a spike SRAM bank.
//
// Pipeline (clock after the controller issues a column read):
//   +1 spike/weight SRAM data into the PE blocks
//   +2 PE array registers           +3 accumulator stage 1
//   +4 stage 2 (boundary read)      +5 stage 3 result (local buffer/boundary write)
//   +6 IF neuron input registered, membrane/bias/threshold read data
//   +7 spikes registered, membrane written   +8 post processing   +8 output SRAM write
//
// Host interface (stands in for the memory controller and off-chip
// memory, which are not part of this RTL): the host writes words into any
// SRAM (ext_we/ext_tgt/ext_addr/ext_wdata, low bits for narrow SRAMs) and
// reads the spike or temp SRAMs (ext_re, data one clock later). During a
// pass it may only write the spike bank and weight bank the pass does not
// read (ping-pong filling); other accesses wait until busy is low. cfg describes one pass; start launches it, busy is
// high during it and done pulses at its end.
// Block structure, SRAM sizes and datapath widths follow the paper; the
// host port, configuration record and pass granularity are this design's.
module vsa_top
  import vsa_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // pass control
  input  logic               start,
  input  cfg_t               cfg,
  output logic               busy,
  output logic               done,
  // host write port
  input  logic               ext_we,
  input  tgt_e               ext_tgt,
  input  logic [WGT_AW-1:0]  ext_addr,
  input  logic [WGT_W-1:0]   ext_wdata,
  // host read port (spike banks and temp SRAM)
  input  logic               ext_re,
  input  tgt_e               ext_rtgt,
  input  logic [SPK_AW-1:0]  ext_raddr,
  output logic [SPK_W-1:0]   ext_rdata
);
  // ---------------- controller ----------------
  cfg_t               cq;
  logic               rd_en;
  logic [SPK_AW-1:0]  in_addr;
  logic [WGT_AW-1:0]  w_addr;
  tag_t               tag0, tag1, tag2;
  logic               rd_q;

  vsa_sys_ctrl u_ctrl (
    .clk, .rst_n, .start, .cfg, .cfg_q(cq), .busy, .done,
    .rd_en, .in_addr, .w_addr, .tag(tag0)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tag1 <= '0;
      tag2 <= '0;
      rd_q <= 1'b0;
    end else begin
      tag1 <= tag0;
      tag2 <= tag1;
      rd_q <= rd_en;
    end
  end

  // ---------------- output write-back (from post processing) ----------------
  logic               pp_valid;
  spike_vec_t         pp_bits, pp_mask;
  tag_t               pp_tag;
  logic               ow_en;
  logic [SPK_AW-1:0]  ow_addr;
  logic [SPK_W-1:0]   ow_data, ow_mask;

  always_comb begin
    logic [4:0] lane;
    lane    = pp_tag.oc[4:0];
    ow_en   = pp_valid;
    ow_addr = cq.out_base + SPK_AW'(pp_tag.oc[OC_W-2:5] * cq.out_stride) + SPK_AW'(pp_tag.col);
    ow_data = '0;
    ow_mask = '0;
    ow_data[lane*PE_ROWS +: PE_ROWS] = pp_bits;
    ow_mask[lane*PE_ROWS +: PE_ROWS] = pp_mask;
  end

  // ---------------- spike SRAM (ping-pong) ----------------
  logic               host_idle;
  logic               spk_re, spk_rbank;
  logic [SPK_AW-1:0]  spk_raddr;
  logic [SPK_W-1:0]   spk_rdata;

  assign host_idle = !busy;

  always_comb begin
    if (busy) begin
      spk_re    = rd_en && !cq.src_temp;
      spk_rbank = cq.spk_bank;
      spk_raddr = in_addr;
    end else begin
      spk_re    = ext_re && (ext_rtgt == TGT_SPK0 || ext_rtgt == TGT_SPK1);
      spk_rbank = (ext_rtgt == TGT_SPK1);
      spk_raddr = ext_raddr;
    end
  end

  vsa_pingpong_sram #(.DEPTH(SPK_DEPTH), .WIDTH(SPK_W)) u_spike (
    .clk,
    .re(spk_re), .rbank(spk_rbank), .raddr(spk_raddr), .rdata(spk_rdata),
    .wa_en(ext_we && (ext_tgt == TGT_SPK0 || ext_tgt == TGT_SPK1)),
    .wa_bank(ext_tgt == TGT_SPK1), .wa_addr(SPK_AW'(ext_addr)), .wa_data(ext_wdata[SPK_W-1:0]),
    .wb_en(ow_en && cq.dst != DST_TEMP), .wb_bank(cq.dst == DST_SPIKE1),
    .wb_addr(ow_addr), .wb_data(ow_data), .wb_mask(ow_mask)
  );

  // ---------------- weight SRAM (ping-pong, one layer per bank) ----------------
  logic [WGT_W-1:0] wgt_rdata;

  vsa_pingpong_sram #(.DEPTH(WGT_DEPTH), .WIDTH(WGT_W)) u_weight (
    .clk,
    .re(rd_en), .rbank(cq.wgt_bank), .raddr(w_addr), .rdata(wgt_rdata),
    .wa_en(ext_we && (ext_tgt == TGT_WGT0 || ext_tgt == TGT_WGT1)),
    .wa_bank(ext_tgt == TGT_WGT1), .wa_addr(WGT_AW'(ext_addr)), .wa_data(ext_wdata),
    .wb_en(1'b0), .wb_bank(1'b0), .wb_addr('0), .wb_data('0), .wb_mask('0)
  );

  // ---------------- temp SRAM ----------------
  logic               tmp_re;
  logic [SPK_AW-1:0]  tmp_raddr;
  logic [SPK_W-1:0]   tmp_rdata;
  logic               tmp_we;
  logic [SPK_AW-1:0]  tmp_waddr;
  logic [SPK_W-1:0]   tmp_wdata, tmp_wmask;

  always_comb begin
    if (busy) begin
      tmp_re    = rd_en && cq.src_temp;
      tmp_raddr = in_addr;
      tmp_we    = ow_en && cq.dst == DST_TEMP;
      tmp_waddr = ow_addr;
      tmp_wdata = ow_data;
      tmp_wmask = ow_mask;
    end else begin
      tmp_re    = ext_re && ext_rtgt == TGT_TEMP;
      tmp_raddr = ext_raddr;
      tmp_we    = ext_we && ext_tgt == TGT_TEMP;
      tmp_waddr = SPK_AW'(ext_addr);
      tmp_wdata = ext_wdata[SPK_W-1:0];
      tmp_wmask = '1;
    end
  end

  vsa_sram #(.DEPTH(TMP_DEPTH), .WIDTH(SPK_W)) u_temp (
    .clk, .re(tmp_re), .raddr(tmp_raddr), .rdata(tmp_rdata),
    .we(tmp_we), .waddr(tmp_waddr), .wdata(tmp_wdata), .wmask(tmp_wmask)
  );

  logic src_temp_q;
  always_ff @(posedge clk) if (spk_re || tmp_re) src_temp_q <= tmp_re;
  assign ext_rdata = src_temp_q ? tmp_rdata : spk_rdata;

  // ---------------- convolution: 32 PE blocks ----------------
  logic [SPK_W-1:0] in_word;
  assign in_word = cq.src_temp ? tmp_rdata : spk_rdata;

  logic signed [PS_W-1:0] ps [N_BLK][KW][N_PS];

  for (genvar b = 0; b < N_BLK; b++) begin : g_blk
    vsa_pe_block u_blk (
      .clk, .rst_n,
      .shift(rd_q),
      .col(in_word[b*PE_ROWS +: PE_ROWS]),
      .wset(wgt_rdata[b*KH*KW +: KH*KW]),
      .ps(ps[b])
    );
  end

  // ---------------- accumulator + boundary SRAM ----------------
  logic               bnd_re, bnd_we;
  logic [BND_AW-1:0]  bnd_raddr, bnd_waddr;
  logic [BND_W-1:0]   bnd_rdata, bnd_wdata;
  logic               acc_valid;
  acc_t               acc_v [PE_ROWS];
  tag_t               acc_tag;

  vsa_accumulator u_acc (
    .clk, .rst_n, .encoding(cq.encoding), .tag_in(tag2), .ps_in(ps),
    .bnd_re, .bnd_raddr, .bnd_rdata, .bnd_we, .bnd_waddr, .bnd_wdata,
    .out_valid(acc_valid), .out_v(acc_v), .out_tag(acc_tag)
  );

  vsa_sram #(.DEPTH(BND_DEPTH), .WIDTH(BND_W)) u_boundary (
    .clk, .re(bnd_re), .raddr(bnd_raddr), .rdata(bnd_rdata),
    .we(bnd_we), .waddr(bnd_waddr), .wdata(bnd_wdata), .wmask('1)
  );

  // ---------------- IF neuron + its SRAMs ----------------
  logic [BIAS_AW-1:0] bias_raddr, thr_raddr;
  logic [ACC_W-1:0]   bias_rdata, thr_rdata;
  logic [MEM_AW-1:0]  m1_raddr, m1_waddr, m2_raddr, m2_waddr;
  logic [MEM_W-1:0]   m1_rdata, m1_wdata, m2_rdata, m2_wdata;
  logic               m1_we, m2_we;
  logic               if_valid;
  spike_vec_t         if_spk;
  tag_t               if_tag;

  vsa_if_neuron u_if (
    .clk, .rst_n, .mode(cq.if_mode), .first_step(cq.first_step), .mem_sel(cq.mem_sel),
    .in_valid(acc_valid), .in_v(acc_v), .in_tag(acc_tag),
    .bias_raddr, .bias_rdata(acc_t'(bias_rdata)), .thr_raddr, .thr_rdata(acc_t'(thr_rdata)),
    .m1_raddr, .m1_rdata, .m1_we, .m1_waddr, .m1_wdata,
    .m2_raddr, .m2_rdata, .m2_we, .m2_waddr, .m2_wdata,
    .out_valid(if_valid), .out_spk(if_spk), .out_tag(if_tag)
  );

  vsa_sram #(.DEPTH(BIAS_DEPTH), .WIDTH(ACC_W)) u_bias (
    .clk, .re(acc_valid), .raddr(bias_raddr), .rdata(bias_rdata),
    .we(host_idle && ext_we && ext_tgt == TGT_BIAS), .waddr(BIAS_AW'(ext_addr)),
    .wdata(ext_wdata[ACC_W-1:0]), .wmask('1)
  );

  vsa_sram #(.DEPTH(BIAS_DEPTH), .WIDTH(ACC_W)) u_threshold (
    .clk, .re(acc_valid), .raddr(thr_raddr), .rdata(thr_rdata),
    .we(host_idle && ext_we && ext_tgt == TGT_THR), .waddr(BIAS_AW'(ext_addr)),
    .wdata(ext_wdata[ACC_W-1:0]), .wmask('1)
  );

  vsa_sram #(.DEPTH(MEM_DEPTH), .WIDTH(MEM_W)) u_membrane1 (
    .clk, .re(acc_valid), .raddr(m1_raddr), .rdata(m1_rdata),
    .we(m1_we), .waddr(m1_waddr), .wdata(m1_wdata), .wmask('1)
  );

  vsa_sram #(.DEPTH(MEM_DEPTH), .WIDTH(MEM_W)) u_membrane2 (
    .clk, .re(acc_valid), .raddr(m2_raddr), .rdata(m2_rdata),
    .we(m2_we), .waddr(m2_waddr), .wdata(m2_wdata), .wmask('1)
  );

  // ---------------- post processing ----------------
  vsa_post_proc u_post (
    .clk, .rst_n, .pool(cq.pool), .out_half(cq.out_half),
    .in_valid(if_valid), .in_spk(if_spk), .in_tag(if_tag),
    .out_valid(pp_valid), .out_bits(pp_bits), .out_mask(pp_mask), .out_tag(pp_tag)
  );

  // during a pass the host may only fill the spike / weight bank that the
  // pass does not read (ping-pong); everything else waits for idle
  a_host_pingpong: assert property (@(posedge clk) disable iff (!rst_n)
      (busy && ext_we) |-> ((ext_tgt == TGT_SPK0 && (cq.src_temp || cq.spk_bank)) ||
                            (ext_tgt == TGT_SPK1 && (cq.src_temp || !cq.spk_bank)) ||
                            (ext_tgt == TGT_WGT0 && cq.wgt_bank) ||
                            (ext_tgt == TGT_WGT1 && !cq.wgt_bank)))
    else $error("vsa_top: host write to a buffer in use");
endmodule
