// tb_vsa_workloads: layer sizes from the two evaluated networks, at full size.
//   W1  the last CIFAR-10 block: a fused pair of 256-channel 3x3 layers on
//       an 8x8 map (8 channel groups, 10 input columns with padding), 8 time
//       steps. Layer 1 writes its spikes to the temp SRAM in layer 2's input
//       layout; layer 2 reads them from there (membrane SRAM 2, weight bank 1)
//       and writes its spikes over the input it no longer needs in spike bank 0.
//   W2  the MNIST encoding layer: 64 output channels from one 8-bit input
//       channel (8 bitplane blocks), one 8-row tile of a 28-column image with
//       padding (30 columns), 8 time steps.
// Same reference model and checks as tb_vsa_top.
// The testbench keeps a pass-level reference model of every SRAM and of
// the arithmetic (3x3 binary-weight convolution over 8-row tiles, channel
// groups, tile boundaries, bitplane encoding, folded-BN IF neurons, 2x2
// spike max pooling) written without reference to the pipeline, runs the
// same passes on the design through its host port, and after every pass
// compares the whole temp SRAM and both spike SRAM banks with the model.
// Each mechanism is counted and must occur at least once.
module tb_vsa_workloads;
  import vsa_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  cfg_t cfg;
  logic ext_we, ext_re;
  tgt_e ext_tgt, ext_rtgt;
  logic [WGT_AW-1:0] ext_addr;
  logic [WGT_W-1:0] ext_wdata;
  logic [SPK_AW-1:0] ext_raddr;
  logic [SPK_W-1:0] ext_rdata;
  int checks = 0, failures = 0;
  longint cyc = 0;

  vsa_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_grp_acc = 0, n_bnd_add = 0, n_enc = 0, n_pool = 0, n_fire = 0, n_reset = 0;
  int n_fused = 0, n_wb_spike = 0, n_pingpong = 0, n_enc_replay = 0, n_mem2 = 0, n_sat = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_acc.tag2_q.valid && !dut.u_acc.tag2_q.first_grp) n_grp_acc++;
    if (dut.u_acc.bnd_re) n_bnd_add++;
    if (dut.cq.encoding && dut.u_acc.tag2_q.valid) n_enc++;
    if (dut.u_post.out_valid && dut.cq.pool) n_pool++;
    if (dut.u_if.out_valid) n_fire += $countones(dut.u_if.out_spk);
    if (dut.u_if.v_q && dut.u_if.spk != 8'hff && dut.cq.if_mode != IF_ENC_LOAD) n_reset++;
    if (dut.busy && dut.cq.src_temp && dut.rd_en) n_fused++;
    if (dut.u_post.out_valid && dut.cq.dst != DST_TEMP) n_wb_spike++;
    if (dut.busy && ext_we && (ext_tgt == TGT_SPK0 || ext_tgt == TGT_SPK1)) n_pingpong++;
    if (dut.u_if.v_q && dut.cq.if_mode == IF_ENC_STEP) n_enc_replay++;
    if (dut.u_if.m2_we) n_mem2++;
    if (dut.u_if.v_q) for (int r = 0; r < PE_ROWS; r++)
      if (dut.u_if.vsum[r] == 127 || dut.u_if.vsum[r] == -128) n_sat++;
  end

  // ---------------- reference model state ----------------
  logic [SPK_W-1:0] m_spk [2][SPK_DEPTH];
  logic [SPK_W-1:0] m_tmp [TMP_DEPTH];
  logic [WGT_W-1:0] m_wgt [2][WGT_DEPTH];
  int m_bias [BIAS_DEPTH], m_thr [BIAS_DEPTH];
  int m_bnd [BND_DEPTH][N_BND];
  int m_m1 [MEM_DEPTH][PE_ROWS], m_m2 [MEM_DEPTH][PE_ROWS];

  function automatic int clip(int v);
    return v > 127 ? 127 : (v < -128 ? -128 : v);
  endfunction

  // ---------------- host port ----------------
  task automatic host_write(tgt_e t, int addr, logic [WGT_W-1:0] data);
    @(negedge clk);
    ext_we = 1; ext_tgt = t; ext_addr = WGT_AW'(addr); ext_wdata = data;
    @(negedge clk);
    ext_we = 0;
    case (t)
      TGT_SPK0: m_spk[0][addr] = data[SPK_W-1:0];
      TGT_SPK1: m_spk[1][addr] = data[SPK_W-1:0];
      TGT_WGT0: m_wgt[0][addr] = data;
      TGT_WGT1: m_wgt[1][addr] = data;
      TGT_BIAS: m_bias[addr] = int'($signed(data[ACC_W-1:0]));
      TGT_THR:  m_thr[addr]  = int'($signed(data[ACC_W-1:0]));
      TGT_TEMP: m_tmp[addr]  = data[SPK_W-1:0];
      default: ;
    endcase
  endtask

  task automatic host_read(tgt_e t, int addr, output logic [SPK_W-1:0] data);
    @(negedge clk);
    ext_re = 1; ext_rtgt = t; ext_raddr = SPK_AW'(addr);
    @(negedge clk);
    ext_re = 0;
    data = ext_rdata;
  endtask

  // compare every word of the temp SRAM and both spike banks
  task automatic compare_all(string tag);
    logic [SPK_W-1:0] d;
    int bad;
    bad = 0;
    for (int a = 0; a < TMP_DEPTH; a++) begin
      host_read(TGT_TEMP, a, d);
      checks++;
      if (d !== m_tmp[a]) begin failures++; bad++; if (bad < 4) $display("FAIL %s temp[%0d]", tag, a); end
    end
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < SPK_DEPTH; a++) begin
        host_read(b ? TGT_SPK1 : TGT_SPK0, a, d);
        checks++;
        if (d !== m_spk[b][a]) begin failures++; bad++; if (bad < 4) $display("FAIL %s spike%0d[%0d]", tag, b, a); end
      end
  endtask

  // ---------------- reference pass ----------------
  task automatic ref_pass(cfg_t c);
    int ncol, nocol;
    logic [3:0] held;
    ncol = int'(c.n_col);
    nocol = ncol - 2;
    for (int oc = 0; oc < int'(c.n_oc); oc++) begin
      for (int X = 0; X < nocol; X++) begin
        int run [N_PS];
        int lin, ma, ba;
        spike_vec_t spk;
        lin = oc * nocol + X;
        ma = (int'(c.mem_base) + lin) % MEM_DEPTH;
        ba = (int'(c.bnd_base) + lin) % BND_DEPTH;
        for (int g = 0; g < int'(c.n_grp); g++) begin
          int tot [N_PS];
          logic [WGT_W-1:0] wword;
          wword = m_wgt[c.wgt_bank][(int'(c.w_base) + oc*int'(c.n_grp) + g) % WGT_DEPTH];
          for (int k = 0; k < N_PS; k++) tot[k] = 0;
          for (int kx = 0; kx < KW; kx++) begin
            logic [SPK_W-1:0] iword;
            int ia;
            ia = (int'(c.in_base) + g*ncol + X + kx) % SPK_DEPTH;
            iword = c.src_temp ? m_tmp[ia] : m_spk[c.spk_bank][ia];
            for (int b = 0; b < N_BLK; b++)
              for (int ky = 0; ky < KH; ky++) begin
                int wv;
                wv = wword[b*9 + kx*3 + ky] ? -1 : 1;
                if (c.encoding) wv = wv * (1 << (b % 8));
                for (int row = 0; row < PE_ROWS; row++)
                  if (iword[b*PE_ROWS + row]) tot[row + 2 - ky] += wv;
              end
          end
          for (int k = 0; k < N_PS; k++) begin
            int add;
            if (c.encoding) tot[k] = tot[k] >>> 7;
            if (g != 0) add = run[k];
            else if (c.use_bnd && k < N_BND) add = m_bnd[ba][k];
            else add = 0;
            run[k] = clip(tot[k] + add);
          end
        end
        for (int k = 0; k < N_BND; k++) m_bnd[ba][k] = run[PE_ROWS + k];
        // IF neurons
        for (int r = 0; r < PE_ROWS; r++) begin
          int aop, res, v;
          aop = (c.if_mode == IF_ENC_STEP) ? m_m2[ma][r] : clip(run[r] - m_bias[oc]);
          if (c.if_mode == IF_ENC_LOAD || (c.if_mode == IF_SPIKE && c.first_step)) res = 0;
          else if (c.if_mode == IF_SPIKE && c.mem_sel) res = m_m2[ma][r];
          else res = m_m1[ma][r];
          v = clip(aop + res);
          spk[r] = v >= m_thr[oc];
          if (c.if_mode == IF_ENC_LOAD) m_m2[ma][r] = aop;
          if (c.if_mode == IF_SPIKE && c.mem_sel) m_m2[ma][r] = spk[r] ? 0 : v;
          else m_m1[ma][r] = spk[r] ? 0 : v;
        end
        // post processing and write-back
        begin
          logic [3:0] p;
          spike_vec_t bits, mask;
          int col, oa;
          bit wr;
          for (int i = 0; i < 4; i++) p[i] = spk[2*i] | spk[2*i+1];
          wr = 1; col = X; bits = spk; mask = '1;
          if (c.pool) begin
            if (X % 2 == 0) begin held = p; wr = 0; end
            else begin
              col = X / 2;
              bits = c.out_half ? {held | p, 4'b0} : {4'b0, held | p};
              mask = c.out_half ? 8'hf0 : 8'h0f;
            end
          end
          if (wr) begin
            oa = (int'(c.out_base) + (oc / 32) * int'(c.out_stride) + col) % SPK_DEPTH;
            for (int r = 0; r < PE_ROWS; r++)
              if (mask[r]) begin
                case (c.dst)
                  DST_TEMP:   m_tmp[oa][(oc%32)*8 + r] = bits[r];
                  DST_SPIKE0: m_spk[0][oa][(oc%32)*8 + r] = bits[r];
                  default:    m_spk[1][oa][(oc%32)*8 + r] = bits[r];
                endcase
              end
          end
        end
      end
    end
  endtask

  // run one pass on the design; optional ping-pong load happens while busy
  typedef struct { tgt_e t; int addr; logic [WGT_W-1:0] data; } wr_t;
  wr_t pend [$];

  task automatic dut_pass(cfg_t c, string tag);
    longint t0, t1;
    int expect_cycles;
    @(negedge clk);
    cfg = c; start = 1;
    @(negedge clk);
    start = 0;
    t0 = cyc;
    while (pend.size() > 0) begin
      wr_t w;
      w = pend.pop_front();
      host_write(w.t, w.addr, w.data);
    end
    while (!done) @(negedge clk);
    t1 = cyc;
    // one column per clock: n_oc * n_grp * n_col reads, plus the drain
    expect_cycles = int'(c.n_oc) * int'(c.n_grp) * int'(c.n_col) + 11;
    checks++;
    if (int'(t1 - t0) + 1 != expect_cycles) begin
      failures++;
      $display("FAIL %s: pass took %0d cycles, expected %0d", tag, t1 - t0 + 1, expect_cycles);
    end
    ref_pass(c);
    compare_all(tag);
  endtask

  // random spike word with given density (percent)
  function automatic logic [SPK_W-1:0] rand_spikes(int nch, int pct);
    logic [SPK_W-1:0] w;
    w = '0;
    for (int i = 0; i < nch*PE_ROWS; i++) w[i] = ($urandom_range(0, 99) < pct);
    return w;
  endfunction

  function automatic logic [WGT_W-1:0] rand_weights();
    logic [WGT_W-1:0] w;
    for (int i = 0; i < WGT_W; i += 32) w[i +: 32] = $urandom;
    return w;
  endfunction

  initial begin
    cfg_t c;
    start = 0; cfg = '0; ext_we = 0; ext_re = 0; ext_tgt = TGT_SPK0; ext_rtgt = TGT_SPK0;
    ext_addr = '0; ext_wdata = '0; ext_raddr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < SPK_DEPTH; a++) begin
      host_write(TGT_SPK0, a, '0);
      host_write(TGT_SPK1, a, '0);
      host_write(TGT_TEMP, a, '0);
    end

    // ================= W1: fused 256Conv-256Conv, 8x8, T=8 =================
    begin
      int ncol, noc, ngrp, T;
      ncol = 10; noc = 256; ngrp = 8; T = 8;
      for (int oc = 0; oc < noc; oc++) begin
        host_write(TGT_BIAS, oc, WGT_W'($urandom_range(0, 6) - 3));
        host_write(TGT_THR, oc, WGT_W'($urandom_range(8, 30)));
        for (int g = 0; g < ngrp; g++) begin
          host_write(TGT_WGT0, oc*ngrp + g, rand_weights());
          host_write(TGT_WGT1, oc*ngrp + g, rand_weights());
        end
      end
      for (int t = 0; t < T; t++) begin
        // input spikes of step t in the layout in_base + g*ncol + x, padding columns zero
        for (int g = 0; g < ngrp; g++)
          for (int x = 0; x < ncol; x++)
            host_write(TGT_SPK0, g*ncol + x, (x == 0 || x == ncol-1) ? '0 : WGT_W'(rand_spikes(32, 30)));
        // layer 1: spike bank 0 -> temp (layer 2 layout: out_base 1, stride ncol)
        c = '0;
        c.n_oc = OC_W'(noc); c.n_grp = GRP_W'(ngrp); c.n_col = COL_W'(ncol);
        c.if_mode = IF_SPIKE; c.first_step = (t == 0); c.spk_bank = 0; c.wgt_bank = 0;
        c.dst = DST_TEMP; c.out_base = 1; c.out_stride = SPK_AW'(ncol); c.mem_base = 0;
        dut_pass(c, $sformatf("W1 layer1 t%0d", t));
        // layer 2: temp -> back into spike bank 0 (just processed), potentials in membrane SRAM 2
        c = '0;
        c.n_oc = OC_W'(noc); c.n_grp = GRP_W'(ngrp); c.n_col = COL_W'(ncol);
        c.if_mode = IF_SPIKE; c.first_step = (t == 0); c.mem_sel = 1; c.src_temp = 1; c.wgt_bank = 1;
        c.dst = DST_SPIKE0; c.out_base = 1; c.out_stride = SPK_AW'(ncol); c.mem_base = 0;
        dut_pass(c, $sformatf("W1 layer2 t%0d", t));
      end
    end

    // ================= W2: MNIST encoding layer, one tile, T=8 =================
    begin
      int ncol, noc;
      logic [SPK_W-1:0] w;
      ncol = 30; noc = 64;
      for (int oc = 0; oc < noc; oc++) begin
        logic [WGT_W-1:0] wv;
        logic [8:0] ws;
        wv = '0;
        ws = 9'($urandom);
        for (int bp = 0; bp < 8; bp++) wv[bp*9 +: 9] = ws;
        host_write(TGT_WGT0, oc, wv);
        host_write(TGT_BIAS, oc, WGT_W'($urandom_range(0, 10) - 5));
        host_write(TGT_THR, oc, WGT_W'($urandom_range(5, 40)));
      end
      for (int x = 0; x < ncol; x++) begin
        w = '0;
        if (x != 0 && x != ncol-1)
          for (int row = 0; row < PE_ROWS; row++) begin
            logic [7:0] pix;
            pix = 8'($urandom);
            for (int bp = 0; bp < 8; bp++) w[bp*PE_ROWS + row] = pix[bp];
          end
        host_write(TGT_SPK0, x, w);
      end
      for (int t = 0; t < 8; t++) begin
        c = '0;
        c.n_oc = OC_W'(noc); c.n_grp = 1; c.n_col = COL_W'(ncol);
        c.encoding = 1; c.if_mode = (t == 0) ? IF_ENC_LOAD : IF_ENC_STEP;
        c.dst = DST_TEMP; c.out_base = 0; c.out_stride = SPK_AW'(ncol - 2);
        c.mem_base = 0;
        dut_pass(c, $sformatf("W2 t%0d", t));
      end
    end

    $display("group accumulations %0d, encoding columns %0d, spikes fired %0d, fused-layer reads %0d, spike write-backs %0d, encoding replays %0d",
             n_grp_acc, n_enc, n_fire, n_fused, n_wb_spike, n_enc_replay);
    checks++; if (n_grp_acc == 0)    begin failures++; $display("FAIL no group accumulation"); end
    checks++; if (n_enc == 0)        begin failures++; $display("FAIL no encoding"); end
    checks++; if (n_fire == 0)       begin failures++; $display("FAIL no spike"); end
    checks++; if (n_fused == 0)      begin failures++; $display("FAIL no fused layer"); end
    checks++; if (n_wb_spike == 0)   begin failures++; $display("FAIL no spike write-back"); end
    checks++; if (n_enc_replay == 0) begin failures++; $display("FAIL no encoding replay"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
