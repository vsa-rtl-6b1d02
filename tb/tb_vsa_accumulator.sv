// tb_vsa_accumulator: streams random PE-block outputs (one column per clock)
// through the accumulator for several passes: one and several 32-channel
// groups, with and without the previous tile's boundary sums, and in
// encoding (bitplane) mode. A reference model in the testbench adds the
// 3 arrays x 32 blocks, applies the bitplane shifts and >>7, adds boundary
// or local-buffer values and clips to 8 bits. It checks the 8 outputs per
// column, the boundary SRAM writes, and the 3-clock latency.
module tb_vsa_accumulator;
  import vsa_pkg::*;
  logic clk = 0, rst_n = 0;
  logic encoding;
  tag_t tag_in, out_tag;
  logic signed [PS_W-1:0] ps_in [N_BLK][KW][N_PS];
  logic bnd_re, bnd_we, out_valid;
  logic [BND_AW-1:0] bnd_raddr, bnd_waddr;
  logic [BND_W-1:0] bnd_rdata, bnd_wdata;
  acc_t out_v [PE_ROWS];
  int checks = 0, failures = 0;
  int n_bnd_add = 0, n_lbuf_add = 0;
  longint cyc = 0;

  vsa_accumulator dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  logic [BND_W-1:0] bnd_mem [64];
  always_ff @(posedge clk) begin
    if (bnd_re) bnd_rdata <= bnd_mem[bnd_raddr[5:0]];
    if (bnd_we) bnd_mem[bnd_waddr[5:0]] <= bnd_wdata;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int v [PE_ROWS]; int b [N_BND]; int addr; longint due; } exp_t;
  exp_t expq [$];
  int ref_bnd [64][N_BND];

  function automatic int clip(int v);
    return v > 127 ? 127 : (v < -128 ? -128 : v);
  endfunction

  // monitor
  always @(posedge clk) begin
    #1;
    if (out_valid) begin
      exp_t e;
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL unexpected output");
      end else begin
        e = expq.pop_front();
        if (cyc != e.due) begin
          failures++;
          $display("FAIL latency: out at %0d expected %0d", cyc, e.due);
        end
        for (int k = 0; k < PE_ROWS; k++) begin
          checks++;
          if (int'(out_v[k]) != e.v[k]) begin
            failures++;
            if (failures < 40) $display("FAIL lane %0d got %0d exp %0d addr %0d cyc %0d", k, out_v[k], e.v[k], e.addr, cyc);
          end
        end
        for (int k = 0; k < N_BND; k++) begin
          checks++;
          if (int'($signed(bnd_mem[e.addr][k*ACC_W +: ACC_W])) != e.b[k]) begin
            failures++;
            if (failures < 10) $display("FAIL boundary %0d lane %0d", e.addr, k);
          end
        end
      end
    end
  end

  task automatic run_pass(input bit enc, input bit use_bnd, input int ngrp, input int ncol);
    int run [32][N_PS];
    encoding = enc;
    for (int g = 0; g < ngrp; g++) begin
      for (int x = 0; x < ncol; x++) begin
        int tot [N_PS];
        @(negedge clk);
        tag_in = '0;
        tag_in.valid = 1; tag_in.first_grp = (g == 0); tag_in.last_grp = (g == ngrp-1);
        tag_in.use_bnd = use_bnd; tag_in.lbuf_addr = LBUF_AW'(x); tag_in.bnd_addr = BND_AW'(x);
        tag_in.col = COL_W'(x);
        for (int k = 0; k < N_PS; k++) tot[k] = 0;
        for (int b = 0; b < N_BLK; b++)
          for (int a = 0; a < KW; a++)
            for (int k = 0; k < N_PS; k++) begin
              int v;
              v = $urandom_range(0, 6) - 3;
              ps_in[b][a][k] = PS_W'(v);
              tot[k] += enc ? v * (1 << (b % 8)) : v;
            end
        for (int k = 0; k < N_PS; k++) begin
          int add;
          if (enc) tot[k] = tot[k] >>> 7;
          if (g != 0) add = run[x][k];
          else if (use_bnd && k < N_BND) add = ref_bnd[x][k];
          else add = 0;
          run[x][k] = clip(tot[k] + add);
        end
        if (g == 0 && use_bnd) n_bnd_add++;
        if (g != 0) n_lbuf_add++;
        if (g == ngrp-1) begin
          exp_t e;
          for (int k = 0; k < PE_ROWS; k++) e.v[k] = run[x][k];
          for (int k = 0; k < N_BND; k++) begin
            e.b[k] = run[x][PE_ROWS+k];
            ref_bnd[x][k] = e.b[k];
          end
          e.addr = x;
          e.due = cyc + 3;
          expq.push_back(e);
        end
      end
    end
    @(negedge clk);
    tag_in = '0;
    repeat (4) @(negedge clk);   // mode inputs are static while the pipeline holds data
  endtask

  initial begin
    encoding = 0; tag_in = '0;
    for (int b = 0; b < N_BLK; b++) for (int a = 0; a < KW; a++) for (int k = 0; k < N_PS; k++) ps_in[b][a][k] = '0;
    for (int a = 0; a < 64; a++) begin
      bnd_mem[a] = BND_W'($urandom);
      for (int k = 0; k < N_BND; k++) ref_bnd[a][k] = int'($signed(bnd_mem[a][k*ACC_W +: ACC_W]));
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_pass(0, 0, 1, 8);    // single group, first tile
    run_pass(0, 1, 1, 8);    // next tile: boundary added
    run_pass(0, 1, 3, 12);   // three groups through the local buffer
    run_pass(0, 0, 4, 32);   // full local buffer, 4 groups
    run_pass(1, 0, 1, 10);   // encoding (bitplanes)
    run_pass(1, 1, 1, 10);   // encoding with boundary
    repeat (8) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d outputs missing", expq.size()); end
    checks++;
    if (n_bnd_add == 0 || n_lbuf_add == 0) failures++;
    $display("boundary adds %0d, local buffer adds %0d", n_bnd_add, n_lbuf_add);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
