// tb_vsa_sys_ctrl: runs the controller for two configurations and compares
// every issued read (spike and weight addresses) and every tag field with
// the loop nest oc / group / column evaluated here. Also checks that reads
// are back to back (one per clock), the read count, and that done comes
// DRAIN+1 clocks after the last read.
module tb_vsa_sys_ctrl;
  import vsa_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, rd_en;
  cfg_t cfg, cfg_q;
  logic [SPK_AW-1:0] in_addr;
  logic [WGT_AW-1:0] w_addr;
  tag_t tag;
  int checks = 0, failures = 0;

  vsa_sys_ctrl #(.DRAIN(10)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic run(input int noc, input int ngrp, input int ncol, input int ib, input int wb, input int bb, input int mb);
    int waited;
    @(negedge clk);
    cfg = '0;
    cfg.n_oc = OC_W'(noc); cfg.n_grp = GRP_W'(ngrp); cfg.n_col = COL_W'(ncol);
    cfg.in_base = SPK_AW'(ib); cfg.w_base = WGT_AW'(wb); cfg.bnd_base = BND_AW'(bb); cfg.mem_base = MEM_AW'(mb);
    cfg.use_bnd = 1;
    start = 1;
    @(negedge clk);
    start = 0;
    cfg = '0;            // the controller must use its sampled copy
    for (int oc = 0; oc < noc; oc++)
      for (int g = 0; g < ngrp; g++)
        for (int x = 0; x < ncol; x++) begin
          int lin;
          lin = oc * (ncol - 2) + (x - 2);
          check("busy/rd_en", busy && rd_en);
          check("in_addr", in_addr == SPK_AW'(ib + g*ncol + x));
          check("w_addr", w_addr == WGT_AW'(wb + oc*ngrp + g));
          check("valid", tag.valid == (x >= 2));
          if (x >= 2) begin
            check("first/last", tag.first_grp == (g == 0) && tag.last_grp == (g == ngrp-1));
            check("col", tag.col == COL_W'(x-2) && tag.lbuf_addr == LBUF_AW'(x-2));
            check("bnd/mem addr", tag.bnd_addr == BND_AW'(bb + lin) && tag.mem_addr == MEM_AW'(mb + lin));
            check("oc", tag.oc == 8'(oc) && tag.use_bnd);
          end
          @(negedge clk);
        end
    check("reads end", !rd_en);
    waited = 1;
    while (!done && waited < 100) begin
      @(negedge clk);
      waited++;
    end
    check("done after DRAIN", done && waited == 11);
    @(negedge clk);
    check("idle", !busy);
  endtask

  initial begin
    start = 0; cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(3, 2, 5, 0, 0, 0, 0);
    run(4, 3, 9, 7, 100, 200, 300);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
