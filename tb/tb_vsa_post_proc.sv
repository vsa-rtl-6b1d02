// tb_vsa_post_proc: random spike columns with pooling off, on (lanes 0..3)
// and on with out_half (lanes 4..7). Expected outputs are the 2x2 OR of the
// input columns, computed independently here; the one-clock latency is
// checked too.
module tb_vsa_post_proc;
  import vsa_pkg::*;
  logic clk = 0, rst_n = 0;
  logic pool, out_half, in_valid, out_valid;
  spike_vec_t in_spk, out_bits, out_mask;
  tag_t in_tag, out_tag;
  int checks = 0, failures = 0;

  vsa_post_proc dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
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

  initial begin
    spike_vec_t prev;
    pool = 0; out_half = 0; in_valid = 0; in_spk = '0; in_tag = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int mode = 0; mode < 3; mode++) begin
      pool = (mode != 0); out_half = (mode == 2);
      for (int c = 0; c < 40; c++) begin
        spike_vec_t sv;
        sv = spike_vec_t'($urandom);
        @(negedge clk);
        in_valid = 1; in_spk = sv; in_tag = '0; in_tag.valid = 1;
        in_tag.col = COL_W'(c); in_tag.oc = 8'(mode);
        @(posedge clk); #1;
        in_valid = 0;
        if (!pool) begin
          check("bypass valid", out_valid);
          check("bypass bits", out_bits == sv && out_mask == 8'hff && out_tag.col == COL_W'(c));
        end else if (c % 2 == 0) begin
          check("even col no output", !out_valid);
          prev = sv;
        end else begin
          logic [3:0] p;
          for (int i = 0; i < 4; i++) p[i] = prev[2*i] | prev[2*i+1] | sv[2*i] | sv[2*i+1];
          check("pool valid", out_valid);
          check("pool col", out_tag.col == COL_W'(c/2));
          if (out_half) check("pool bits hi", out_bits == {p, 4'b0} && out_mask == 8'hf0);
          else          check("pool bits lo", out_bits == {4'b0, p} && out_mask == 8'h0f);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
