// tb_vsa_pe_array: random spike vectors and weight columns; each of the ten
// registered diagonal sums is compared with a direct evaluation of
// ps[k] = sum_j s[k-2+j]*w[j] one clock after the inputs.
module tb_vsa_pe_array;
  import vsa_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [PE_ROWS-1:0] s;
  logic [KH-1:0] w;
  logic signed [PS_W-1:0] ps [N_PS];
  int checks = 0, failures = 0;

  vsa_pe_array dut (.clk, .rst_n, .s, .w, .ps);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_ps(logic [PE_ROWS-1:0] sv, logic [KH-1:0] wv, int k);
    int acc = 0;
    for (int j = 0; j < KH; j++) begin
      int i = k - (KH-1) + j;
      if (i >= 0 && i < PE_ROWS && sv[i]) acc += wv[j] ? -1 : 1;
    end
    return acc;
  endfunction

  initial begin
    s = '0; w = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      logic [PE_ROWS-1:0] sv;
      logic [KH-1:0] wv;
      sv = PE_ROWS'($urandom);
      wv = KH'($urandom);
      if (it == 0) begin sv = '1; wv = '1; end        // all -1: extremes
      if (it == 1) begin sv = '1; wv = '0; end        // all +1
      @(negedge clk);
      s = sv; w = wv;
      @(posedge clk);
      #1;
      for (int k = 0; k < N_PS; k++) begin
        checks++;
        if (int'(ps[k]) != ref_ps(sv, wv, k)) begin
          failures++;
          if (failures < 10) $display("FAIL it=%0d k=%0d got=%0d exp=%0d", it, k, ps[k], ref_ps(sv, wv, k));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
