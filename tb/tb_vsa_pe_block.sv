// tb_vsa_pe_block: streams random input columns (one per clock) with a
// fixed random 3x3 filter. Once three columns are in, the sum of the three
// arrays' partial sums must equal the vertical-full / horizontal-valid 3x3
// correlation of the last three columns; each array is also checked alone.
module tb_vsa_pe_block;
  import vsa_pkg::*;
  logic clk = 0, rst_n = 0;
  logic shift;
  spike_vec_t col;
  wset_t wset;
  logic signed [PS_W-1:0] ps [KW][N_PS];
  int checks = 0, failures = 0;

  vsa_pe_block dut (.clk, .rst_n, .shift, .col, .wset, .ps);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  spike_vec_t hist [$];

  function automatic int term(spike_vec_t sv, wset_t wv, int kx, int k);
    int acc = 0;
    for (int ky = 0; ky < KH; ky++) begin
      int i = k - (KH-1) + ky;
      if (i >= 0 && i < PE_ROWS && sv[i]) acc += wv[kx*KH+ky] ? -1 : 1;
    end
    return acc;
  endfunction

  initial begin
    shift = 0; col = '0; wset = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      spike_vec_t cv;
      if (it % 50 == 0) wset = wset_t'($urandom);
      cv = spike_vec_t'($urandom);
      @(negedge clk);
      col = cv; shift = 1;
      hist.push_back(cv);
      @(posedge clk);
      #1;
      if (hist.size() >= 3 && it % 50 >= 2) begin
        int n;
        n = hist.size();
        for (int k = 0; k < N_PS; k++) begin
          int exp_sum, got_sum;
          exp_sum = 0; got_sum = 0;
          for (int a = 0; a < KW; a++) begin
            int e;
            e = term(hist[n-3+a], wset, a, k);
            exp_sum += e;
            got_sum += int'(ps[a][k]);
            checks++;
            if (int'(ps[a][k]) != e) begin
              failures++;
              if (failures < 10) $display("FAIL it=%0d arr=%0d k=%0d got=%0d exp=%0d", it, a, k, ps[a][k], e);
            end
          end
          checks++;
          if (got_sum != exp_sum) failures++;
        end
      end
    end
    // shift=0 must hold the column registers
    @(negedge clk);
    shift = 0; col = ~col;
    @(posedge clk); #1;
    begin
      int n;
        n = hist.size();
      for (int k = 0; k < N_PS; k++) begin
        checks++;
        if (int'(ps[0][k]) != term(hist[n-2], wset, 0, k)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
