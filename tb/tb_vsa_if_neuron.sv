// tb_vsa_if_neuron: drives the IF neuron with random convolution results
// through all four modes (spiking layer in membrane SRAM 1, spiking layer in
// membrane SRAM 2, encoding load, encoding step) over several time steps.
// The testbench holds its own bias/threshold/membrane SRAM models and a
// reference neuron model (integrate, clip to 8 bits, fire at >= threshold,
// reset to zero) and checks spikes, stored potentials and the two-clock
// latency.
module tb_vsa_if_neuron;
  import vsa_pkg::*;
  localparam int NADDR = 8;
  logic clk = 0, rst_n = 0;
  if_mode_e mode;
  logic first_step, mem_sel, in_valid;
  acc_t in_v [PE_ROWS];
  tag_t in_tag;
  logic [BIAS_AW-1:0] bias_raddr, thr_raddr;
  acc_t bias_rdata, thr_rdata;
  logic [MEM_AW-1:0] m1_raddr, m1_waddr, m2_raddr, m2_waddr;
  logic [MEM_W-1:0] m1_rdata, m1_wdata, m2_rdata, m2_wdata;
  logic m1_we, m2_we, out_valid;
  spike_vec_t out_spk;
  tag_t out_tag;
  int checks = 0, failures = 0;
  int fired = 0;

  vsa_if_neuron dut (.*);

  always #5 clk = ~clk;

  // SRAM models (synchronous read)
  acc_t bias_m [4], thr_m [4];
  logic [MEM_W-1:0] m1 [NADDR], m2 [NADDR];
  always_ff @(posedge clk) begin
    bias_rdata <= bias_m[bias_raddr[1:0]];
    thr_rdata  <= thr_m[thr_raddr[1:0]];
    m1_rdata   <= m1[m1_raddr[2:0]];
    m2_rdata   <= m2[m2_raddr[2:0]];
    if (m1_we) m1[m1_waddr[2:0]] <= m1_wdata;
    if (m2_we) m2[m2_waddr[2:0]] <= m2_wdata;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference state
  int ref_v1 [NADDR][PE_ROWS], ref_v2 [NADDR][PE_ROWS], ref_i2 [NADDR][PE_ROWS];

  function automatic int clip(int v);
    return v > 127 ? 127 : (v < -128 ? -128 : v);
  endfunction

  initial begin
    mode = IF_SPIKE; first_step = 0; mem_sel = 0; in_valid = 0; in_tag = '0;
    for (int r = 0; r < PE_ROWS; r++) in_v[r] = '0;
    for (int c = 0; c < 4; c++) begin
      bias_m[c] = acc_t'($urandom_range(0, 10)) - 5;
      thr_m[c]  = acc_t'($urandom_range(4, 40));
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // phase 0: spiking layer (M1), phase 1: fused second layer (M2),
    // phase 2: encoding layer (load then steps)
    for (int phase = 0; phase < 3; phase++) begin
      for (int t = 0; t < 5; t++) begin
        for (int a = 0; a < NADDR; a++) begin
          int oc, x [PE_ROWS], exp_v [PE_ROWS];
          spike_vec_t exp_spk;
          oc = a % 4;
          mem_sel    = (phase == 1);
          first_step = (t == 0);
          mode = (phase < 2) ? IF_SPIKE : (t == 0 ? IF_ENC_LOAD : IF_ENC_STEP);
          @(negedge clk);
          in_valid = 1;
          in_tag = '0; in_tag.valid = 1; in_tag.oc = 8'(oc); in_tag.mem_addr = MEM_AW'(a);
          for (int r = 0; r < PE_ROWS; r++) begin
            x[r] = $urandom_range(0, 60) - 20;
            if (a == 0 && r == 0) x[r] = 127;   // saturation corner
            in_v[r] = acc_t'(x[r]);
          end
          // reference
          for (int r = 0; r < PE_ROWS; r++) begin
            int aop, res, v;
            aop = (mode == IF_ENC_STEP) ? ref_i2[a][r] : clip(x[r] - int'(bias_m[oc]));
            if (mode == IF_ENC_LOAD || (mode == IF_SPIKE && first_step)) res = 0;
            else if (mode == IF_SPIKE && mem_sel) res = ref_v2[a][r];
            else res = ref_v1[a][r];
            v = clip(aop + res);
            exp_spk[r] = (v >= int'(thr_m[oc]));
            exp_v[r] = exp_spk[r] ? 0 : v;
            if (mode == IF_ENC_LOAD) ref_i2[a][r] = aop;
            if (mode == IF_SPIKE && mem_sel) ref_v2[a][r] = exp_v[r];
            else ref_v1[a][r] = exp_v[r];
          end
          @(posedge clk); #1;
          in_valid = 0;
          check_noout: begin
            checks++;
            if (out_valid) failures++;   // not yet: latency is two clocks
          end
          @(posedge clk); #1;
          checks++;
          if (!out_valid || out_spk != exp_spk || out_tag.mem_addr != MEM_AW'(a)) begin
            failures++;
            if (failures < 10) $display("FAIL phase=%0d t=%0d a=%0d spk=%b exp=%b", phase, t, a, out_spk, exp_spk);
          end
          fired += $countones(out_spk);
        end
      end
      // stored potentials
      for (int a = 0; a < NADDR; a++)
        for (int r = 0; r < PE_ROWS; r++) begin
          checks++;
          if (phase == 1) begin
            if (int'($signed(m2[a][r*ACC_W +: ACC_W])) != ref_v2[a][r]) failures++;
          end else begin
            if (int'($signed(m1[a][r*ACC_W +: ACC_W])) != ref_v1[a][r]) failures++;
          end
        end
    end
    checks++;
    if (fired == 0) failures++;
    $display("spikes fired: %0d", fired);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
