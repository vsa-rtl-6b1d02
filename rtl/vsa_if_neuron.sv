// vsa_if_neuron: eight integrate-and-fire neurons working on one output
// column vector (8 rows) of one output channel per cycle.
// Batch normalisation is folded into the neuron: the convolution result has
// a per-channel bias subtracted and the potential is compared with a
// per-channel threshold (sum_t [x[t] - (mu - sigma/gamma*beta)] >= sigma/gamma*Vth).
//   A       = IF_ENC_STEP ? M2 : conv - bias
//   residue = 0 on the first step, M2 for the second fused layer, else M1
//   V       = A + residue          (clipped to 8 bits)
//   spike   = V >= threshold;  new potential = spike ? 0 : V
// Where the potential lives depends on the mode:
//   IF_SPIKE, mem_sel=0 : residue in membrane SRAM 1 (normal layer)
//   IF_SPIKE, mem_sel=1 : residue in membrane SRAM 2 (second layer of a fused pair)
//   IF_ENC_LOAD         : first step of the encoding layer; conv - bias is
//                         stored in membrane SRAM 2, the potential in SRAM 1
//   IF_ENC_STEP         : later steps of the encoding layer; the stored input
//                         current is read back from SRAM 2 and added to SRAM 1
// Timing: in_valid/in_v/in_tag enter; the bias, threshold and both membrane
// SRAMs are read with synchronous reads in that cycle (addresses from the
// tag) while the inputs are registered; the next cycle computes, writes the
// membrane SRAMs and registers the spikes, so out_spk follows in_v by two
// clocks. Up to one column per clock.
// The datapath (subtract, two muxes, add, comparator, reset-to-zero mux,
// two membrane SRAMs) follows the paper's IF neuron; the explicit zero
// residue on the first time step and 8-bit saturation are this design's.
module vsa_if_neuron
  import vsa_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  if_mode_e             mode,
  input  logic                 first_step,
  input  logic                 mem_sel,
  input  logic                 in_valid,
  input  acc_t                 in_v [PE_ROWS],
  input  tag_t                 in_tag,
  // bias / threshold SRAMs (1 x 8 bit per output channel)
  output logic [BIAS_AW-1:0]   bias_raddr,
  input  acc_t                 bias_rdata,
  output logic [BIAS_AW-1:0]   thr_raddr,
  input  acc_t                 thr_rdata,
  // membrane SRAM 1
  output logic [MEM_AW-1:0]    m1_raddr,
  input  logic [MEM_W-1:0]     m1_rdata,
  output logic                 m1_we,
  output logic [MEM_AW-1:0]    m1_waddr,
  output logic [MEM_W-1:0]     m1_wdata,
  // membrane SRAM 2
  output logic [MEM_AW-1:0]    m2_raddr,
  input  logic [MEM_W-1:0]     m2_rdata,
  output logic                 m2_we,
  output logic [MEM_AW-1:0]    m2_waddr,
  output logic [MEM_W-1:0]     m2_wdata,
  // to post processing
  output logic                 out_valid,
  output spike_vec_t           out_spk,
  output tag_t                 out_tag
);
  // read addresses are issued in the input cycle
  always_comb begin
    bias_raddr = in_tag.oc[BIAS_AW-1:0];
    thr_raddr  = in_tag.oc[BIAS_AW-1:0];
    m1_raddr   = in_tag.mem_addr;
    m2_raddr   = in_tag.mem_addr;
  end

  // input DFF
  logic  v_q;
  acc_t  x_q [PE_ROWS];
  tag_t  tag_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q   <= 1'b0;
      tag_q <= '0;
      for (int r = 0; r < PE_ROWS; r++) x_q[r] <= '0;
    end else begin
      v_q   <= in_valid;
      tag_q <= in_tag;
      x_q   <= in_v;
    end
  end

  acc_t       a_op [PE_ROWS];
  acc_t       res  [PE_ROWS];
  acc_t       vsum [PE_ROWS];
  acc_t       vnew [PE_ROWS];
  spike_vec_t spk;

  always_comb begin
    for (int r = 0; r < PE_ROWS; r++) begin
      // Encoding_2 mux: fresh convolution current or the stored one
      if (mode == IF_ENC_STEP) a_op[r] = acc_t'(m2_rdata[r*ACC_W +: ACC_W]);
      else                     a_op[r] = sat_acc(tree_t'(x_q[r]) - tree_t'(bias_rdata));
      // ctrl mux: residue potential
      if (mode == IF_ENC_LOAD || (mode == IF_SPIKE && first_step)) res[r] = '0;
      else if (mode == IF_SPIKE && mem_sel)                       res[r] = acc_t'(m2_rdata[r*ACC_W +: ACC_W]);
      else                                                        res[r] = acc_t'(m1_rdata[r*ACC_W +: ACC_W]);
      vsum[r] = sat_acc(tree_t'(a_op[r]) + tree_t'(res[r]));
      spk[r]  = (vsum[r] >= thr_rdata);
      vnew[r] = spk[r] ? acc_t'(0) : vsum[r];
    end
  end

  always_comb begin
    m1_waddr = tag_q.mem_addr;
    m2_waddr = tag_q.mem_addr;
    m1_we    = v_q && !(mode == IF_SPIKE && mem_sel);
    m2_we    = v_q && ((mode == IF_SPIKE && mem_sel) || mode == IF_ENC_LOAD);
    for (int r = 0; r < PE_ROWS; r++) begin
      m1_wdata[r*ACC_W +: ACC_W] = vnew[r];
      // Encoding_1 mux: store the input current, or the new potential
      m2_wdata[r*ACC_W +: ACC_W] = (mode == IF_ENC_LOAD) ? a_op[r] : vnew[r];
    end
  end

  // output DFF
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_spk   <= '0;
      out_tag   <= '0;
    end else begin
      out_valid <= v_q;
      out_spk   <= spk;
      out_tag   <= tag_q;
    end
  end
endmodule
