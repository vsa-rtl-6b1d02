// vsa_pe_block: the three PE arrays that serve one input channel.
// Each cycle with shift=1 the block takes ONE new input column vector (col)
// and keeps the two previous ones, so PE array 0 sees column x-2 with filter
// column A, array 1 column x-1 with filter column B and array 2 column x with
// filter column C. When all three columns belong to the same sweep, the sum
// of the three arrays' outputs is output column x-2 of a 3x3 convolution
// (OA = A*WA + B*WB + C*WC, OB = B*WA + C*WB + D*WC, ...), one output column
// per cycle with every PE busy.
// wset bit kx*3+ky is the sign of filter column kx, row ky.
// Timing: ps is registered inside the arrays, one clock after col/wset.
// The paper fixes the three arrays and the vectorwise schedule; feeding the
// arrays from a two-column shift register (one SRAM read per cycle) is this
// design's reading of "each PE block only accesses one vectorwise input at a
// time".
module vsa_pe_block
  import vsa_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        shift,
  input  spike_vec_t  col,
  input  wset_t       wset,
  output logic signed [PS_W-1:0] ps [KW][N_PS]
);
  spike_vec_t d1, d2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d1 <= '0;
      d2 <= '0;
    end else if (shift) begin
      d1 <= col;
      d2 <= d1;
    end
  end

  spike_vec_t arr_in [KW];
  always_comb begin
    arr_in[0] = d2;
    arr_in[1] = d1;
    arr_in[2] = col;
  end

  for (genvar a = 0; a < KW; a++) begin : g_arr
    vsa_pe_array u_arr (
      .clk(clk), .rst_n(rst_n),
      .s(arr_in[a]),
      .w(wset[a*KH +: KH]),
      .ps(ps[a])
    );
  end
endmodule
