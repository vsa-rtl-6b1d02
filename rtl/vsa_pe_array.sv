// vsa_pe_array: an ROWS x KH grid of PEs for one filter column.
// ROWS input spikes (one column vector of the input tile) are broadcast along
// the rows and KH weight signs (one column of the filter) along the columns.
// The products are summed along the diagonals, so partial sum k is
//   ps[k] = sum_j  s[k-(KH-1)+j] * w[j]      (terms with a row outside 0..ROWS-1 drop)
// giving ROWS+KH-1 = 10 partial sums (the "ten registers"). Sums 0..KH-2 are
// the top boundary and sums ROWS..ROWS+KH-2 the bottom boundary of the tile.
// Timing: the ten sums are registered, so they appear one clock after s/w.
// Geometry and diagonal summation follow the paper; the register has no
// enable (the surrounding pipeline tags which cycles are valid).
module vsa_pe_array
  import vsa_pkg::*;
#(
  parameter int ROWS = PE_ROWS,
  parameter int KHP  = KH
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [ROWS-1:0]           s,
  input  logic [KHP-1:0]            w,
  output logic signed [PS_W-1:0]    ps [ROWS+KHP-1]
);
  logic signed [1:0]      prod [ROWS][KHP];
  logic signed [PS_W-1:0] sum  [ROWS+KHP-1];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < KHP; c++) begin : g_col
      vsa_pe u_pe (.s(s[r]), .w(w[c]), .o(prod[r][c]));
    end
  end

  always_comb begin
    for (int k = 0; k < ROWS+KHP-1; k++) begin
      sum[k] = '0;
      for (int j = 0; j < KHP; j++) begin
        if (k-(KHP-1)+j >= 0 && k-(KHP-1)+j < ROWS)
          sum[k] = sum[k] + PS_W'(prod[k-(KHP-1)+j][j]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < ROWS+KHP-1; k++) ps[k] <= '0;
    end else begin
      for (int k = 0; k < ROWS+KHP-1; k++) ps[k] <= sum[k];
    end
  end
endmodule
