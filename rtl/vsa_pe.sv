// vsa_pe: one processing element. Multiplies a binary spike s (0/1) by a
// binary weight stored as its sign bit w (1 means -1, 0 means +1). The
// product is -1, 0 or +1 and, as in the published PE, is formed by a single
// AND gate: o = {s & w, s} read as a 2-bit two's-complement number.
// Purely combinational.
module vsa_pe (
  input  logic              s,
  input  logic              w,
  output logic signed [1:0] o
);
  always_comb o = {s & w, s};
endmodule
