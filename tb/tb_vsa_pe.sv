// tb_vsa_pe: exhaustive check of the PE product: spike x (+1 or -1 coded as
// a sign bit) against the integer product.
module tb_vsa_pe;
  logic s, w;
  logic signed [1:0] o;
  int checks = 0, failures = 0;

  vsa_pe dut (.s, .w, .o);

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      int exp;
      {s, w} = 2'(i);
      #1;
      exp = s ? (w ? -1 : 1) : 0;
      checks++;
      if (int'(o) != exp) begin
        failures++;
        $display("FAIL s=%0d w=%0d o=%0d exp=%0d", s, w, o, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
