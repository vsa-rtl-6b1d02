// tb_vsa_pingpong_sram: writes distinct data into the two banks through
// both write ports (port B with a bit mask), then reads each bank and checks
// that the banks are independent and that the read bank is the one chosen
// when the read was issued.
module tb_vsa_pingpong_sram;
  localparam int DEPTH = 16, WIDTH = 32;
  logic clk = 0;
  logic re, rbank, wa_en, wa_bank, wb_en, wb_bank;
  logic [3:0] raddr, wa_addr, wb_addr;
  logic [WIDTH-1:0] rdata, wa_data, wb_data, wb_mask;
  logic [WIDTH-1:0] model [2][DEPTH];
  int checks = 0, failures = 0;

  vsa_pingpong_sram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    re = 0; rbank = 0; raddr = 0; wa_en = 0; wa_bank = 0; wa_addr = 0; wa_data = 0;
    wb_en = 0; wb_bank = 0; wb_addr = 0; wb_data = 0; wb_mask = 0;
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        wa_en = 1; wa_bank = 1'(b); wa_addr = 4'(a); wa_data = $urandom;
        model[b][a] = wa_data;
      end
    @(negedge clk); wa_en = 0;
    // masked writes through port B while the other bank is loaded via port A
    for (int it = 0; it < 40; it++) begin
      @(negedge clk);
      wb_en = 1; wb_bank = 1'($urandom); wb_addr = 4'($urandom); wb_data = $urandom; wb_mask = $urandom;
      wa_en = 1; wa_bank = ~wb_bank; wa_addr = 4'($urandom); wa_data = $urandom;
      @(posedge clk);
      model[wb_bank][wb_addr] = (model[wb_bank][wb_addr] & ~wb_mask) | (wb_data & wb_mask);
      model[wa_bank][wa_addr] = wa_data;
    end
    @(negedge clk); wa_en = 0; wb_en = 0;
    for (int it = 0; it < 200; it++) begin
      logic [WIDTH-1:0] exp;
      @(negedge clk);
      re = 1; rbank = 1'($urandom); raddr = 4'($urandom);
      exp = model[rbank][raddr];
      @(posedge clk); #1;
      rbank = ~rbank;      // changing rbank after the edge must not matter
      #1;
      checks++;
      if (rdata !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL bank=%0d addr=%0d got=%h exp=%h", ~rbank, raddr, rdata, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
