// tb_vsa_sram: random masked writes and reads against a reference array,
// including read-during-write to the same address (old data expected) and
// read-data hold while re=0.
module tb_vsa_sram;
  localparam int DEPTH = 64, WIDTH = 16;
  logic clk = 0;
  logic re, we;
  logic [5:0] raddr, waddr;
  logic [WIDTH-1:0] rdata, wdata, wmask;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  vsa_sram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.clk, .re, .raddr, .rdata, .we, .waddr, .wdata, .wmask);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] exp;
    re = 0; we = 0; raddr = 0; waddr = 0; wdata = 0; wmask = '1;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 6'(a); wdata = WIDTH'($urandom); wmask = '1;
      model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int it = 0; it < 1000; it++) begin
      @(negedge clk);
      re = 1; raddr = 6'($urandom);
      we = 1'($urandom); waddr = (it % 7 == 0) ? raddr : 6'($urandom);
      wdata = WIDTH'($urandom); wmask = WIDTH'($urandom);
      exp = model[raddr];
      @(posedge clk);
      if (we) model[waddr] = (model[waddr] & ~wmask) | (wdata & wmask);
      #1;
      checks++;
      if (rdata !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL it=%0d addr=%0d got=%h exp=%h", it, raddr, rdata, exp);
      end
    end
    // hold
    @(negedge clk); re = 0; we = 0;
    @(posedge clk); #1;
    checks++;
    if (rdata !== exp) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
