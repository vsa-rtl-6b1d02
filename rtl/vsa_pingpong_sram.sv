// vsa_pingpong_sram: two equal SRAM banks used as a ping-pong buffer.
// The spike buffer uses it so one bank is read for time step t while the
// other is filled for t+1; the weight buffer uses it to hold the weights of
// two layers (one bank each) for layer fusion.
// Read: rbank selects the bank, raddr/re as in vsa_sram, rdata one clock
// later from the bank selected when the read was issued.
// Write: wbank selects the bank. Both banks can be written in one cycle
// only through different ports, so a second write port (port B, used by the
// accelerator to write results back into the spike buffer) is provided; if
// both ports write the same bank in one cycle, port A wins.
// Bank count and size come from the paper; the port arrangement is this
// design's.
module vsa_pingpong_sram #(
  parameter int DEPTH = 144,
  parameter int WIDTH = 256
) (
  input  logic                     clk,
  input  logic                     re,
  input  logic                     rbank,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata,
  // write port A (loading from off-chip)
  input  logic                     wa_en,
  input  logic                     wa_bank,
  input  logic [$clog2(DEPTH)-1:0] wa_addr,
  input  logic [WIDTH-1:0]         wa_data,
  // write port B (results written back), with bit mask
  input  logic                     wb_en,
  input  logic                     wb_bank,
  input  logic [$clog2(DEPTH)-1:0] wb_addr,
  input  logic [WIDTH-1:0]         wb_data,
  input  logic [WIDTH-1:0]         wb_mask
);
  localparam int AW = $clog2(DEPTH);

  logic             rbank_q;
  logic [WIDTH-1:0] bank_rdata [2];

  for (genvar b = 0; b < 2; b++) begin : g_bank
    logic            we;
    logic [AW-1:0]   waddr;
    logic [WIDTH-1:0] wdata, wmask;
    always_comb begin
      if (wa_en && wa_bank == 1'(b)) begin
        we = 1'b1; waddr = wa_addr; wdata = wa_data; wmask = '1;
      end else begin
        we = wb_en && wb_bank == 1'(b); waddr = wb_addr; wdata = wb_data; wmask = wb_mask;
      end
    end
    vsa_sram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) u_bank (
      .clk(clk),
      .re(re && rbank == 1'(b)), .raddr(raddr), .rdata(bank_rdata[b]),
      .we(we), .waddr(waddr), .wdata(wdata), .wmask(wmask)
    );
  end

  always_ff @(posedge clk) if (re) rbank_q <= rbank;

  assign rdata = bank_rdata[rbank_q];
endmodule
