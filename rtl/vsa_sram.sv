// vsa_sram: synchronous SRAM with one read port and one write port, used
// for the bias, threshold, temp, boundary and membrane SRAMs.
// Read: raddr in one cycle (with re=1), rdata in the next; rdata holds while
// re=0. Write: we/waddr/wdata/wmask in one cycle, stored at the clock edge
// (bits with wmask=0 keep their value). A read of the address written in
// the same cycle returns the old word.
// The capacities come from the paper; the port arrangement (one read and
// one write per cycle, bit mask) is this design's. A taped-out chip would
// use SRAM macros; this array model is synthesizable.
module vsa_sram #(
  parameter int DEPTH = 256,
  parameter int WIDTH = 8
) (
  input  logic                     clk,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [WIDTH-1:0]         wmask
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= (mem[waddr] & ~wmask) | (wdata & wmask);
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end
endmodule
