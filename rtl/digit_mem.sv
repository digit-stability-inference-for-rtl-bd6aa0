// digit_mem: on-chip memory of signed digits, one digit per word, with one
// synchronous read port and one write port.
//
// The paper shows a single RAM that returns the digits of approximant k and
// takes those of approximant k+1, and says the previous approximant's digits
// are "fetched from on-chip memory". Its organisation is not given; here each
// vector element (and each digit-serial constant) has a bank of its own, so a
// bank is this module. Address a holds digit a+1 (the MSD is at address 0).
// Read data appears the cycle after `re` (registered output, as an FPGA
// block RAM). A read and a write of the same address in one cycle return
// the old digit.
module digit_mem
  import dsi_pkg::*;
#(
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output digit_t        rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  digit_t        wdata
);

  digit_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end

endmodule
