// tpi_sram_bank: one bank of the timestamp+polarity image (TPI) memory.
//
// A simple dual-port (one write port, one read port, "1W1R") synchronous SRAM
// of WORDS x WIDTH bits, written here as an array so that it simulates and maps
// onto an SRAM macro or FPGA block RAM. The ASIC version of the filter uses
// compiled 2048-word x 18-bit 1W1R banks; the bank size is that one.
//
// Timing: a write with we=1 takes effect at the clock edge. A read with re=1
// returns the word at raddr in rdata on the cycle after (one-cycle registered
// read); rdata holds its value while re=0. Reading and writing the same address
// in one cycle returns the old word (read-before-write). There is no reset:
// like a real SRAM, the contents are cleared by writing them (tpi_memory does
// this after reset).
module tpi_sram_bank #(
  parameter int unsigned WORDS = 2048,
  parameter int unsigned WIDTH = 18,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
