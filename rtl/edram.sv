// edram: a tile's eDRAM buffer, written as a synchronous single-port memory.
//
// WORDS codewords of 72 bits (64 data bits and their SEC-DED check bits).
// One access per cycle; read data appears the cycle after en with we low.
// The default size is the published 42 MiB of data per tile. flip_* XORs a
// mask into one stored word: a test hook that models a soft error in the
// buffer, tie it to 0 in use. The contents are not reset.
module edram #(
  parameter int unsigned WORDS = fatpim_pkg::EDRAM_WORDS,
  parameter int unsigned AW    = fatpim_pkg::EADDR_BITS,
  parameter int unsigned DW    = 72
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [DW-1:0] wdata,
  output logic [DW-1:0] rdata,
  input  logic          flip_en,
  input  logic [AW-1:0] flip_addr,
  input  logic [DW-1:0] flip_mask
);
  logic [DW-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en && int'(addr) < WORDS) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
    if (flip_en && int'(flip_addr) < WORDS)
      mem[flip_addr] <= mem[flip_addr] ^ flip_mask;
  end
endmodule
