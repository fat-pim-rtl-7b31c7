// fatpim_chip: one chip of the sum-checked ReRAM accelerator, NTILE tiles.
//
// The tiles are independent; the network that would carry data between
// tiles and chips is not part of this design, so each tile's host port,
// interrupt and test hooks are brought out as arrays indexed by tile. A
// system of several chips instantiates this module once per chip.
module fatpim_chip #(
  parameter int unsigned NTILE       = fatpim_pkg::TILES_PER_CHIP,
  parameter int unsigned NIMA        = fatpim_pkg::IMAS_PER_TILE,
  parameter int unsigned EDRAM_WORDS = fatpim_pkg::EDRAM_WORDS,
  parameter int unsigned READ_LAT    = fatpim_pkg::READ_LAT,
  parameter int unsigned WRITE_LAT   = fatpim_pkg::WRITE_LAT
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  fatpim_pkg::host_req_t [NTILE-1:0]  host_req,
  output logic [NTILE-1:0]                   host_ready,
  output logic [NTILE-1:0]                   host_rvalid,
  output logic [NTILE-1:0][63:0]             host_rdata,
  output logic [NTILE-1:0]                   irq,
  // fault injection (test hooks), per tile
  input  logic [NTILE-1:0]                   flt_en,
  input  logic [3:0]                         flt_ima,
  input  logic [3:0]                         flt_xbar,
  input  logic [6:0]                         flt_row,
  input  logic [7:0]                         flt_col,
  input  logic [1:0]                         flt_val,
  input  logic [NTILE-1:0]                   glitch_en,
  input  logic [3:0]                         glitch_ima,
  input  logic [1:0]                         glitch_adc,
  input  logic [8:0]                         glitch_mask,
  input  logic [NTILE-1:0]                   eflip_en,
  input  fatpim_pkg::eaddr_t                 eflip_addr,
  input  logic [71:0]                        eflip_mask
);
  for (genvar t = 0; t < NTILE; t++) begin : g_tile
    fatpim_tile #(
      .NIMA(NIMA), .EDRAM_WORDS(EDRAM_WORDS), .READ_LAT(READ_LAT), .WRITE_LAT(WRITE_LAT)
    ) u_tile (
      .clk, .rst_n, .host_req(host_req[t]), .host_ready(host_ready[t]),
      .host_rvalid(host_rvalid[t]), .host_rdata(host_rdata[t]), .irq(irq[t]),
      .flt_en(flt_en[t]), .flt_ima, .flt_xbar, .flt_row, .flt_col, .flt_val,
      .glitch_en(glitch_en[t]), .glitch_ima, .glitch_adc, .glitch_mask,
      .eflip_en(eflip_en[t]), .eflip_addr, .eflip_mask);
  end
endmodule
