// shift_add: the shift-and-add unit of one ADC channel.
//
// A 16-bit weight occupies SLICES consecutive 2-bit cells, bit line
// SLICES*c + s holding bits [2s+1:2s] of weight column c, and the inputs are
// applied one bit per read. The code of data bit line bl in the read of input
// bit b is therefore worth code << (2*(bl % SLICES) + b) in column bl/SLICES.
// One adder adds each code as it leaves the ADC into its column's RES_BITS
// accumulator; the first code of an operation clears all accumulators. Codes
// of sum bit lines are ignored here (they feed the sum checker only). After
// the last code of an operation, result holds the NCOL dot products.
module shift_add #(
  parameter int unsigned NUM_DATA = fatpim_pkg::DATA_COLS,
  parameter int unsigned SLICES   = fatpim_pkg::SLICES,
  parameter int unsigned CELL_BITS = fatpim_pkg::CELL_BITS,
  parameter int unsigned BL_BITS  = fatpim_pkg::BL_BITS,
  parameter int unsigned RES_BITS = fatpim_pkg::RES_BITS,
  localparam int unsigned NCOL = NUM_DATA / SLICES
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  fatpim_pkg::adc_tag_t           tag,
  input  logic [BL_BITS-1:0]             code,
  output logic [NCOL-1:0][RES_BITS-1:0]  result
);
  logic [RES_BITS-1:0] term;
  int unsigned         col, sl;

  always_comb begin
    col  = int'(tag.bl) / SLICES;
    sl   = int'(tag.bl) % SLICES;
    term = RES_BITS'(code) << (CELL_BITS * sl + int'(tag.bitpos));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) result <= '0;
    else if (tag.valid && int'(tag.bl) < NUM_DATA) begin
      if (tag.first) begin
        result      <= '0;
        result[col] <= term;
      end else begin
        result[col] <= result[col] + term;
      end
    end
  end
endmodule
