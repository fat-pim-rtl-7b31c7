// sample_hold: behavioural model of a crossbar's sample-and-hold bank.
// This is a model of an analog part (one hold capacitor per bit line).
//
// On load it captures all NUM_BL bit-line values of a finished read together
// with a tag (the input bit the read applied and whether it was the last read
// of the operation) and raises full. While full, the ADC channel bound to the
// crossbar reads one held value per cycle through sel/val; release empties the
// bank so that the next read can be captured, in that same cycle if load is
// high too. This is what lets the crossbar run its next read while the
// previous one is being converted. A load while full and not released is
// ignored; the crossbar controller waits for the bank to be free.
module sample_hold #(
  parameter int unsigned NUM_BL  = fatpim_pkg::NUM_BL,
  parameter int unsigned BL_BITS = fatpim_pkg::BL_BITS,
  parameter int unsigned TAG_BITS = 5
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           load,
  input  logic [NUM_BL-1:0][BL_BITS-1:0] bl_in,
  input  logic [TAG_BITS-1:0]            tag_in,
  output logic                           full,
  output logic [TAG_BITS-1:0]            tag,
  input  logic [7:0]                     sel,
  output logic [BL_BITS-1:0]             val,
  input  logic                           release_i
);
  logic [NUM_BL-1:0][BL_BITS-1:0] held;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= 1'b0;
      tag  <= '0;
      held <= '0;
    end else if (load && (!full || release_i)) begin
      full <= 1'b1;
      held <= bl_in;
      tag  <= tag_in;
    end else if (release_i) begin
      full <= 1'b0;
    end
  end

  assign val = (int'(sel) < NUM_BL) ? held[sel] : '0;
endmodule
