// adc_sequencer: drives one ADC channel through the bound crossbar's S&H.
//
// While the channel is bound and the crossbar's sample-and-hold is full, it
// selects one bit line per cycle, data bit lines 0..NUM_DATA-1 first and the
// NUM_SUM sum bit lines after them, so one read takes NUM_DATA + NUM_SUM
// cycles of the ADC. With the last bit line it pulses sh_release; the S&H may
// capture the next read in that same cycle, so back-to-back reads convert
// without a gap. Every selected bit line gets a tag (bit line, input bit,
// first code of the operation, last code of the read, last code of the
// operation) that is delayed by ADC_LAT cycles to line up with the ADC code.
module adc_sequencer #(
  parameter int unsigned NUM_DATA = fatpim_pkg::DATA_COLS,
  parameter int unsigned NUM_SUM  = fatpim_pkg::SUM_COLS,
  parameter int unsigned ADC_LAT  = 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   active,     // channel bound to a crossbar
  input  logic                   sh_full,
  input  logic [3:0]             sh_bit,     // input bit of the held read
  input  logic                   sh_last,    // held read is the operation's last
  output logic [7:0]             sel,
  output logic                   sample,     // ADC input valid
  output logic                   sh_release,
  output fatpim_pkg::adc_tag_t   tag_out
);
  import fatpim_pkg::*;
  localparam int unsigned NBL = NUM_DATA + NUM_SUM;

  logic [7:0] idx;
  adc_tag_t   tag_now;
  adc_tag_t   pipe [ADC_LAT];

  assign sample     = active && sh_full;
  assign sel        = idx;
  assign sh_release = sample && (int'(idx) == NBL - 1);

  always_comb begin
    tag_now         = '0;
    tag_now.valid   = sample;
    tag_now.bl      = idx;
    tag_now.bitpos  = sh_bit;
    tag_now.first   = sample && (idx == '0) && (sh_bit == '0);
    tag_now.last_rd = sh_release;
    tag_now.last_op = sh_release && sh_last;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx <= '0;
      for (int i = 0; i < ADC_LAT; i++) pipe[i] <= '0;
    end else begin
      if (!active) idx <= '0;
      else if (sample) idx <= sh_release ? '0 : idx + 1'b1;
      pipe[0] <= tag_now;
      for (int i = 1; i < ADC_LAT; i++) pipe[i] <= pipe[i-1];
    end
  end

  assign tag_out = pipe[ADC_LAT-1];
endmodule
