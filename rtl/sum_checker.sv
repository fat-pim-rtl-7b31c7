// sum_checker: the per-read error check of one ADC channel.
//
// During a read's conversion it keeps two running sums with one adder each:
// the plain sum of the NUM_DATA data bit-line codes, and the stored sum
// rebuilt from the NUM_SUM sum bit-line codes, code k weighted by 4^k because
// sum cell k holds bits [2k+1:2k] of the word-line sum. Because every sum
// cell of a word line sees the same input bit as that line's data cells, the
// two agree on a fault-free read. The cycle after the last code of a read
// (its sums then complete) the two are compared and, one cycle later,
// chk_valid pulses with chk_err set if they differ by more than THRESH.
// op_err is sticky over the reads of an operation and op_done marks the
// comparison of its last read.
module sum_checker #(
  parameter int unsigned NUM_DATA = fatpim_pkg::DATA_COLS,
  parameter int unsigned NUM_SUM  = fatpim_pkg::SUM_COLS,
  parameter int unsigned BL_BITS  = fatpim_pkg::BL_BITS,
  parameter int unsigned THRESH   = 0,
  localparam int unsigned SW = BL_BITS + $clog2(NUM_DATA) + 2 * NUM_SUM
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  fatpim_pkg::adc_tag_t tag,
  input  logic [BL_BITS-1:0]   code,
  output logic                 chk_valid,
  output logic                 chk_err,
  output logic                 op_done,
  output logic                 op_err
);
  logic [SW-1:0] data_sum, ref_sum, diff;
  logic          pend, pend_last, err_acc;
  logic          in_data;
  logic [SW-1:0] ref_term;

  always_comb begin
    in_data  = int'(tag.bl) < NUM_DATA;
    ref_term = in_data ? '0
             : SW'(code) << (2 * (int'(tag.bl) - NUM_DATA));
    diff     = (data_sum >= ref_sum) ? data_sum - ref_sum : ref_sum - data_sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      data_sum  <= '0;
      ref_sum   <= '0;
      pend      <= 1'b0;
      pend_last <= 1'b0;
      chk_valid <= 1'b0;
      chk_err   <= 1'b0;
      op_done   <= 1'b0;
      op_err    <= 1'b0;
      err_acc   <= 1'b0;
    end else begin
      pend      <= tag.valid && tag.last_rd;
      pend_last <= tag.valid && tag.last_op;
      if (tag.valid) begin
        if (tag.bl == '0) begin          // first code of a read
          data_sum <= SW'(code);
          ref_sum  <= '0;
        end else if (in_data) begin
          data_sum <= data_sum + SW'(code);
        end else begin
          ref_sum  <= ref_sum + ref_term;
        end
        if (tag.first) err_acc <= 1'b0;
      end
      chk_valid <= pend;
      chk_err   <= pend && (diff > SW'(THRESH));
      op_done   <= pend_last;
      if (pend) begin
        err_acc <= err_acc | (diff > SW'(THRESH));
        op_err  <= err_acc | (diff > SW'(THRESH));
      end
    end
  end
endmodule
