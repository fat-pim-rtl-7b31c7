// xbar_ctrl: operation controller of one crossbar.
//
// An operation multiplies the stored 128 x 16 weight matrix by a vector of
// ROWS IN_BITS-bit inputs. The controller latches the vector and performs
// IN_BITS reads, read b driving every word line with bit b of its input
// (least significant bit first). Each finished read is captured into the
// sample-and-hold as soon as it is free (sh_free is high also in the cycle in
// which the ADC releases it) and the next read starts in the following cycle,
// so reading overlaps conversion. adc_req stays high from the start of the
// operation until the bound ADC channel reports op_done after the last read's
// sum check. Programming requests pass to the array only while no operation
// runs. busy covers both operations and word-line writes.
module xbar_ctrl #(
  parameter int unsigned ROWS    = fatpim_pkg::ROWS,
  parameter int unsigned IN_BITS = fatpim_pkg::IN_BITS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          op_start,
  input  logic [ROWS-1:0][IN_BITS-1:0]  in_vec,
  input  logic                          prog_req,
  output logic                          prog_en,
  input  logic                          prog_busy,
  output logic                          read_start,
  output logic [ROWS-1:0]               wl_bits,
  input  logic                          read_done,
  input  logic                          sh_free,
  output logic                          sh_load,
  output logic [3:0]                    sh_bit,
  output logic                          sh_last,
  output logic                          adc_req,
  input  logic                          op_done,
  output logic                          busy
);
  typedef enum logic [2:0] {S_IDLE, S_START, S_READ, S_HOLD, S_DRAIN} state_e;
  state_e state;
  logic [ROWS-1:0][IN_BITS-1:0] vec;
  logic [3:0] b;
  logic       capture;

  always_comb begin
    for (int i = 0; i < ROWS; i++) wl_bits[i] = vec[i][b];
    read_start = (state == S_START);
    capture    = ((state == S_READ && read_done) || state == S_HOLD) && sh_free;
    sh_load    = capture;
    sh_bit     = b;
    sh_last    = (int'(b) == IN_BITS - 1);
    adc_req    = (state != S_IDLE);
    prog_en    = prog_req && (state == S_IDLE) && !prog_busy;
    busy       = (state != S_IDLE) || prog_busy;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      vec   <= '0;
      b     <= '0;
    end else begin
      unique case (state)
        S_IDLE:  if (op_start && !prog_busy) begin
                   vec   <= in_vec;
                   b     <= '0;
                   state <= S_START;
                 end
        S_START: state <= S_READ;
        S_READ,
        S_HOLD:  if (capture) begin
                   if (int'(b) == IN_BITS - 1) state <= S_DRAIN;
                   else begin
                     b     <= b + 1'b1;
                     state <= S_START;
                   end
                 end else if (state == S_READ && read_done) begin
                   state <= S_HOLD;
                 end
        S_DRAIN: if (op_done) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
