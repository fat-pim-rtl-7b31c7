// adc: behavioural model of one shared ADC (a mixed-signal part).
//
// Converts one held bit-line value per cycle into a BITS-bit code with LAT
// cycles of pipeline latency (the model takes the value already quantised). The glitch
// input XORs a mask into the code of the sample entering the pipeline in the
// same cycle: it models a transient conversion fault and is a test hook only.
module adc #(
  parameter int unsigned BITS = fatpim_pkg::BL_BITS,
  parameter int unsigned LAT  = 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [BITS-1:0] in_val,
  input  logic [BITS-1:0] glitch,
  output logic            out_valid,
  output logic [BITS-1:0] out_code
);
  logic [LAT-1:0]           v_pipe;
  logic [LAT-1:0][BITS-1:0] c_pipe;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_pipe <= '0;
      c_pipe <= '0;
    end else begin
      v_pipe[0] <= in_valid;
      c_pipe[0] <= in_val ^ (in_valid ? glitch : '0);
      for (int i = 1; i < LAT; i++) begin
        v_pipe[i] <= v_pipe[i-1];
        c_pipe[i] <= c_pipe[i-1];
      end
    end
  end

  assign out_valid = v_pipe[LAT-1];
  assign out_code  = c_pipe[LAT-1];
endmodule
