// tb_adc: streams random samples through the ADC model, one per cycle, and
// checks each code and its one-cycle latency, and that a glitch mask flips
// exactly the sample it is applied to.
module tb_adc;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_valid;
  logic [8:0] in_val = 0, glitch = 0, out_code;
  logic [8:0] sent [$];
  logic [8:0] gl [$];

  adc dut (.*);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      // check what was sent the cycle before
      if (sent.size() > 0) begin
        logic [8:0] e;
        e = sent.pop_front() ^ gl.pop_front();
        checks++;
        if (!out_valid || out_code != e) begin
          failures++; $display("FAIL: code %0d valid %0b expected %0d", out_code, out_valid, e);
        end
      end else begin
        checks++;
        if (out_valid) begin failures++; $display("FAIL: spurious valid"); end
      end
      in_valid = (k % 7) != 3;
      in_val   = 9'($urandom);
      glitch   = (k % 50 == 10) ? 9'h040 : 9'h000;
      if (in_valid) begin sent.push_back(in_val); gl.push_back(glitch); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
