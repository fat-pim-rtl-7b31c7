// tb_edram: writes random codewords to random addresses of a small eDRAM,
// reads them back with one cycle of latency, and checks the bit-flip hook.
module tb_edram;
  localparam int W = 4096;
  logic clk = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic en = 0, we = 0, flip_en = 0;
  logic [22:0] addr = 0, flip_addr = 0;
  logic [71:0] wdata = 0, rdata, flip_mask = 0;
  logic [71:0] model [W];
  logic [22:0] used [$];

  edram #(.WORDS(W)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int k = 0; k < 200; k++) begin
      @(negedge clk);
      en = 1; we = 1; addr = 23'($urandom % W); wdata = {$urandom, $urandom, $urandom};
      model[addr] = wdata; used.push_back(addr);
    end
    @(negedge clk); en = 0; we = 0;
    foreach (used[i]) begin
      @(negedge clk); en = 1; addr = used[i];
      @(negedge clk); en = 0;
      chk(rdata == model[used[i]], $sformatf("read back word %0d", used[i]));
    end
    @(negedge clk); flip_en = 1; flip_addr = used[3]; flip_mask = 72'h1_0000_0000_0000_0004;
    @(negedge clk); flip_en = 0; en = 1; addr = used[3];
    @(negedge clk); en = 0;
    chk(rdata == (model[used[3]] ^ 72'h1_0000_0000_0000_0004), "bit flip applied");
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
