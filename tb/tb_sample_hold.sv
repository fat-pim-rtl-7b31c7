// tb_sample_hold: captures random bit-line values, reads every one back
// through sel, checks that a load while full is ignored, and that a load in
// the cycle of release captures the new sample at once.
module tb_sample_hold;
  import fatpim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic load = 0, release_i = 0, full;
  logic [NUM_BL-1:0][BL_BITS-1:0] bl_in = '0, a, b;
  logic [4:0] tag_in = '0, tag;
  logic [7:0] sel = 0;
  logic [BL_BITS-1:0] val;

  sample_hold dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic readback(input logic [NUM_BL-1:0][BL_BITS-1:0] exp);
    for (int j = 0; j < NUM_BL; j++) begin
      sel = 8'(j); #1;
      chk(val == exp[j], $sformatf("held[%0d]=%0d expected %0d", j, val, exp[j]));
    end
  endtask

  initial begin
    for (int j = 0; j < NUM_BL; j++) begin a[j] = BL_BITS'($urandom); b[j] = BL_BITS'($urandom); end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); chk(!full, "empty after reset");
    bl_in = a; tag_in = 5'h13; load = 1;
    @(negedge clk); load = 0;
    chk(full, "full after load"); chk(tag == 5'h13, "tag captured");
    readback(a);
    bl_in = b; tag_in = 5'h02; load = 1;              // ignored: full
    @(negedge clk); load = 0;
    readback(a); chk(tag == 5'h13, "tag kept while full");
    release_i = 1; load = 1;                          // release and load together
    @(negedge clk); release_i = 0; load = 0;
    chk(full && tag == 5'h02, "load in the release cycle captures");
    readback(b);
    release_i = 1;
    @(negedge clk); release_i = 0;
    chk(!full, "empty after release");
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
