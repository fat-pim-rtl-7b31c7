// tb_ima_output_regs: writes results for different crossbars from different
// channel ports, some in the same cycle, and reads them back with their done
// and error flags; checks that clr clears the flags of one crossbar only.
module tb_ima_output_regs;
  import fatpim_pkg::*;
  localparam int NX = 12, NA = 4;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic [NX-1:0] clr = '0, done, err;
  logic [NA-1:0] wr_en = '0, wr_err = '0;
  logic [NA-1:0][3:0] wr_xbar = '0;
  logic [NA-1:0][NCOL-1:0][RES_BITS-1:0] wr_res = '0;
  logic [3:0] rd_xbar = 0;
  logic [NCOL-1:0][RES_BITS-1:0] rd_res;
  logic [NCOL-1:0][RES_BITS-1:0] exp_res [NX];
  logic exp_err [NX];

  ima_output_regs dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(done == '0 && err == '0, "flags clear after reset");
    for (int round = 0; round < 3; round++) begin
      wr_en = '1;
      for (int a = 0; a < NA; a++) begin
        int x;
        x = round * NA + a;
        wr_xbar[a] = 4'(x);
        wr_err[a]  = (x % 3 == 1);
        for (int c = 0; c < NCOL; c++) wr_res[a][c] = RES_BITS'({$urandom, $urandom});
        exp_res[x] = wr_res[a];
        exp_err[x] = wr_err[a];
      end
      @(negedge clk); wr_en = '0;
    end
    for (int x = 0; x < NX; x++) begin
      rd_xbar = 4'(x); #1;
      chk(rd_res == exp_res[x], $sformatf("results of crossbar %0d", x));
      chk(done[x] && err[x] == exp_err[x], $sformatf("flags of crossbar %0d", x));
    end
    @(negedge clk); clr = 12'h010;
    @(negedge clk); clr = '0;
    chk(!done[4] && !err[4] && done[7] && err[7], "clr clears one crossbar only");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
