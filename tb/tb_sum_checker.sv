// tb_sum_checker: codes of whole operations computed from a random crossbar
// whose sum cells hold each word line's sum. A clean operation must pass
// every read; an operation with one data code changed by one, one with a sum
// code changed, and one with a cell error that all reads see must each be
// flagged on exactly the reads that carry the error. Checks the two-cycle
// latency from the last code of a read to chk_valid.
module tb_sum_checker;
  import fatpim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  adc_tag_t tag = '0;
  logic [BL_BITS-1:0] code = '0;
  logic chk_valid, chk_err, op_done, op_err;
  logic [1:0] cells [ROWS][NUM_BL];
  logic [IN_BITS-1:0] x [ROWS];
  int n_valid, n_err, n_done, last_err_op;
  int t_last, lat;

  sum_checker dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    if (chk_valid) begin n_valid <= n_valid + 1; if (chk_err) n_err <= n_err + 1; end
    if (op_done) begin n_done <= n_done + 1; last_err_op <= int'(op_err); end
  end

  task automatic make_xbar();
    for (int i = 0; i < ROWS; i++) begin
      logic [ROW_BITS-1:0] r;
      logic [2*SUM_COLS-1:0] s;
      x[i] = IN_BITS'($urandom);
      for (int j = 0; j < DATA_COLS; j++) begin cells[i][j] = 2'($urandom); r[2*j +: 2] = cells[i][j]; end
      s = row_sum(r);
      for (int k = 0; k < SUM_COLS; k++) cells[i][DATA_COLS + k] = s[2*k +: 2];
    end
  endtask

  // bad_read/bad_bl: one code off by +1 (-1 means none)
  task automatic run_op(input int bad_read, input int bad_bl);
    n_valid = 0; n_err = 0;
    for (int b = 0; b < IN_BITS; b++)
      for (int j = 0; j < NUM_BL; j++) begin
        int unsigned s = 0;
        for (int i = 0; i < ROWS; i++) if (x[i][b]) s += cells[i][j];
        if (b == bad_read && j == bad_bl) s = (s == 0) ? 1 : s - 1;
        @(negedge clk);
        tag = '0; tag.valid = 1; tag.bl = 8'(j); tag.bitpos = 4'(b);
        tag.first = (b == 0 && j == 0); tag.last_rd = (j == NUM_BL - 1);
        tag.last_op = tag.last_rd && (b == IN_BITS - 1);
        code = BL_BITS'(s);
      end
    @(negedge clk); tag = '0;
    t_last = 0;
    lat = 0;
    while (!chk_valid) begin @(negedge clk); lat++; end
    chk(lat == 1, $sformatf("check %0d cycles after the code's cycle ended, expected 1", lat));
    repeat (3) @(negedge clk);
  endtask

  initial begin
    n_done = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    make_xbar();
    run_op(-1, -1);
    chk(n_valid == IN_BITS && n_err == 0, $sformatf("clean op: %0d checks, %0d errors", n_valid, n_err));
    chk(last_err_op == 0, "clean op passes");
    run_op(5, 77);
    chk(n_err == 1, $sformatf("data code error: %0d reads flagged, expected 1", n_err));
    chk(last_err_op == 1, "op error flagged");
    run_op(-1, -1);
    chk(n_err == 0 && last_err_op == 0, "error flag cleared by next op");
    run_op(15, DATA_COLS + 2);
    chk(n_err == 1 && last_err_op == 1, "sum code error flagged on the last read");
    // a crossbar cell flips: every read whose input bit on that row is 1 sees it
    begin
      int exp_err = 0;
      cells[40][3] = cells[40][3] ^ 2'b01;
      for (int b = 0; b < IN_BITS; b++) exp_err += int'(x[40][b]);
      run_op(-1, -1);
      chk(n_err == exp_err, $sformatf("cell flip: %0d reads flagged, expected %0d", n_err, exp_err));
    end
    chk(n_done == 5, "five operations completed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
