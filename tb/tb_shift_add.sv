// tb_shift_add: feeds the ADC codes of two complete operations (16 reads of
// 133 bit lines each, computed here from a random weight matrix and random
// inputs) and compares the 16 column results with the matrix-vector products
// computed directly from the 16-bit weights and inputs.
module tb_shift_add;
  import fatpim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  adc_tag_t tag = '0;
  logic [BL_BITS-1:0] code = '0;
  logic [NCOL-1:0][RES_BITS-1:0] result;
  logic [W_BITS-1:0]  w [ROWS][NCOL];
  logic [IN_BITS-1:0] x [ROWS];

  shift_add dut (.*);

  function automatic int unsigned blv(int b, int j);
    int unsigned s = 0;
    for (int i = 0; i < ROWS; i++)
      if (x[i][b]) s += (j < DATA_COLS) ? int'(w[i][j / SLICES][2 * (j % SLICES) +: 2]) : 0;
    return s;
  endfunction

  task automatic run_op();
    for (int b = 0; b < IN_BITS; b++)
      for (int j = 0; j < NUM_BL; j++) begin
        @(negedge clk);
        tag = '0; tag.valid = 1; tag.bl = 8'(j); tag.bitpos = 4'(b);
        tag.first = (b == 0 && j == 0); tag.last_rd = (j == NUM_BL - 1);
        tag.last_op = tag.last_rd && (b == IN_BITS - 1);
        code = (j < DATA_COLS) ? BL_BITS'(blv(b, j)) : BL_BITS'($urandom);
        if (j % 37 == 5) begin            // a bubble between codes
          @(negedge clk); tag.valid = 0;
        end
      end
    @(negedge clk); tag = '0;
    @(negedge clk);
    for (int c = 0; c < NCOL; c++) begin
      longint unsigned e = 0;
      for (int i = 0; i < ROWS; i++) e += longint'(w[i][c]) * longint'(x[i]);
      checks++;
      if (result[c] != RES_BITS'(e)) begin
        failures++; $display("FAIL: column %0d = %0d expected %0d", c, result[c], e);
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int op = 0; op < 2; op++) begin
      for (int i = 0; i < ROWS; i++) begin
        x[i] = (op == 1) ? '1 : IN_BITS'($urandom);
        for (int c = 0; c < NCOL; c++) w[i][c] = (op == 1) ? '1 : W_BITS'($urandom);
      end
      run_op();
    end
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
