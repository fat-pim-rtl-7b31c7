// tb_xbar_array: programs random word lines into the crossbar model, reads
// with random word-line bits and compares every bit-line value with a sum
// computed here from the tb's own copy of the cells. Also checks the read and
// write latencies and the cell-overwrite fault hook.
module tb_xbar_array;
  import fatpim_pkg::*;
  localparam int RL = 6, WL = 5;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic prog_en = 0, read_start = 0, flt_en = 0;
  logic [6:0] prog_row = 0, flt_row = 0;
  logic [7:0] flt_col = 0;
  logic [1:0] flt_val = 0;
  logic [NUM_BL-1:0][1:0] prog_cells = '0;
  logic [ROWS-1:0] wl_bits = '0;
  logic prog_busy, read_done;
  logic [NUM_BL-1:0][BL_BITS-1:0] bl_val;
  logic [1:0] ref_cell [ROWS][NUM_BL];

  xbar_array #(.READ_LAT(RL), .WRITE_LAT(WL)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic do_read(input logic [ROWS-1:0] bits);
    int n;
    @(negedge clk); wl_bits = bits; read_start = 1;
    @(negedge clk); read_start = 0;
    n = 1;
    while (!read_done) begin @(negedge clk); n++; end
    chk(n == RL, $sformatf("read latency %0d, expected %0d", n, RL));
    for (int j = 0; j < NUM_BL; j++) begin
      int s = 0;
      for (int i = 0; i < ROWS; i++) if (bits[i]) s += ref_cell[i][j];
      chk(bl_val[j] == BL_BITS'(s), $sformatf("bit line %0d = %0d, expected %0d", j, bl_val[j], s));
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      int n;
      @(negedge clk);
      for (int j = 0; j < NUM_BL; j++) begin
        prog_cells[j] = 2'($urandom);
        ref_cell[r][j] = prog_cells[j];
      end
      prog_row = 7'(r); prog_en = 1;
      @(negedge clk); prog_en = 0;
      n = 0;
      while (prog_busy) begin @(negedge clk); n++; end
      if (r < 4) chk(n == WL, $sformatf("write busy %0d cycles, expected %0d", n, WL));
    end
    do_read('1);
    do_read('0);
    for (int k = 0; k < 6; k++) do_read({$urandom, $urandom, $urandom, $urandom});
    // soft error: one data cell and one sum cell change
    @(negedge clk); flt_en = 1; flt_row = 7'd9; flt_col = 8'd17; flt_val = ~ref_cell[9][17];
    ref_cell[9][17] = ~ref_cell[9][17];
    @(negedge clk); flt_row = 7'd100; flt_col = 8'd131; flt_val = ~ref_cell[100][131];
    ref_cell[100][131] = ~ref_cell[100][131];
    @(negedge clk); flt_en = 0;
    do_read('1);
    do_read({$urandom, $urandom, $urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
