// tb_xbar_ctrl: runs operations against a tb model of the crossbar (fixed
// read latency) and of an S&H that the tb releases at chosen times. Checks
// that read b drives word line i with bit b of input i, that 16 reads are
// captured in order with the last one marked, that a finished read waits
// while the S&H is busy, that the next read starts right after a capture,
// that adc_req spans the operation until op_done, and that programming is
// passed on only while idle.
module tb_xbar_ctrl;
  import fatpim_pkg::*;
  localparam int RL = 10;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic op_start = 0, prog_req = 0, prog_busy = 0, read_done = 0, sh_free = 1, op_done = 0;
  logic [ROWS-1:0][IN_BITS-1:0] in_vec = '0;
  logic prog_en, read_start, sh_load, sh_last, adc_req, busy;
  logic [ROWS-1:0] wl_bits;
  logic [3:0] sh_bit;

  xbar_ctrl dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // crossbar model: read_done RL cycles after read_start, checks the bits
  int rd_timer = -1, n_reads = 0, n_loads = 0, hold_cycles = 0;
  logic [ROWS-1:0] exp_bits;
  always @(posedge clk) begin
    read_done <= 0;
    if (read_start) begin
      for (int i = 0; i < ROWS; i++) exp_bits[i] = in_vec[i][n_reads];
      chk(wl_bits == exp_bits, $sformatf("word-line bits of read %0d", n_reads));
      chk(rd_timer < 0, "read started while one is in flight");
      rd_timer <= RL - 1;
      n_reads <= n_reads + 1;
    end else if (rd_timer == 0) begin
      read_done <= 1;
      rd_timer <= -1;
    end else if (rd_timer > 0) rd_timer <= rd_timer - 1;
    if (sh_load) begin
      chk(sh_free, "load only when S&H free");
      chk(int'(sh_bit) == n_loads, $sformatf("captured bit %0d expected %0d", sh_bit, n_loads));
      chk(sh_last == (n_loads == IN_BITS - 1), "last flag");
      n_loads <= n_loads + 1;
    end
    if (!sh_free && busy) hold_cycles <= hold_cycles + 1;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < ROWS; i++) in_vec[i] = IN_BITS'($urandom);
    // programming while idle is passed on
    @(negedge clk); prog_req = 1; #1 chk(prog_en, "prog passed on when idle");
    @(negedge clk); prog_req = 0;
    // operation: S&H busy for 25 cycles after every load
    op_start = 1;
    @(negedge clk); op_start = 0;
    chk(adc_req && busy, "adc_req from start");
    prog_req = 1; #1 chk(!prog_en, "prog blocked during operation");
    @(negedge clk); prog_req = 0;
    while (n_loads < IN_BITS) begin
      @(negedge clk);
      if (sh_load) begin
        @(negedge clk); sh_free = 0;
        repeat (24) @(negedge clk);
        sh_free = 1;
      end
    end
    repeat (5) @(negedge clk);
    chk(n_reads == IN_BITS, $sformatf("%0d reads", n_reads));
    chk(hold_cycles > 0, "a finished read waited for the S&H");
    chk(adc_req, "adc_req held until op_done");
    op_done = 1;
    @(negedge clk); op_done = 0;
    chk(!adc_req && !busy, "idle after op_done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
