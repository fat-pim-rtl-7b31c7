// tb_ima: one IMA with the default read latency. The tb programs six
// crossbars with random 16-bit weights and their word-line sums (computed
// here), then:
//  1. runs one operation on one crossbar and checks its 16 results against
//     the matrix-vector product and its latency against READ_LAT plus 16
//     conversions of 133 bit lines;
//  2. runs one input vector on six crossbars at once, so two must wait for
//     one of the four ADC channels, and checks all results and that the last
//     two finish about one operation later;
//  3. overwrites one data cell and checks that only that crossbar's
//     operation is flagged;
//  4. glitches one ADC code and checks that the operation is flagged.
module tb_ima;
  import fatpim_pkg::*;
  localparam int WL = 16;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid = 0, req_ready, chk_fail;
  ima_req_t req = '0;
  logic [11:0] busy, done, err;
  logic [3:0] rd_xbar = 0;
  logic [NCOL-1:0][RES_BITS-1:0] rd_res;
  logic flt_en = 0;
  logic [3:0] flt_xbar = 0;
  logic [6:0] flt_row = 0;
  logic [7:0] flt_col = 0;
  logic [1:0] flt_val = 0;
  logic [3:0][8:0] adc_glitch = '0;

  ima #(.WRITE_LAT(WL)) dut (.*);

  logic [15:0] w [6][ROWS][NCOL];
  logic [15:0] xin [ROWS];
  int t_done [12];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(input ima_req_t r);
    @(negedge clk);
    req = r; req_valid = 1;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk); req_valid = 0;
  endtask

  task automatic program_all();
    for (int r = 0; r < ROWS; r++)
      for (int x = 0; x < 6; x++) begin
        ima_req_t q;
        int unsigned s;
        q = '0; q.kind = REQ_PROG; q.xbar = 4'(x); q.row = 7'(r);
        s = 0;
        for (int c = 0; c < NCOL; c++)
          for (int k = 0; k < 8; k++) begin
            q.cells[8*c + k] = w[x][r][c][2*k +: 2];
            s += w[x][r][c][2*k +: 2];
          end
        for (int k = 0; k < SUM_COLS; k++) q.cells[DATA_COLS + k] = 2'(s >> (2*k));
        send(q);
      end
    while (busy != '0) @(negedge clk);
  endtask

  task automatic check_results(input int x);
    rd_xbar = 4'(x); #1;
    for (int c = 0; c < NCOL; c++) begin
      longint unsigned e = 0;
      for (int i = 0; i < ROWS; i++) e += longint'(w[x][i][c]) * longint'(xin[i]);
      chk(rd_res[c] == RES_BITS'(e), $sformatf("xbar %0d column %0d: %0d expected %0d", x, c, rd_res[c], e));
    end
  endtask

  // op on a mask; records when each crossbar's done rises
  task automatic run_op(input logic [11:0] mask, output int start_t);
    ima_req_t q;
    int t;
    q = '0; q.kind = REQ_OP; q.xbar_mask = mask;
    for (int i = 0; i < ROWS; i++) q.vec[i] = xin[i];
    for (int x = 0; x < 12; x++) t_done[x] = -1;
    @(negedge clk);
    req = q; req_valid = 1; #1;
    while (!req_ready) begin @(negedge clk); #1; end
    start_t = 0;
    @(negedge clk); req_valid = 0;
    t = 1;
    while ((done & mask) != mask) begin
      @(negedge clk); t++;
      for (int x = 0; x < 12; x++) if (done[x] && t_done[x] < 0) t_done[x] = t;
      if (t > 20000) break;
    end
  endtask

  initial begin
    int st, single;
    for (int x = 0; x < 6; x++)
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < NCOL; c++) w[x][r][c] = 16'($urandom);
    for (int i = 0; i < ROWS; i++) xin[i] = 16'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;
    program_all();

    // 1. single operation, latency
    run_op(12'h001, st);
    single = t_done[0];
    chk(!err[0], "clean operation passes the sum check");
    check_results(0);
    chk(single >= READ_LAT + IN_BITS * NUM_BL && single <= READ_LAT + IN_BITS * NUM_BL + 8,
        $sformatf("operation took %0d cycles, expected %0d + a few", single, READ_LAT + IN_BITS * NUM_BL));

    // 2. six crossbars share four ADC channels
    for (int i = 0; i < ROWS; i++) xin[i] = 16'($urandom);
    run_op(12'h03f, st);
    for (int x = 0; x < 6; x++) begin
      chk(!err[x], $sformatf("xbar %0d passes", x));
      check_results(x);
    end
    begin
      int early = 0, late = 0;
      for (int x = 0; x < 6; x++)
        if (t_done[x] <= single + 4) early++;
        else if (t_done[x] >= 2 * single - READ_LAT - 8) late++;
      chk(early == 4 && late == 2, $sformatf("%0d finished at once, %0d waited for a channel", early, late));
    end

    // 3. one data cell of crossbar 2 changes
    for (int i = 0; i < ROWS; i++) xin[i] = 16'hffff;
    @(negedge clk);
    flt_en = 1; flt_xbar = 2; flt_row = 10; flt_col = 20; flt_val = ~w[2][10][2][9:8];
    @(negedge clk); flt_en = 0;
    run_op(12'h03f, st);
    for (int x = 0; x < 6; x++)
      chk(err[x] == (x == 2), $sformatf("cell fault flagged on xbar %0d only (err=%0b)", x, err[x]));

    // 4. an ADC glitch during a clean crossbar's operation
    run_op(12'h000, st);   // no-op keeps the timing helper simple
    fork
      run_op(12'h002, st);
      begin
        repeat (600) @(negedge clk);
        adc_glitch[0] = 9'h004;
        @(negedge clk);
        adc_glitch[0] = '0;
      end
    join
    chk(err[1], "ADC glitch flagged");
    run_op(12'h002, st);
    chk(!err[1], "next operation clean again");
    check_results(1);
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
