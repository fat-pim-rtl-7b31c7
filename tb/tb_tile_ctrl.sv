// tb_tile_ctrl: the tile controller with stand-ins for the preparator (done
// a random few cycles after start, optional abort) and for one IMA's status
// (an operation on the preparator's mask keeps busy for a while, then sets
// done, and sets err on crossbars told to fail). Checks:
//   clean infer      every result word written once, to arg1 + 16*xbar + col
//   one bad run      detection counted, the crossbar re-programmed from the
//                    base its PROGRAM command gave, re-run alone, no error
//   always bad       marked faulty after the re-run, error, irq pulse
//   next infer       the faulty crossbar is left out of the mask
//   ECC abort        the command ends with an error
module tb_tile_ctrl;
  import fatpim_pkg::*;
  localparam int NI = 2;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid = 0, busy, cmd_done, cmd_err, irq;
  tile_cmd_t cmd = '0;
  logic [31:0] cnt_detect, cnt_reprog, cnt_faulty;
  logic [NI-1:0][11:0] fault_map;
  logic prep_start, prep_mode, prep_done = 0, prep_abort = 0;
  logic [3:0] prep_ima, prep_xbar, rd_ima, rd_xbar;
  logic [11:0] prep_mask, rd_busy, rd_done, rd_err;
  eaddr_t prep_base, wr_addr;
  logic [NCOL-1:0][RES_BITS-1:0] rd_res;
  logic wr_en;
  logic [63:0] wr_data;

  tile_ctrl #(.NIMA(NI)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- preparator and IMA stand-ins
  int fail_runs [12];      // runs that still fail, per crossbar of IMA 1
  bit abort_next = 0;
  logic [11:0] st_busy = 0, st_done = 0, st_err = 0;
  int n_prog [12], n_writes [12][NCOL], n_irq = 0;
  eaddr_t prog_base [12];
  logic [11:0] last_mask;
  always @(posedge clk) if (rst_n) begin
    if (irq) n_irq++;
    if (wr_en) begin
      int x, c;
      x = (int'(wr_addr) - 1000) / 16; c = (int'(wr_addr) - 1000) % 16;
      if (x >= 0 && x < 12) begin
        n_writes[x][c]++;
        chk(wr_data == 64'({x[3:0], 4'd0, c[7:0], 23'd7}), $sformatf("result data %h at %0d", wr_data, wr_addr));
      end else chk(0, "write outside the result block");
    end
  end
  initial begin
    forever begin
      @(negedge clk);
      if (prep_start) begin
        logic m; logic [11:0] mk; logic [3:0] xb; eaddr_t b; bit ab;
        m = prep_mode; mk = prep_mask; xb = prep_xbar; b = prep_base;
        ab = abort_next; abort_next = 0;
        repeat ($urandom_range(3, 12)) @(negedge clk);
        prep_done = 1; prep_abort = ab;
        @(negedge clk);
        prep_done = 0; prep_abort = 0;
        if (!m) begin n_prog[xb]++; prog_base[xb] = b; end
        else if (!ab) begin
          last_mask = mk;
          repeat (2) @(negedge clk);
          st_busy |= mk; st_done &= ~mk; st_err &= ~mk;
          repeat ($urandom_range(20, 60)) @(negedge clk);
          for (int x = 0; x < 12; x++) if (mk[x]) begin
            st_busy[x] = 0; st_done[x] = 1;
            if (fail_runs[x] > 0) begin st_err[x] = 1; fail_runs[x]--; end
          end
        end
      end
    end
  end
  assign rd_busy = (rd_ima == 1) ? st_busy : '0;
  assign rd_done = (rd_ima == 1) ? st_done : '0;
  assign rd_err  = (rd_ima == 1) ? st_err  : '0;
  always_comb for (int c = 0; c < NCOL; c++) rd_res[c] = RES_BITS'({rd_xbar, 4'(0), 8'(c), 23'd7});

  task automatic command(input cmd_op_e op, input int xb, input logic [11:0] mk, input eaddr_t a0,
                         output logic e);
    @(negedge clk);
    cmd = '0; cmd.op = op; cmd.ima = 1; cmd.xbar = 4'(xb); cmd.xbar_mask = mk; cmd.arg0 = a0; cmd.arg1 = 1000;
    cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    while (!cmd_done) @(negedge clk);
    e = cmd_err;
    @(negedge clk);
  endtask

  task automatic clear_writes();
    for (int x = 0; x < 12; x++) begin
      for (int c = 0; c < NCOL; c++) n_writes[x][c] = 0;
      n_prog[x] = 0;
    end
  endtask

  function automatic bit writes_ok(input logic [11:0] mk);
    for (int x = 0; x < 12; x++)
      for (int c = 0; c < NCOL; c++)
        if (n_writes[x][c] != (mk[x] ? 1 : 0)) return 0;
    return 1;
  endfunction

  initial begin
    logic e;
    for (int x = 0; x < 12; x++) fail_runs[x] = 0;
    clear_writes();
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int x = 0; x < 4; x++) begin
      command(CMD_PROGRAM, x, '0, eaddr_t'(100 * x + 8), e);
      chk(!e && n_prog[x] == 1 && prog_base[x] == eaddr_t'(100 * x + 8), $sformatf("program xbar %0d", x));
    end
    // clean
    clear_writes();
    command(CMD_INFER, 0, 12'h00f, 500, e);
    chk(!e && writes_ok(12'h00f), "clean infer writes 64 results");
    chk(cnt_detect == 0 && cnt_reprog == 0, "no recovery on a clean run");
    // one bad run on xbar 2
    clear_writes();
    fail_runs[2] = 1;
    command(CMD_INFER, 0, 12'h00f, 500, e);
    chk(!e, "transient failure recovered");
    chk(writes_ok(12'h00f), "all results written once");
    chk(cnt_detect == 1 && cnt_reprog == 1 && n_prog[2] == 1 && prog_base[2] == eaddr_t'(208), "xbar 2 re-programmed from its base");
    chk(last_mask == 12'h004, "re-run on the failed crossbar only");
    chk(n_irq == 0, "no irq");
    // always bad on xbar 1
    clear_writes();
    fail_runs[1] = 99;
    command(CMD_INFER, 0, 12'h00f, 500, e);
    chk(e, "permanent failure reported");
    chk(fault_map[1] == 12'h002 && cnt_faulty == 1, "xbar 1 marked faulty");
    chk(n_irq == 1, "irq pulsed once");
    chk(writes_ok(12'h00d), "healthy crossbars written, faulty one not");
    chk(cnt_detect == 3 && cnt_reprog == 2, $sformatf("detect %0d reprog %0d", cnt_detect, cnt_reprog));
    // faulty crossbar skipped
    clear_writes();
    command(CMD_INFER, 0, 12'h00f, 500, e);
    chk(!e && last_mask == 12'h00d && writes_ok(12'h00d), "faulty crossbar left out");
    // ECC abort in the preparator
    abort_next = 1;
    command(CMD_INFER, 0, 12'h00f, 500, e);
    chk(e && n_irq == 2, "ECC abort ends with an error and irq");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
