// tb_fatpim_chip: end-to-end test of the chip at a reduced size (2 tiles of
// 1 IMA, 8192-word eDRAM, 16-cycle reads, 8-cycle writes) driven only through
// the host bus of each tile, plus the fault-injection hooks.
//
// The tb writes random 16-bit weights into the eDRAM of tile 0, programs six
// crossbars of IMA 0 and then runs inference commands, each checked against
// a matrix-vector product computed here, with the results read back from the
// eDRAM through the host bus. Scenarios and the mechanism each one must show:
//   clean 6-crossbar infer   ADC sharing (a crossbar waits for a channel),
//                            S&H hold (a sample waits in the S&H)
//   ADC glitch during infer  sum-check detection, re-program, re-run, correct
//                            results and no error
//   single cell upset        detection, re-program restores it, re-run passes
//   stuck cell               re-run fails: crossbar marked faulty, error, irq;
//                            later commands skip it
//   1-bit eDRAM flip         ECC corrects, results still exact
//   2-bit eDRAM flip         ECC uncorrectable: command ends with error
// Tile 1 programs and runs one crossbar at the same time to show tiles are
// independent. Each mechanism is counted; one that never happened counts as
// a failure.
module tb_fatpim_chip;
  import fatpim_pkg::*;
  localparam int NT = 2, NI = 1, EW = 8192, RL = 16, WL = 8;
  localparam logic [31:0] MEM = 32'h8000_0000;
  localparam int WBASE = 0, IBASE = 4096, OBASE = 6144;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  host_req_t [NT-1:0] host_req;
  logic [NT-1:0] host_ready, host_rvalid, irq;
  logic [NT-1:0][63:0] host_rdata;
  logic [NT-1:0] flt_en = '0, glitch_en = '0, eflip_en = '0;
  logic [3:0] flt_ima = 0, flt_xbar = 0, glitch_ima = 0;
  logic [6:0] flt_row = 0;
  logic [7:0] flt_col = 0;
  logic [1:0] flt_val = 0, glitch_adc = 0;
  logic [8:0] glitch_mask = 0;
  eaddr_t eflip_addr = '0;
  logic [71:0] eflip_mask = '0;

  fatpim_chip #(.NTILE(NT), .NIMA(NI), .EDRAM_WORDS(EW), .READ_LAT(RL), .WRITE_LAT(WL)) dut (.*);

  // ---- mechanism probes (IMA 0 of tile 0)
  int n_stall = 0, n_hold = 0, n_irq = 0;
  logic irq_q = 0;
  logic [11:0] p_req, p_bound, p_full, p_rel;
  for (genvar x = 0; x < 12; x++) begin : g_probe
    assign p_full[x] = dut.g_tile[0].u_tile.g_ima[0].u_ima.g_xbar[x].u_sh.full;
    assign p_rel[x]  = dut.g_tile[0].u_tile.g_ima[0].u_ima.g_xbar[x].u_sh.release_i;
  end
  assign p_req   = dut.g_tile[0].u_tile.g_ima[0].u_ima.u_arb.req;
  assign p_bound = dut.g_tile[0].u_tile.g_ima[0].u_ima.u_arb.bound;
  always @(posedge clk) if (rst_n) begin
    if ((p_req & ~p_bound) != '0) n_stall++;
    if ((p_full & ~p_rel) != '0) n_hold++;
    if (irq[0] && !irq_q) n_irq++;
    irq_q <= irq[0];
  end

  logic [15:0] w [NT][12][ROWS][NCOL];
  logic [15:0] xin [ROWS];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- host bus
  initial host_req = '0;
  task automatic hwrite(input int t, input logic [31:0] a, input logic [63:0] d);
    @(negedge clk);
    host_req[t] = '{valid: 1'b1, we: 1'b1, addr: a, wdata: d};
    #0.5;
    while (!host_ready[t]) begin @(negedge clk); #0.5; end
    @(negedge clk);
    host_req[t] = '0;
  endtask

  task automatic hread(input int t, input logic [31:0] a, output logic [63:0] d);
    bit got;
    @(negedge clk);
    host_req[t] = '{valid: 1'b1, we: 1'b0, addr: a, wdata: '0};
    #0.5;
    while (!host_ready[t]) begin @(negedge clk); #0.5; end
    got = host_rvalid[t];
    d = host_rdata[t];
    @(negedge clk);
    host_req[t] = '0;
    if (!got) begin
      #0.5;
      while (!host_rvalid[t]) begin @(negedge clk); #0.5; end
      d = host_rdata[t];
    end
  endtask

  task automatic wait_cmd(input int t, output logic err);
    logic [63:0] s;
    int n = 0;
    do begin
      repeat (20) @(negedge clk);
      hread(t, 3, s);
      n++;
    end while (s[0] && n < 100000);
    err = s[2];
    chk(s[1], $sformatf("tile %0d command reports done (status %h) at %0t", t, s, $time));
  endtask

  function automatic logic [31:0] cmd_word(input int op, ima, xbar, logic [11:0] mask);
    return 32'(op) | (32'(ima) << 2) | (32'(xbar) << 6) | (32'(mask) << 10);
  endfunction

  task automatic load_weights(input int t, input int x);
    for (int r = 0; r < ROWS; r++)
      for (int k = 0; k < 4; k++)
        hwrite(t, MEM | 32'(WBASE + 512 * x + 4 * r + k),
               {w[t][x][r][4*k+3], w[t][x][r][4*k+2], w[t][x][r][4*k+1], w[t][x][r][4*k]});
  endtask

  task automatic program_xbar(input int t, input int x);
    logic e;
    hwrite(t, 1, 64'(WBASE + 512 * x));
    hwrite(t, 0, 64'(cmd_word(1, 0, x, '0)));
    wait_cmd(t, e);
    chk(!e, $sformatf("tile %0d program xbar %0d without error", t, x));
  endtask

  task automatic load_inputs(input int t);
    for (int i = 0; i < ROWS; i++) xin[i] = 16'($urandom);
    for (int k = 0; k < 32; k++)
      hwrite(t, MEM | 32'(IBASE + k), {xin[4*k+3], xin[4*k+2], xin[4*k+1], xin[4*k]});
    for (int k = 0; k < 12 * 16; k++) hwrite(t, MEM | 32'(OBASE + k), 64'hdead_beef_dead_beef);
  endtask

  task automatic infer(input int t, input logic [11:0] mask, output logic err);
    hwrite(t, 1, 64'(IBASE));
    hwrite(t, 2, 64'(OBASE));
    hwrite(t, 0, 64'(cmd_word(2, 0, 0, mask)));
    wait_cmd(t, err);
  endtask

  task automatic check_xbar(input int t, input int x, output int bad);
    logic [63:0] d;
    bad = 0;
    for (int c = 0; c < NCOL; c++) begin
      longint unsigned e = 0;
      for (int i = 0; i < ROWS; i++) e += longint'(w[t][x][i][c]) * longint'(xin[i]);
      hread(t, MEM | 32'(OBASE + 16 * x + c), d);
      chk(d == 64'(e[RES_BITS-1:0]), $sformatf("tile %0d xbar %0d col %0d: %h expected %h", t, x, c, d, e));
      if (d != 64'(e[RES_BITS-1:0])) bad++;
    end
  endtask


  int n_detect = 0, n_reprog = 0, n_rerun = 0, n_perm = 0, n_ecc_corr = 0, n_ecc_unc = 0;
  logic [63:0] r_det, r_rep, r_fau, r_ec, r_eu, r_map;

  task automatic read_counters();
    hread(0, 4, r_det); hread(0, 5, r_rep); hread(0, 6, r_fau);
    hread(0, 7, r_ec);  hread(0, 8, r_eu);  hread(0, 16, r_map);
  endtask

  initial begin
    logic e;
    int bad;
    logic [63:0] d0, d1;
    for (int t = 0; t < NT; t++)
      for (int x = 0; x < 12; x++)
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < NCOL; c++) w[t][x][r][c] = 16'($urandom);
    repeat (4) @(negedge clk);
    rst_n = 1;

    // tile 1: one crossbar, programmed and run concurrently with tile 0 setup
    fork
      begin
        load_weights(1, 0);
        program_xbar(1, 0);
      end
      begin
        for (int x = 0; x < 6; x++) load_weights(0, x);
        for (int x = 0; x < 6; x++) program_xbar(0, x);
      end
    join

    // 1. clean inference on six crossbars
    load_inputs(0);
    infer(0, 12'h03f, e);
    chk(!e, "clean inference without error");
    for (int x = 0; x < 6; x++) check_xbar(0, x, bad);
    read_counters();
    chk(r_det == 0 && r_rep == 0, "no detection on a clean run");

    // 2. ADC glitch: detect, re-program, re-run, correct
    load_inputs(0);
    fork
      infer(0, 12'h03f, e);
      begin
        repeat (600) @(negedge clk);
        glitch_en[0] = 1; glitch_ima = 0; glitch_adc = 1; glitch_mask = 9'h010;
        @(negedge clk);
        glitch_en[0] = 0;
      end
    join
    read_counters();
    chk(!e && r_det == 1 && r_rep == 1, $sformatf("glitch: err=%0b detect=%0d reprog=%0d", e, r_det, r_rep));
    begin
      int tot = 0;
      for (int x = 0; x < 6; x++) begin check_xbar(0, x, bad); tot += bad; end
      if (!e && r_det >= 1 && r_rep >= 1 && tot == 0) n_rerun++;
    end

    // 3. one-cell upset on xbar 4: re-program restores it
    load_inputs(0);
    @(negedge clk);
    flt_en[0] = 1; flt_ima = 0; flt_xbar = 4; flt_row = 7'd33; flt_col = 8'd41;
    flt_val = ~w[0][4][33][5][3:2];
    @(negedge clk);
    flt_en[0] = 0;
    xin[33] = 16'hffff;
    hwrite(0, MEM | 32'(IBASE + 8), {xin[35], xin[34], xin[33], xin[32]});
    infer(0, 12'h03f, e);
    read_counters();
    chk(!e && r_det == 2 && r_rep == 2, $sformatf("upset: err=%0b detect=%0d reprog=%0d", e, r_det, r_rep));
    begin
      int tot = 0;
      for (int x = 0; x < 6; x++) begin check_xbar(0, x, bad); tot += bad; end
      if (!e && tot == 0) n_rerun++;
    end

    // 4. stuck cell on xbar 3: marked faulty, error, irq
    load_inputs(0);
    xin[90] = 16'hffff;
    hwrite(0, MEM | 32'(IBASE + 22), {xin[91], xin[90], xin[89], xin[88]});
    @(negedge clk);
    flt_ima = 0; flt_xbar = 3; flt_row = 7'd90; flt_col = 8'd130;   // sum bit line
    flt_val = 2'(~(row_sum({w[0][3][90][15], w[0][3][90][14], w[0][3][90][13], w[0][3][90][12],
                           w[0][3][90][11], w[0][3][90][10], w[0][3][90][9],  w[0][3][90][8],
                           w[0][3][90][7],  w[0][3][90][6],  w[0][3][90][5],  w[0][3][90][4],
                           w[0][3][90][3],  w[0][3][90][2],  w[0][3][90][1],  w[0][3][90][0]}) >> 6));
    flt_en[0] = 1;
    infer(0, 12'h03f, e);
    flt_en[0] = 0;
    read_counters();
    chk(e, "stuck cell ends the command with an error");
    chk(r_fau == 1 && r_map[11:0] == 12'h008, $sformatf("faulty=%0d map=%h", r_fau, r_map[11:0]));
    chk(n_irq == 1, $sformatf("irq pulses %0d", n_irq));
    hread(0, 3, d0);
    chk(d0[3], "irq pending in STATUS");
    hwrite(0, 3, 64'h8);
    hread(0, 3, d0);
    chk(!d0[3], "irq cleared");
    if (e && r_fau == 1 && n_irq == 1) n_perm++;
    for (int x = 0; x < 6; x++) if (x != 3) check_xbar(0, x, bad);

    // 4b. the faulty crossbar receives no further operations
    load_inputs(0);
    infer(0, 12'h03f, e);
    chk(!e, "command without the faulty crossbar passes");
    for (int x = 0; x < 6; x++) if (x != 3) check_xbar(0, x, bad);
    hread(0, MEM | 32'(OBASE + 48), d0);
    chk(d0 == 64'hdead_beef_dead_beef, "faulty crossbar not written");

    // 5. one-bit eDRAM flip on an input word: corrected
    load_inputs(0);
    @(negedge clk);
    eflip_en[0] = 1; eflip_addr = eaddr_t'(IBASE + 5); eflip_mask = 72'h1 << 37;
    @(negedge clk);
    eflip_en[0] = 0;
    infer(0, 12'h007, e);
    read_counters();
    chk(!e && r_ec == 1, $sformatf("ECC correct: err=%0b corr=%0d", e, r_ec));
    bad = 0;
    for (int x = 0; x < 3; x++) begin int b; check_xbar(0, x, b); bad += b; end
    if (!e && r_ec >= 1 && bad == 0) n_ecc_corr++;
    // host read of a flipped word also returns the corrected data
    hwrite(0, MEM | 32'(IBASE + 40), 64'h0123_4567_89ab_cdef);
    @(negedge clk);
    eflip_en[0] = 1; eflip_addr = eaddr_t'(IBASE + 40); eflip_mask = 72'h1 << 70;
    @(negedge clk);
    eflip_en[0] = 0;
    hread(0, MEM | 32'(IBASE + 40), d1);
    chk(d1 == 64'h0123_4567_89ab_cdef, "host read corrected");

    // 6. two-bit flip: uncorrectable
    load_inputs(0);
    @(negedge clk);
    eflip_en[0] = 1; eflip_addr = eaddr_t'(IBASE + 9); eflip_mask = (72'h1 << 3) | (72'h1 << 50);
    @(negedge clk);
    eflip_en[0] = 0;
    infer(0, 12'h007, e);
    read_counters();
    chk(e && r_eu >= 1, $sformatf("ECC uncorrectable: err=%0b unc=%0d", e, r_eu));
    if (e && r_eu >= 1) n_ecc_unc++;

    // tile 1 runs its crossbar
    for (int i = 0; i < ROWS; i++) xin[i] = 16'($urandom);
    for (int k = 0; k < 32; k++)
      hwrite(1, MEM | 32'(IBASE + k), {xin[4*k+3], xin[4*k+2], xin[4*k+1], xin[4*k]});
    infer(1, 12'h001, e);
    chk(!e, "tile 1 infer");
    check_xbar(1, 0, bad);

    n_detect = int'(r_det); n_reprog = int'(r_rep);
    $display("mechanisms: stall=%0d hold=%0d detect=%0d reprog=%0d rerun=%0d perm=%0d ecc_corr=%0d ecc_unc=%0d",
             n_stall, n_hold, n_detect, n_reprog, n_rerun, n_perm, n_ecc_corr, n_ecc_unc);
    chk(n_stall > 0, "ADC sharing stall seen");
    chk(n_hold > 0, "S&H hold seen");
    chk(n_detect > 0, "sum-check detection seen");
    chk(n_reprog > 0, "re-program seen");
    chk(n_rerun > 0, "successful re-run seen");
    chk(n_perm > 0, "permanent fault with irq seen");
    chk(n_ecc_corr > 0, "ECC correction seen");
    chk(n_ecc_unc > 0, "ECC uncorrectable seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
