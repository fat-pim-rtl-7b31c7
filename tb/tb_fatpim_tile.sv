// tb_fatpim_tile: one tile with 2 IMAs, a 4096-word eDRAM, 16-cycle reads
// and 8-cycle writes, driven through its host bus. It writes random weights
// into the eDRAM, programs crossbar 5 of IMA 1, writes an input vector and
// runs an inference, checking the 16 results (read back from the eDRAM)
// against a matrix-vector product computed here and the command latency
// against one read plus 16 conversions of 133 bit lines plus the fetch and
// write-back. It then repeats the inference with an ADC glitch and checks
// that the tile detected it, re-programmed the crossbar, re-ran it and still
// returned exact results without an error.
module tb_fatpim_tile;
  import fatpim_pkg::*;
  localparam int NT = 1, NI = 2, EW = 4096, RL = 16, WL = 8;
  localparam logic [31:0] MEM = 32'h8000_0000;
  localparam int WBASE = EW - 1024, IBASE = EW - 512, OBASE = EW - 256;

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

  fatpim_tile #(.NIMA(NI), .EDRAM_WORDS(EW), .READ_LAT(RL), .WRITE_LAT(WL)) dut (
    .clk, .rst_n, .host_req(host_req[0]), .host_ready(host_ready[0]), .host_rvalid(host_rvalid[0]),
    .host_rdata(host_rdata[0]), .irq(irq[0]), .flt_en(flt_en[0]), .flt_ima, .flt_xbar, .flt_row, .flt_col,
    .flt_val, .glitch_en(glitch_en[0]), .glitch_ima, .glitch_adc, .glitch_mask, .eflip_en(eflip_en[0]),
    .eflip_addr, .eflip_mask);

  logic [15:0] w [NT][ROWS][NCOL];
  logic [15:0] xin [NT][ROWS];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

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

  // polls STATUS; returns the cycles from the command write to the poll
  // that saw the command done
  task automatic wait_cmd(input int t, output logic err, output int cycles);
    logic [63:0] s;
    realtime t0;
    t0 = $realtime;
    do begin
      hread(t, 3, s);
      cycles = int'(($realtime - t0) / 2.0);
    end while (s[0] && cycles < 400000);
    err = s[2];
    chk(s[1], $sformatf("tile %0d command done", t));
  endtask

  task automatic run_tile(input int t, input int ima, input int x);
    logic e;
    int cyc;
    logic [63:0] d;
    for (int r = 0; r < ROWS; r++)
      for (int k = 0; k < 4; k++)
        hwrite(t, MEM | 32'(WBASE + 4 * r + k),
               {w[t][r][4*k+3], w[t][r][4*k+2], w[t][r][4*k+1], w[t][r][4*k]});
    hwrite(t, 1, 64'(WBASE));
    hwrite(t, 0, 64'(1 | (ima << 2) | (x << 6)));
    wait_cmd(t, e, cyc);
    chk(!e, "program without error");
    $display("tile %0d program: %0d cycles", t, cyc);
    chk(cyc >= (ROWS - 2) * WL && cyc <= ROWS * WL + 400, $sformatf("program took %0d cycles, expected about %0d", cyc, (ROWS - 2) * WL));
    infer_tile(t, ima, x, 0);
  endtask

  task automatic infer_tile(input int t, input int ima, input int x, input bit glitch);
    logic e;
    int cyc;
    logic [63:0] d;
    for (int k = 0; k < 32; k++)
      hwrite(t, MEM | 32'(IBASE + k), {xin[t][4*k+3], xin[t][4*k+2], xin[t][4*k+1], xin[t][4*k]});
    hwrite(t, 1, 64'(IBASE));
    hwrite(t, 2, 64'(OBASE));
    hwrite(t, 0, 64'(2 | (ima << 2) | ((1 << x) << 10)));
    if (glitch) fork
      begin
        repeat (700) @(negedge clk);
        glitch_en[t] = 1; glitch_ima = 4'(ima); glitch_adc = 0; glitch_mask = 9'h002;
        @(negedge clk);
        glitch_en[t] = 0;
      end
    join_none
    wait_cmd(t, e, cyc);
    chk(!e, "infer without error");
    $display("tile %0d infer: %0d cycles", t, cyc);
    if (glitch) begin
      hread(t, 4, d); chk(d == 1, $sformatf("one detection (%0d)", d));
      hread(t, 5, d); chk(d == 1, $sformatf("one re-program (%0d)", d));
    end else chk(cyc >= RL + IN_BITS * NUM_BL && cyc <= RL + IN_BITS * NUM_BL + 2 * WL + 400,
        $sformatf("tile %0d infer took %0d cycles; operation alone is %0d", t, cyc, RL + IN_BITS * NUM_BL));
    for (int c = 0; c < NCOL; c++) begin
      longint unsigned ex = 0;
      for (int i = 0; i < ROWS; i++) ex += longint'(w[t][i][c]) * longint'(xin[t][i]);
      hread(t, MEM | 32'(OBASE + 16 * x + c), d);
      chk(d == 64'(ex[RES_BITS-1:0]), $sformatf("tile %0d col %0d: %h expected %h", t, c, d, ex));
    end
  endtask

  initial begin
    for (int t = 0; t < NT; t++) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < NCOL; c++) w[t][r][c] = 16'($urandom);
      for (int i = 0; i < ROWS; i++) xin[t][i] = 16'($urandom);
    end
    repeat (4) @(negedge clk);
    rst_n = 1;
    run_tile(0, 1, 5);
    for (int i = 0; i < ROWS; i++) xin[0][i] = 16'($urandom);
    infer_tile(0, 1, 5, 1);
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
