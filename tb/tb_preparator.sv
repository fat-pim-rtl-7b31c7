// tb_preparator: the preparator against an eDRAM model held here (64-bit
// words, ECC-encoded on the way out with the design's encoder, one-cycle
// read latency, optional bit flips) and a receiver with random backpressure.
// Checks: a PROGRAM job sends 128 REQ_PROG lines in order with the weight
// cells and the word-line sum split over the sum cells; an INFER job sends one
// REQ_OP with the 128 inputs and the mask; a one-bit flip is corrected and
// counted; a two-bit flip aborts the job without sending it.
module tb_preparator;
  import fatpim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, mode = 0, busy, done, ecc_abort, ecc_corr, ecc_uncorr;
  logic [3:0] ima = 0, xbar = 0;
  logic [XBARS_PER_IMA-1:0] xbar_mask = 0;
  eaddr_t base = 0, mem_addr;
  logic mem_en, req_valid, req_ready;
  logic [71:0] mem_rdata, enc;
  logic [3:0] req_ima;
  ima_req_t req;

  preparator dut (.*);

  logic [63:0] mem [1024];
  logic [63:0] rd_word;
  logic [71:0] flip [1024];
  eaddr_t a_q;
  secded_enc u_enc (.data(rd_word), .code(enc));
  assign rd_word = mem[a_q[9:0]];
  assign mem_rdata = enc ^ flip[a_q[9:0]];
  always @(posedge clk) if (mem_en) a_q <= mem_addr;
  always @(posedge clk) req_ready <= 1'($urandom);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_req, n_corr, n_unc, n_abort;
  ima_req_t got [$];
  always @(posedge clk) if (rst_n) begin
    if (req_valid && req_ready) got.push_back(req);
    if (ecc_corr) n_corr++;
    if (ecc_uncorr) n_unc++;
  end

  task automatic run(input logic m, input eaddr_t b, output logic ab);
    @(negedge clk);
    start = 1; mode = m; base = b; ima = 4'd5; xbar = 4'd7; xbar_mask = 12'ha5c;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    ab = ecc_abort;
    @(negedge clk);
  endtask

  initial begin
    logic ab;
    for (int i = 0; i < 1024; i++) begin mem[i] = {$urandom, $urandom}; flip[i] = '0; end
    n_corr = 0; n_unc = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // PROGRAM from word 0
    flip[77] = 72'h1 << 20;
    run(0, 0, ab);
    chk(!ab, "program not aborted");
    chk(got.size() == ROWS, $sformatf("%0d lines sent", got.size()));
    chk(n_corr == 1, "one correction counted");
    for (int r = 0; r < got.size(); r++) begin
      logic [255:0] line;
      int s;
      s = 0;
      line = {mem[4*r+3], mem[4*r+2], mem[4*r+1], mem[4*r]};
      for (int j = 0; j < DATA_COLS; j++) s += line[2*j +: 2];
      chk(got[r].kind == REQ_PROG && got[r].row == 7'(r) && got[r].xbar == 4'd7, $sformatf("line %0d header", r));
      for (int j = 0; j < DATA_COLS; j++)
        if (got[r].cells[j] != line[2*j +: 2]) begin chk(0, $sformatf("line %0d cell %0d", r, j)); break; end
      for (int k = 0; k < SUM_COLS; k++)
        chk(got[r].cells[DATA_COLS + k] == 2'(s >> (2*k)), $sformatf("line %0d sum cell %0d", r, k));
    end
    got.delete();
    // INFER from word 600
    flip[610] = 72'h1 << 71;
    run(1, 600, ab);
    chk(!ab && got.size() == 1, "one infer request");
    chk(n_corr == 2, "second correction counted");
    if (got.size() == 1) begin
      chk(got[0].kind == REQ_OP && got[0].xbar_mask == 12'ha5c, "infer header");
      for (int i = 0; i < ROWS; i++)
        chk(got[0].vec[i] == mem[600 + i/4][16*(i%4) +: 16], $sformatf("input %0d", i));
    end
    got.delete();
    // double error aborts
    flip[605] = (72'h1 << 4) | (72'h1 << 9);
    run(1, 600, ab);
    chk(ab, "double error aborts");
    chk(n_unc == 1, "uncorrectable counted");
    chk(got.size() == 0, "aborted job sends nothing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
