// tb_tile_interconnect: three IMA ports with random ready. Random requests
// with random destinations are sent with random gaps; each must reach only its
// IMA, unchanged and in order, and none may be lost or duplicated. The read
// mux is checked for every rd_ima value, including one out of range.
module tb_tile_interconnect;
  import fatpim_pkg::*;
  localparam int NI = 3;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready;
  logic [3:0] in_ima = 0, rd_ima = 0;
  ima_req_t in_req = '0, ima_req;
  logic [NI-1:0] ima_valid, ima_ready;
  logic [NI-1:0][11:0] ima_busy, ima_done, ima_err;
  logic [NI-1:0][NCOL-1:0][RES_BITS-1:0] ima_res;
  logic [11:0] rd_busy, rd_done, rd_err;
  logic [NCOL-1:0][RES_BITS-1:0] rd_res;

  tile_interconnect #(.NIMA(NI)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [11:0] sent [NI][$];
  int n_recv = 0;
  always @(posedge clk) ima_ready <= NI'($urandom);
  always @(posedge clk) if (rst_n) begin
    chk($countones(ima_valid) <= 1, "at most one IMA addressed");
    for (int i = 0; i < NI; i++)
      if (ima_valid[i] && ima_ready[i]) begin
        n_recv++;
        if (sent[i].size() == 0) chk(0, $sformatf("IMA %0d got an unexpected request", i));
        else chk(ima_req.xbar_mask == sent[i].pop_front(), $sformatf("IMA %0d request order", i));
      end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      in_valid = 1; in_ima = 4'($urandom_range(NI - 1));
      in_req = '0; in_req.kind = REQ_OP; in_req.xbar_mask = 12'(k);
      in_req.vec[5] = 16'($urandom);
      #0.5;
      while (!in_ready) begin @(negedge clk); #0.5; end
      sent[in_ima].push_back(12'(k));
      @(negedge clk);
      in_valid = 0;
      repeat ($urandom_range(2)) @(negedge clk);
    end
    repeat (50) @(negedge clk);
    chk(n_recv == 300, $sformatf("%0d of 300 delivered", n_recv));
    for (int i = 0; i < NI; i++) begin
      ima_busy[i] = 12'($urandom); ima_done[i] = 12'($urandom); ima_err[i] = 12'($urandom);
      for (int c = 0; c < NCOL; c++) ima_res[i][c] = RES_BITS'({$urandom, $urandom});
    end
    for (int i = 0; i <= NI; i++) begin
      rd_ima = 4'(i); #0.5;
      if (i < NI) chk(rd_busy == ima_busy[i] && rd_done == ima_done[i] && rd_err == ima_err[i] &&
                      rd_res == ima_res[i], $sformatf("read mux %0d", i));
      else chk(rd_busy == '0 && rd_res == '0, "out-of-range read returns zero");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
