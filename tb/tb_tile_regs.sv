// tb_tile_regs: the register block with a stand-in controller and eDRAM
// driven here. Checks: ARG0/ARG1 write and read back; a CMD write decodes to
// one cmd_valid with the right fields and is ignored while busy; STATUS shows
// busy (also in the cycle of the done pulse), done, error and a pending irq
// that a write clears; every counter and the fault map read back; the eDRAM
// window forwards writes, returns reads one cycle later and refuses access
// while a command runs.
module tb_tile_regs;
  import fatpim_pkg::*;
  localparam int NI = 2;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  host_req_t host_req = '0;
  logic host_ready, host_rvalid, irq_pending, cmd_valid;
  logic [63:0] host_rdata;
  tile_cmd_t cmd;
  logic busy = 0, cmd_done = 0, cmd_err = 0, irq = 0;
  logic [31:0] cnt_detect, cnt_reprog, cnt_faulty, cnt_ecc_corr, cnt_ecc_unc, cnt_rd_fail;
  logic [NI-1:0][11:0] fault_map;
  logic mem_en, mem_we;
  eaddr_t mem_addr;
  logic [63:0] mem_wdata, mem_rdata;

  tile_regs #(.NIMA(NI)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_cmd = 0;
  tile_cmd_t last_cmd;
  always @(posedge clk) if (rst_n && cmd_valid) begin n_cmd++; last_cmd <= cmd; end
  // eDRAM stand-in: data = address pattern, one-cycle latency
  always @(posedge clk) if (mem_en && !mem_we) mem_rdata <= {32'hcafe0000, 9'd0, mem_addr};

  task automatic hwrite(input logic [31:0] a, input logic [63:0] d);
    @(negedge clk);
    host_req = '{valid: 1'b1, we: 1'b1, addr: a, wdata: d};
    @(negedge clk);
    host_req = '0;
  endtask
  task automatic hread(input logic [31:0] a, output logic [63:0] d, output bit ok);
    @(negedge clk);
    host_req = '{valid: 1'b1, we: 1'b0, addr: a, wdata: '0};
    #0.5;
    ok = host_ready;
    if (a[31]) begin
      @(negedge clk); host_req = '0; #0.5;
      ok = ok && host_rvalid;
      d = host_rdata;
    end else begin
      ok = ok && host_rvalid;
      d = host_rdata;
      @(negedge clk); host_req = '0;
    end
  endtask

  initial begin
    logic [63:0] d;
    bit ok;
    cnt_detect = 32'd11; cnt_reprog = 32'd22; cnt_faulty = 32'd3;
    cnt_ecc_corr = 32'd44; cnt_ecc_unc = 32'd5; cnt_rd_fail = 32'd66;
    fault_map = {12'h801, 12'h0f0};
    repeat (3) @(negedge clk);
    rst_n = 1;
    hwrite(1, 64'h123456); hwrite(2, 64'h0abcde);
    hread(1, d, ok); chk(ok && d == 64'h123456, "ARG0");
    hread(2, d, ok); chk(ok && d == 64'h0abcde, "ARG1");
    hwrite(0, 64'(2 | (5 << 2) | (9 << 6) | (12'h3c5 << 10)));
    chk(n_cmd == 1, "one command issued");
    chk(last_cmd.op == CMD_INFER && last_cmd.ima == 5 && last_cmd.xbar == 9 && last_cmd.xbar_mask == 12'h3c5 &&
        last_cmd.arg0 == eaddr_t'(24'h123456) && last_cmd.arg1 == eaddr_t'(24'h0abcde), "command fields");
    busy = 1;
    hwrite(0, 64'd1);
    chk(n_cmd == 1, "command ignored while busy");
    hread(3, d, ok); chk(ok && d[3:0] == 4'b0001, "STATUS busy");
    hread(MEM_A(7), d, ok); chk(!ok, "eDRAM refused while busy");
    // controller ends with an error: busy drops, then done pulse with irq
    @(negedge clk); busy = 0; cmd_done = 1; cmd_err = 1; irq = 1;
    #0.5; chk(!host_ready || !host_req.valid, "no request in flight");
    begin
      host_req = '{valid: 1'b1, we: 1'b0, addr: 32'd3, wdata: '0};
      #0.2; chk(host_rdata[0] == 1'b1, "busy still shown in the done cycle");
      @(negedge clk); host_req = '0; cmd_done = 0; cmd_err = 0; irq = 0;
    end
    hread(3, d, ok); chk(ok && d[3:0] == 4'b1110, $sformatf("STATUS done+err+irq %b", d[3:0]));
    chk(irq_pending, "irq output pending");
    hwrite(3, 64'h8);
    hread(3, d, ok); chk(ok && d[3:0] == 4'b0110, "irq cleared, done/err kept");
    hread(4, d, ok); chk(d == 11, "DETECT");
    hread(5, d, ok); chk(d == 22, "REPROG");
    hread(6, d, ok); chk(d == 3, "FAULTY");
    hread(7, d, ok); chk(d == 44, "ECC_CORR");
    hread(8, d, ok); chk(d == 5, "ECC_UNC");
    hread(9, d, ok); chk(d == 66, "RD_FAIL");
    hread(16, d, ok); chk(d == 64'h0f0, "fault map 0");
    hread(17, d, ok); chk(d == 64'h801, "fault map 1");
    // new command clears done/err
    hwrite(0, 64'd1);
    chk(n_cmd == 2 && last_cmd.op == CMD_PROGRAM, "second command");
    hread(3, d, ok); chk(d[2:1] == 2'b00, "done and err cleared by a new command");
    // eDRAM window
    for (int k = 0; k < 20; k++) begin
      eaddr_t a;
      a = eaddr_t'($urandom);
      hread(MEM_A(a), d, ok);
      chk(ok && d == {32'hcafe0000, 9'd0, a}, "eDRAM read");
    end
    fork
      hwrite(MEM_A(23'h1234), 64'h5555_6666_7777_8888);
      begin @(negedge clk); #0.5; chk(mem_en && mem_we && mem_addr == 23'h1234 && mem_wdata == 64'h5555_6666_7777_8888, "eDRAM write"); end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic logic [31:0] MEM_A(input eaddr_t a);
    return 32'h8000_0000 | 32'(a);
  endfunction
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
