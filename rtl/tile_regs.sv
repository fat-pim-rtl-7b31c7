// tile_regs: the host-visible registers of a tile and its eDRAM window.
//
// Host bus: one request per cycle (valid, we, addr, wdata). Register reads
// answer in the same cycle on rdata with rvalid; eDRAM reads answer one cycle
// later. ready is low for eDRAM accesses while a command runs (the eDRAM then
// belongs to the preparator and the controller).
//
// Register map (word addresses, addr[31] = 0):
//   0 CMD     write: [1:0] op (1 program, 2 infer), [5:2] ima, [9:6] xbar,
//                    [21:10] xbar mask; starts the command if idle
//   1 ARG0    weight base (program) or input address (infer)
//   2 ARG1    output address (infer)
//   3 STATUS  read: [0] busy, [1] done, [2] error, [3] irq pending;
//             write 1 to bit 3 to clear the pending interrupt
//   4 DETECT  sum-check failures        5 REPROG  crossbar re-programs
//   6 FAULTY  crossbars marked faulty   7 ECC_CORR corrected eDRAM words
//   8 ECC_UNC uncorrectable eDRAM words 9 RD_FAIL failed reads (per read)
//  16+i       fault map of IMA i (one bit per crossbar)
// addr[31] = 1: eDRAM word addr[22:0]; writes are ECC-encoded, reads return
// the data bits after SEC-DED correction.
module tile_regs #(
  parameter int unsigned NIMA = fatpim_pkg::IMAS_PER_TILE,
  localparam int unsigned NX  = fatpim_pkg::XBARS_PER_IMA
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  fatpim_pkg::host_req_t    host_req,
  output logic                     host_ready,
  output logic                     host_rvalid,
  output logic [63:0]              host_rdata,
  output logic                     irq_pending,
  // to the controller
  output logic                     cmd_valid,
  output fatpim_pkg::tile_cmd_t    cmd,
  input  logic                     busy,
  input  logic                     cmd_done,
  input  logic                     cmd_err,
  input  logic                     irq,
  input  logic [31:0]              cnt_detect,
  input  logic [31:0]              cnt_reprog,
  input  logic [31:0]              cnt_faulty,
  input  logic [31:0]              cnt_ecc_corr,
  input  logic [31:0]              cnt_ecc_unc,
  input  logic [31:0]              cnt_rd_fail,
  input  logic [NIMA-1:0][NX-1:0]  fault_map,
  // eDRAM window
  output logic                     mem_en,
  output logic                     mem_we,
  output fatpim_pkg::eaddr_t       mem_addr,
  output logic [63:0]              mem_wdata,
  input  logic [63:0]              mem_rdata
);
  import fatpim_pkg::*;

  eaddr_t arg0, arg1;
  logic   done_q, err_q, mem_rd_q;
  logic   is_mem, acc, busy_all;
  logic [31:0] wa;

  assign is_mem     = host_req.addr[31];
  assign wa         = {1'b0, host_req.addr[30:0]};
  // The controller drops busy one cycle before its done pulse; that cycle
  // still counts as busy so that a status poll never sees idle-and-not-done
  // and no new command can start before the old one has reported.
  assign busy_all   = busy || cmd_done;
  assign host_ready = !(is_mem && busy_all);
  assign acc        = host_req.valid && host_ready;
  assign mem_en     = acc && is_mem;
  assign mem_we     = host_req.we;
  assign mem_addr   = host_req.addr[EADDR_BITS-1:0];
  assign mem_wdata  = host_req.wdata;

  always_comb begin
    cmd           = '0;
    cmd.op        = cmd_op_e'(host_req.wdata[1:0]);
    cmd.ima       = host_req.wdata[5:2];
    cmd.xbar      = host_req.wdata[9:6];
    cmd.xbar_mask = host_req.wdata[21:10];
    cmd.arg0      = arg0;
    cmd.arg1      = arg1;
    cmd_valid     = acc && !is_mem && host_req.we && wa == 0 && !busy_all;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arg0        <= '0;
      arg1        <= '0;
      done_q      <= 1'b0;
      err_q       <= 1'b0;
      irq_pending <= 1'b0;
      mem_rd_q    <= 1'b0;
    end else begin
      mem_rd_q <= mem_en && !host_req.we;
      if (acc && !is_mem && host_req.we) begin
        if (wa == 1) arg0 <= host_req.wdata[EADDR_BITS-1:0];
        if (wa == 2) arg1 <= host_req.wdata[EADDR_BITS-1:0];
        if (wa == 3 && host_req.wdata[3]) irq_pending <= 1'b0;
      end
      if (cmd_valid) begin
        done_q <= 1'b0;
        err_q  <= 1'b0;
      end
      if (cmd_done) begin
        done_q <= 1'b1;
        err_q  <= cmd_err;
      end
      if (irq) irq_pending <= 1'b1;
    end
  end

  always_comb begin
    host_rvalid = mem_rd_q || (acc && !is_mem && !host_req.we);
    host_rdata  = '0;
    if (mem_rd_q) host_rdata = mem_rdata;
    else if (acc && !is_mem && !host_req.we) begin
      if (wa == 1)      host_rdata = 64'(arg0);
      else if (wa == 2) host_rdata = 64'(arg1);
      else if (wa == 3) host_rdata = 64'({irq_pending, err_q, done_q, busy_all});
      else if (wa == 4) host_rdata = 64'(cnt_detect);
      else if (wa == 5) host_rdata = 64'(cnt_reprog);
      else if (wa == 6) host_rdata = 64'(cnt_faulty);
      else if (wa == 7) host_rdata = 64'(cnt_ecc_corr);
      else if (wa == 8) host_rdata = 64'(cnt_ecc_unc);
      else if (wa == 9) host_rdata = 64'(cnt_rd_fail);
      else if (wa >= 16 && wa < 16 + NIMA) host_rdata = 64'(fault_map[wa - 16]);
    end
  end
endmodule
