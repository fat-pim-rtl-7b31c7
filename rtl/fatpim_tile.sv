// fatpim_tile: one tile of the accelerator.
//
// Holds the eDRAM buffer (weights, inputs and results, every 64-bit word
// with SEC-DED check bits), the preparator, the host registers, the
// controller that runs commands and recovers from detected errors, the
// interconnect and NIMA IMAs. The eDRAM port is shared with fixed priority:
// preparator reads, then controller result writes, then host accesses (the
// host may touch the eDRAM only while no command runs).
//
// Use: the host writes weight lines and input vectors into the eDRAM window,
// issues CMD_PROGRAM per crossbar and then CMD_INFER; results appear in the
// eDRAM, status and counters in the registers (see tile_regs), and irq rises
// when a command ends with an error and stays high until cleared in STATUS.
//
// The flt_*, glitch_* and eflip_* inputs inject faults for testing (a cell
// overwrite, an ADC code glitch, an eDRAM bit flip); tie them to 0 in use.
module fatpim_tile #(
  parameter int unsigned NIMA        = fatpim_pkg::IMAS_PER_TILE,
  parameter int unsigned EDRAM_WORDS = fatpim_pkg::EDRAM_WORDS,
  parameter int unsigned READ_LAT    = fatpim_pkg::READ_LAT,
  parameter int unsigned WRITE_LAT   = fatpim_pkg::WRITE_LAT,
  localparam int unsigned NX   = fatpim_pkg::XBARS_PER_IMA,
  localparam int unsigned NADC = fatpim_pkg::ADCS_PER_IMA
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  fatpim_pkg::host_req_t       host_req,
  output logic                        host_ready,
  output logic                        host_rvalid,
  output logic [63:0]                 host_rdata,
  output logic                        irq,
  // fault injection (test hooks)
  input  logic                        flt_en,
  input  logic [3:0]                  flt_ima,
  input  logic [3:0]                  flt_xbar,
  input  logic [6:0]                  flt_row,
  input  logic [7:0]                  flt_col,
  input  logic [1:0]                  flt_val,
  input  logic                        glitch_en,
  input  logic [3:0]                  glitch_ima,
  input  logic [1:0]                  glitch_adc,
  input  logic [8:0]                  glitch_mask,
  input  logic                        eflip_en,
  input  fatpim_pkg::eaddr_t          eflip_addr,
  input  logic [71:0]                 eflip_mask
);
  import fatpim_pkg::*;

  // ---- controller / registers ----------------------------------------------
  tile_cmd_t            cmd;
  logic                 cmd_valid, busy, cmd_done, cmd_err, ctrl_irq;
  logic [31:0]          cnt_detect, cnt_reprog, cnt_faulty, cnt_corr, cnt_unc, cnt_rdfail;
  logic [NIMA-1:0][NX-1:0] fault_map;

  // ---- preparator -------------------------------------------------------------
  logic                 p_start, p_mode, p_busy, p_done, p_abort, p_corr, p_unc;
  logic [3:0]           p_ima, p_xbar;
  logic [NX-1:0]        p_mask;
  eaddr_t               p_base, p_addr;
  logic                 p_en;
  logic                 p_req_valid, p_req_ready;
  logic [3:0]           p_req_ima;
  ima_req_t             p_req;

  // ---- eDRAM ---------------------------------------------------------------------
  logic                 m_en, m_we;
  eaddr_t               m_addr;
  logic [71:0]          m_wcode, m_rdata;
  logic [63:0]          m_wdata, h_rdata;
  logic                 h_en, h_we, w_en;
  eaddr_t               h_addr, w_addr;
  logic [63:0]          h_wdata, w_data;
  logic                 h_corr, h_unc;

  // ---- interconnect / IMAs ------------------------------------------------------
  logic [NIMA-1:0]               i_valid, i_ready, i_chk_fail;
  ima_req_t                      i_req;
  logic [NIMA-1:0][NX-1:0]       i_busy, i_done, i_err;
  logic [NIMA-1:0][NCOL-1:0][RES_BITS-1:0] i_res;
  logic [3:0]                    rd_ima, rd_xbar;
  logic [NX-1:0]                 rd_busy, rd_done, rd_err;
  logic [NCOL-1:0][RES_BITS-1:0] rd_res;

  tile_regs #(.NIMA(NIMA)) u_regs (
    .clk, .rst_n, .host_req, .host_ready, .host_rvalid, .host_rdata, .irq_pending(irq),
    .cmd_valid, .cmd, .busy, .cmd_done, .cmd_err, .irq(ctrl_irq),
    .cnt_detect, .cnt_reprog, .cnt_faulty, .cnt_ecc_corr(cnt_corr), .cnt_ecc_unc(cnt_unc),
    .cnt_rd_fail(cnt_rdfail), .fault_map,
    .mem_en(h_en), .mem_we(h_we), .mem_addr(h_addr), .mem_wdata(h_wdata), .mem_rdata(h_rdata));

  tile_ctrl #(.NIMA(NIMA)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd, .busy, .cmd_done, .cmd_err, .irq(ctrl_irq),
    .cnt_detect, .cnt_reprog, .cnt_faulty, .fault_map,
    .prep_start(p_start), .prep_mode(p_mode), .prep_ima(p_ima), .prep_xbar(p_xbar),
    .prep_mask(p_mask), .prep_base(p_base), .prep_done(p_done), .prep_abort(p_abort),
    .rd_ima, .rd_xbar, .rd_busy, .rd_done, .rd_err, .rd_res,
    .wr_en(w_en), .wr_addr(w_addr), .wr_data(w_data));

  preparator u_prep (
    .clk, .rst_n, .start(p_start), .mode(p_mode), .ima(p_ima), .xbar(p_xbar), .xbar_mask(p_mask),
    .base(p_base), .busy(p_busy), .done(p_done), .ecc_abort(p_abort), .ecc_corr(p_corr),
    .ecc_uncorr(p_unc), .mem_en(p_en), .mem_addr(p_addr), .mem_rdata(m_rdata),
    .req_valid(p_req_valid), .req_ima(p_req_ima), .req(p_req), .req_ready(p_req_ready));

  // eDRAM port sharing and ECC encoding of every write.
  always_comb begin
    if (p_en) begin
      m_en = 1'b1; m_we = 1'b0; m_addr = p_addr; m_wdata = '0;
    end else if (w_en) begin
      m_en = 1'b1; m_we = 1'b1; m_addr = w_addr; m_wdata = w_data;
    end else begin
      m_en = h_en; m_we = h_we; m_addr = h_addr; m_wdata = h_wdata;
    end
  end

  secded_enc u_enc (.data(m_wdata), .code(m_wcode));
  secded_dec u_hdec (.code(m_rdata), .data(h_rdata), .corr(h_corr), .uncorr(h_unc));

  edram #(.WORDS(EDRAM_WORDS)) u_edram (
    .clk, .en(m_en), .we(m_we), .addr(m_addr), .wdata(m_wcode), .rdata(m_rdata),
    .flip_en(eflip_en), .flip_addr(eflip_addr), .flip_mask(eflip_mask));

  // ECC and per-read counters.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_corr   <= '0;
      cnt_unc    <= '0;
      cnt_rdfail <= '0;
    end else begin
      if (p_corr) cnt_corr <= cnt_corr + 1;
      if (p_unc)  cnt_unc  <= cnt_unc + 1;
      cnt_rdfail <= cnt_rdfail + 32'($countones(i_chk_fail));
    end
  end

  tile_interconnect #(.NIMA(NIMA)) u_noc (
    .clk, .rst_n, .in_valid(p_req_valid), .in_ima(p_req_ima), .in_req(p_req), .in_ready(p_req_ready),
    .ima_valid(i_valid), .ima_req(i_req), .ima_ready(i_ready),
    .rd_ima, .ima_busy(i_busy), .ima_done(i_done), .ima_err(i_err), .ima_res(i_res),
    .rd_busy, .rd_done, .rd_err, .rd_res);

  for (genvar i = 0; i < NIMA; i++) begin : g_ima
    logic [NADC-1:0][BL_BITS-1:0] glitch;
    always_comb begin
      glitch = '0;
      if (glitch_en && int'(glitch_ima) == i) glitch[glitch_adc] = glitch_mask;
    end

    ima #(.READ_LAT(READ_LAT), .WRITE_LAT(WRITE_LAT)) u_ima (
      .clk, .rst_n, .req_valid(i_valid[i]), .req(i_req), .req_ready(i_ready[i]),
      .busy(i_busy[i]), .done(i_done[i]), .err(i_err[i]), .rd_xbar, .rd_res(i_res[i]),
      .chk_fail(i_chk_fail[i]),
      .flt_en(flt_en && int'(flt_ima) == i), .flt_xbar, .flt_row, .flt_col, .flt_val,
      .adc_glitch(glitch));
  end

  // The preparator's busy and the host-read ECC flags have no consumer: the
  // host sees corrected data, and counts only the preparator's ECC events.
  logic unused_ok;
  assign unused_ok = p_busy ^ h_corr ^ h_unc;
endmodule
