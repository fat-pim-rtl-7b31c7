// ima: In-Memory Accelerator with sum-checked crossbars.
//
// NXBAR crossbar units (xbar_array + sample_hold + xbar_ctrl) share NADC ADC
// channels. A channel is an ADC followed, in parallel, by a shift-and-add unit
// that builds the dot products and a sum checker that verifies every read
// against the crossbar's sum bit lines. The adc_arbiter binds a channel to a
// crossbar for one whole operation; the bound channel's sequencer reads the
// crossbar's S&H one bit line per cycle through a per-channel mux (the IMA's
// internal interconnect). At the end of the operation the channel writes the
// results and the error flag into ima_output_regs and frees itself.
//
// Requests (req/req_valid, one cycle) either write one word line of one
// crossbar (REQ_PROG) or start an operation with the same input vector on all
// crossbars of xbar_mask (REQ_OP). req_ready says the request can be taken:
// the target crossbars are idle. done/err report each crossbar's last
// operation; rd_xbar selects the results on rd_res.
//
// Timing of one operation on a free channel: the first read takes READ_LAT
// cycles, then each of the IN_BITS reads is converted in DATA_COLS + SUM_COLS
// cycles while the next read proceeds, and the flags are set a few cycles
// after the last conversion.
//
// flt_* and adc_glitch are fault-injection hooks for testing; tie them to 0
// in use.
module ima #(
  parameter int unsigned NADC      = fatpim_pkg::ADCS_PER_IMA,
  parameter int unsigned READ_LAT  = fatpim_pkg::READ_LAT,
  parameter int unsigned WRITE_LAT = fatpim_pkg::WRITE_LAT,
  parameter int unsigned THRESH    = 0,
  localparam int unsigned NXBAR = fatpim_pkg::XBARS_PER_IMA,
  localparam int unsigned NCOL  = fatpim_pkg::NCOL,
  localparam int unsigned XW    = $clog2(NXBAR),
  localparam int unsigned AW    = (NADC > 1) ? $clog2(NADC) : 1
) (
  input  logic                                        clk,
  input  logic                                        rst_n,
  input  logic                                        req_valid,
  input  fatpim_pkg::ima_req_t                        req,
  output logic                                        req_ready,
  output logic [NXBAR-1:0]                            busy,
  output logic [NXBAR-1:0]                            done,
  output logic [NXBAR-1:0]                            err,
  input  logic [3:0]                                  rd_xbar,
  output logic [NCOL-1:0][fatpim_pkg::RES_BITS-1:0]   rd_res,
  output logic                                        chk_fail,   // a read failed its sum check
  // fault injection (test hooks)
  input  logic                                        flt_en,
  input  logic [3:0]                                  flt_xbar,
  input  logic [6:0]                                  flt_row,
  input  logic [7:0]                                  flt_col,
  input  logic [1:0]                                  flt_val,
  input  logic [NADC-1:0][fatpim_pkg::BL_BITS-1:0]    adc_glitch
);
  import fatpim_pkg::*;

  // ---- crossbar units --------------------------------------------------------
  logic [NXBAR-1:0]                          x_op_start, x_prog_req, x_prog_en, x_prog_busy;
  logic [NXBAR-1:0]                          x_read_start, x_read_done, x_sh_load, x_sh_full;
  logic [NXBAR-1:0]                          x_sh_free, x_sh_release, x_adc_req, x_op_done;
  logic [NXBAR-1:0][ROWS-1:0]                x_wl;
  logic [NXBAR-1:0][NUM_BL-1:0][BL_BITS-1:0] x_bl;
  logic [NXBAR-1:0][3:0]                     x_sh_bit, x_held_bit;
  logic [NXBAR-1:0]                          x_sh_last, x_held_last;
  logic [NXBAR-1:0][7:0]                     x_sel;
  logic [NXBAR-1:0][BL_BITS-1:0]             x_val;
  logic [NXBAR-1:0]                          x_grant;
  logic [NXBAR-1:0][AW-1:0]                  x_chan;

  // ---- ADC channels ----------------------------------------------------------
  logic [NADC-1:0]                           c_bound, c_sample, c_release, c_adc_v;
  logic [NADC-1:0][XW-1:0]                   c_xbar;
  logic [NADC-1:0][7:0]                      c_sel;
  logic [NADC-1:0][BL_BITS-1:0]              c_val, c_code;
  adc_tag_t                                  c_tag [NADC];
  logic [NADC-1:0][NCOL-1:0][RES_BITS-1:0]   c_res;
  logic [NADC-1:0]                           c_chk_v, c_chk_e, c_op_done, c_op_err;

  always_comb begin
    unique case (req.kind)
      REQ_PROG: req_ready = !busy[req.xbar[XW-1:0]];
      REQ_OP:   req_ready = ((busy & req.xbar_mask) == '0);
      default:  req_ready = 1'b1;
    endcase
    for (int x = 0; x < NXBAR; x++) begin
      x_op_start[x] = req_valid && req_ready && (req.kind == REQ_OP) && req.xbar_mask[x];
      x_prog_req[x] = req_valid && req_ready && (req.kind == REQ_PROG) && (int'(req.xbar) == x);
    end
  end

  for (genvar x = 0; x < NXBAR; x++) begin : g_xbar
    logic [4:0] tag_in, tag_held;
    assign tag_in = {x_sh_last[x], x_sh_bit[x]};
    assign x_held_bit[x]  = tag_held[3:0];
    assign x_held_last[x] = tag_held[4];

    // back-pointers from the bound channel
    assign x_sel[x]        = x_grant[x] ? c_sel[x_chan[x]] : '0;
    assign x_sh_release[x] = x_grant[x] && c_release[x_chan[x]];
    assign x_op_done[x]    = x_grant[x] && c_op_done[x_chan[x]];
    assign x_sh_free[x]    = !x_sh_full[x] || x_sh_release[x];

    xbar_array #(.READ_LAT(READ_LAT), .WRITE_LAT(WRITE_LAT)) u_array (
      .clk, .rst_n,
      .prog_en(x_prog_en[x]), .prog_row(req.row), .prog_cells(req.cells), .prog_busy(x_prog_busy[x]),
      .read_start(x_read_start[x]), .wl_bits(x_wl[x]), .read_done(x_read_done[x]), .bl_val(x_bl[x]),
      .flt_en(flt_en && int'(flt_xbar) == x), .flt_row, .flt_col, .flt_val);

    sample_hold u_sh (
      .clk, .rst_n, .load(x_sh_load[x]), .bl_in(x_bl[x]), .tag_in, .full(x_sh_full[x]),
      .tag(tag_held), .sel(x_sel[x]), .val(x_val[x]), .release_i(x_sh_release[x]));

    xbar_ctrl u_ctrl (
      .clk, .rst_n, .op_start(x_op_start[x]), .in_vec(req.vec),
      .prog_req(x_prog_req[x]), .prog_en(x_prog_en[x]), .prog_busy(x_prog_busy[x]),
      .read_start(x_read_start[x]), .wl_bits(x_wl[x]), .read_done(x_read_done[x]),
      .sh_free(x_sh_free[x]), .sh_load(x_sh_load[x]), .sh_bit(x_sh_bit[x]), .sh_last(x_sh_last[x]),
      .adc_req(x_adc_req[x]), .op_done(x_op_done[x]), .busy(busy[x]));
  end

  adc_arbiter #(.NREQ(NXBAR), .NADC(NADC)) u_arb (
    .clk, .rst_n, .req(x_adc_req), .release_i(c_op_done), .grant(x_grant), .chan_of(x_chan),
    .bound(c_bound), .bound_xbar(c_xbar));

  for (genvar a = 0; a < NADC; a++) begin : g_chan
    adc_sequencer u_seq (
      .clk, .rst_n, .active(c_bound[a]),
      .sh_full(x_sh_full[c_xbar[a]]), .sh_bit(x_held_bit[c_xbar[a]]), .sh_last(x_held_last[c_xbar[a]]),
      .sel(c_sel[a]), .sample(c_sample[a]), .sh_release(c_release[a]), .tag_out(c_tag[a]));

    assign c_val[a] = x_val[c_xbar[a]];

    adc u_adc (
      .clk, .rst_n, .in_valid(c_sample[a]), .in_val(c_val[a]), .glitch(adc_glitch[a]),
      .out_valid(c_adc_v[a]), .out_code(c_code[a]));

    shift_add u_sa (.clk, .rst_n, .tag(c_tag[a]), .code(c_code[a]), .result(c_res[a]));

    sum_checker #(.THRESH(THRESH)) u_chk (
      .clk, .rst_n, .tag(c_tag[a]), .code(c_code[a]),
      .chk_valid(c_chk_v[a]), .chk_err(c_chk_e[a]), .op_done(c_op_done[a]), .op_err(c_op_err[a]));
  end

  assign chk_fail = |(c_chk_v & c_chk_e);

  // The ADC's own valid and the tag delayed beside it must agree.
  for (genvar a = 0; a < NADC; a++) begin : g_tagchk
    a_tag: assert property (@(posedge clk) disable iff (!rst_n) c_adc_v[a] == c_tag[a].valid)
      else $error("ima: ADC %0d output and tag out of step", a);
  end

  ima_output_regs #(.NXBAR(NXBAR), .NADC(NADC)) u_out (
    .clk, .rst_n, .clr(x_op_start), .wr_en(c_op_done & c_bound), .wr_xbar(c_xbar), .wr_res(c_res),
    .wr_err(c_op_err), .rd_xbar(rd_xbar[XW-1:0]), .rd_res, .done, .err);
endmodule
