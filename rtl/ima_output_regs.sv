// ima_output_regs: result registers of an IMA.
//
// One entry per crossbar holds the NCOL results of its last operation, a
// done flag and an error flag. Each ADC channel has a write port, used once
// at the end of an operation with the bound crossbar's index; an operation's
// start (clr) clears the crossbar's flags. The tile reads one entry through
// rd_xbar. When err is set the stored results are those of a failed sum
// check and are not to be used.
module ima_output_regs #(
  parameter int unsigned NXBAR    = fatpim_pkg::XBARS_PER_IMA,
  parameter int unsigned NADC     = fatpim_pkg::ADCS_PER_IMA,
  parameter int unsigned NCOL     = fatpim_pkg::NCOL,
  parameter int unsigned RES_BITS = fatpim_pkg::RES_BITS,
  localparam int unsigned XW = $clog2(NXBAR)
) (
  input  logic                                      clk,
  input  logic                                      rst_n,
  input  logic [NXBAR-1:0]                          clr,
  input  logic [NADC-1:0]                           wr_en,
  input  logic [NADC-1:0][XW-1:0]                   wr_xbar,
  input  logic [NADC-1:0][NCOL-1:0][RES_BITS-1:0]   wr_res,
  input  logic [NADC-1:0]                           wr_err,
  input  logic [XW-1:0]                             rd_xbar,
  output logic [NCOL-1:0][RES_BITS-1:0]             rd_res,
  output logic [NXBAR-1:0]                          done,
  output logic [NXBAR-1:0]                          err
);
  logic [NCOL-1:0][RES_BITS-1:0] res [NXBAR];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= '0;
      err  <= '0;
      for (int x = 0; x < NXBAR; x++) res[x] <= '0;
    end else begin
      for (int x = 0; x < NXBAR; x++)
        if (clr[x]) begin
          done[x] <= 1'b0;
          err[x]  <= 1'b0;
        end
      for (int a = 0; a < NADC; a++)
        if (wr_en[a]) begin
          res[wr_xbar[a]]  <= wr_res[a];
          done[wr_xbar[a]] <= 1'b1;
          err[wr_xbar[a]]  <= wr_err[a];
        end
    end
  end

  assign rd_res = (int'(rd_xbar) < NXBAR) ? res[rd_xbar] : '0;
endmodule
