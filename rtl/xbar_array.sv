// xbar_array: behavioural model of one ReRAM crossbar with its word-line DACs.
// This is a model of an analog part, not logic to be synthesised as is.
//
// The array has ROWS word lines and DATA_COLS + SUM_COLS bit lines of
// CELL_BITS-bit cells. The data region holds the weights; the sum region holds,
// on every word line, the sum of that line's data cells, spread over SUM_COLS
// two-bit cells (the preparator computes it). A read drives every word line
// with one input bit (a 1-bit DAC) and, READ_LAT cycles later, presents every
// bit line's current as an exact integer: the sum of the cell values on the
// word lines whose input bit is 1. Device noise is not modelled, so a correct
// array always satisfies sum(data bit lines) == sum_k 4^k * sum bit line k.
//
// Programming writes one whole word line and keeps prog_busy high for
// WRITE_LAT cycles; a read and a write are not issued together (the crossbar
// controller guarantees it). flt_* overwrites one cell at once: it models the
// abrupt resistance change of a retention failure and is a test hook only.
//
// Timing: read_start (with wl_bits) -> read_done pulse READ_LAT cycles later,
// bl_val stable from then until the next read completes.
module xbar_array #(
  parameter int unsigned ROWS      = fatpim_pkg::ROWS,
  parameter int unsigned DATA_COLS = fatpim_pkg::DATA_COLS,
  parameter int unsigned SUM_COLS  = fatpim_pkg::SUM_COLS,
  parameter int unsigned CELL_BITS = fatpim_pkg::CELL_BITS,
  parameter int unsigned BL_BITS   = fatpim_pkg::BL_BITS,
  parameter int unsigned READ_LAT  = fatpim_pkg::READ_LAT,
  parameter int unsigned WRITE_LAT = fatpim_pkg::WRITE_LAT,
  localparam int unsigned NBL = DATA_COLS + SUM_COLS
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // programming: one word line per request
  input  logic                               prog_en,
  input  logic [$clog2(ROWS)-1:0]            prog_row,
  input  logic [NBL-1:0][CELL_BITS-1:0]      prog_cells,
  output logic                               prog_busy,
  // compute read
  input  logic                               read_start,
  input  logic [ROWS-1:0]                    wl_bits,
  output logic                               read_done,
  output logic [NBL-1:0][BL_BITS-1:0]        bl_val,
  // soft-error injection (test hook)
  input  logic                               flt_en,
  input  logic [$clog2(ROWS)-1:0]            flt_row,
  input  logic [7:0]                         flt_col,
  input  logic [CELL_BITS-1:0]               flt_val
);
  localparam int unsigned CW = $clog2(WRITE_LAT + 1);
  localparam int unsigned RW = $clog2(READ_LAT + 1);

  logic [CELL_BITS-1:0] gcell [ROWS][NBL];
  logic [ROWS-1:0]      wl_q;
  logic [RW-1:0]        rd_cnt;
  logic                 rd_busy;
  logic [CW-1:0]        wr_cnt;

  assign prog_busy = (wr_cnt != '0);

  if (READ_LAT < 2) begin : g_bad_lat
    $error("xbar_array: READ_LAT must be at least 2");
  end

  // Cell array: written by programming or by a fault injection.
  always_ff @(posedge clk) begin
    if (prog_en && !prog_busy)
      for (int j = 0; j < NBL; j++) gcell[prog_row][j] <= prog_cells[j];
    if (flt_en && (int'(flt_col) < NBL))
      gcell[flt_row][flt_col] <= flt_val;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wr_cnt <= '0;
    else if (prog_en && !prog_busy) wr_cnt <= CW'(WRITE_LAT);
    else if (wr_cnt != '0) wr_cnt <= wr_cnt - 1'b1;
  end

  // Read: latch the word-line bits, wait READ_LAT cycles, then sum currents.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_busy   <= 1'b0;
      rd_cnt    <= '0;
      read_done <= 1'b0;
      wl_q      <= '0;
      bl_val    <= '0;
    end else begin
      read_done <= 1'b0;
      if (read_start && !rd_busy) begin
        rd_busy <= 1'b1;
        rd_cnt  <= RW'(READ_LAT - 1);   // done after READ_LAT cycles
        wl_q    <= wl_bits;
      end else if (rd_busy) begin
        if (rd_cnt == RW'(1)) begin
          rd_busy   <= 1'b0;
          read_done <= 1'b1;
          for (int j = 0; j < NBL; j++) begin
            logic [BL_BITS-1:0] acc;
            acc = '0;
            for (int i = 0; i < ROWS; i++)
              if (wl_q[i]) acc += BL_BITS'(gcell[i][j]);
            bl_val[j] <= acc;
          end
        end else begin
          rd_cnt <= rd_cnt - 1'b1;
        end
      end
    end
  end
endmodule
