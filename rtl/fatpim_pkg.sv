// fatpim_pkg: sizes, types and helper functions shared by the sum-checked
// ReRAM crossbar accelerator.
//
// The crossbar geometry (128 word lines, 128 data bit lines, 5 sum bit lines,
// 2-bit cells), the 9-bit ADC, the 16-bit weights and inputs, 12 crossbars and
// 4 ADC channels per IMA, 12 IMAs per tile, 16 tiles per chip and a 42 MiB
// eDRAM per tile are the published configuration. The timing constants turn
// the 100 ns read and 200 ns write latencies into cycles of a 1.28 GHz clock,
// one cycle per ADC sample. Everything else here (word formats, opcodes,
// tags) is this implementation's own choice.
package fatpim_pkg;

  // ---- crossbar ------------------------------------------------------------
  localparam int unsigned ROWS        = 128;  // word lines
  localparam int unsigned DATA_COLS   = 128;  // data bit lines
  localparam int unsigned SUM_COLS    = 5;    // sum bit lines
  localparam int unsigned NUM_BL      = DATA_COLS + SUM_COLS;
  localparam int unsigned CELL_BITS   = 2;
  localparam int unsigned BL_BITS     = 9;    // ADC resolution
  localparam int unsigned W_BITS      = 16;   // weight width
  localparam int unsigned IN_BITS     = 16;   // input width (one bit per read)
  localparam int unsigned SLICES      = W_BITS / CELL_BITS;     // 8 cells per weight
  localparam int unsigned NCOL        = DATA_COLS / SLICES;     // 16 weights per row
  localparam int unsigned RES_BITS    = 39;   // 16b x 16b x 128 rows
  localparam int unsigned ROW_BITS    = DATA_COLS * CELL_BITS;  // 256

  // ---- timing (cycles of the 1.28 GHz sample clock) ------------------------
  localparam int unsigned READ_LAT    = 128;  // 100 ns
  localparam int unsigned WRITE_LAT   = 256;  // 200 ns

  // ---- hierarchy ------------------------------------------------------------
  localparam int unsigned XBARS_PER_IMA = 12;
  localparam int unsigned ADCS_PER_IMA  = 4;
  localparam int unsigned IMAS_PER_TILE = 12;
  localparam int unsigned TILES_PER_CHIP = 16;

  // ---- eDRAM ---------------------------------------------------------------
  localparam longint unsigned EDRAM_BYTES = 64'd42 * 1024 * 1024;
  localparam int unsigned EDRAM_WORDS = int'(EDRAM_BYTES / 8);  // 64-bit data words
  localparam int unsigned EADDR_BITS  = 23;
  localparam int unsigned ECC_BITS    = 72;   // (72,64) SEC-DED codeword
  localparam int unsigned WORDS_PER_ROW = ROW_BITS / 64;        // 4
  localparam int unsigned WORDS_PER_VEC = ROWS * IN_BITS / 64;  // 32

  typedef logic [CELL_BITS-1:0] cell_t;
  typedef logic [BL_BITS-1:0]   blval_t;
  typedef logic [RES_BITS-1:0]  result_t;
  typedef logic [IN_BITS-1:0]   inval_t;
  typedef logic [EADDR_BITS-1:0] eaddr_t;

  // Tag that travels with each ADC code.
  typedef struct packed {
    logic       valid;
    logic [7:0] bl;        // bit line 0..NUM_BL-1
    logic [3:0] bitpos;    // input bit of this read
    logic       first;     // first code of the operation
    logic       last_rd;   // last code of this read
    logic       last_op;   // last code of the operation
  } adc_tag_t;

  // Request carried from the preparator to an IMA.
  typedef enum logic [1:0] {REQ_NONE = 2'd0, REQ_PROG = 2'd1, REQ_OP = 2'd2} req_kind_e;

  typedef struct packed {
    req_kind_e                       kind;
    logic [XBARS_PER_IMA-1:0]        xbar_mask;  // REQ_OP: crossbars to start
    logic [3:0]                      xbar;       // REQ_PROG: target crossbar
    logic [6:0]                      row;        // REQ_PROG: word line
    logic [NUM_BL-1:0][CELL_BITS-1:0] cells;     // REQ_PROG: data + sum cells
    logic [ROWS-1:0][IN_BITS-1:0]    vec;        // REQ_OP: input vector
  } ima_req_t;

  // Tile host bus.
  typedef struct packed {
    logic        valid;
    logic        we;
    logic [31:0] addr;   // bit 31: 1 = eDRAM window, 0 = registers
    logic [63:0] wdata;
  } host_req_t;

  typedef enum logic [1:0] {CMD_NOP = 2'd0, CMD_PROGRAM = 2'd1, CMD_INFER = 2'd2} cmd_op_e;

  typedef struct packed {
    cmd_op_e                  op;
    logic [3:0]               ima;
    logic [3:0]               xbar;       // CMD_PROGRAM
    logic [XBARS_PER_IMA-1:0] xbar_mask;  // CMD_INFER
    eaddr_t                   arg0;       // weight base / input address
    eaddr_t                   arg1;       // output address
  } tile_cmd_t;

  // Sum of the 128 two-bit data cells of a word line (value stored in the
  // sum region, spread over SUM_COLS two-bit cells, low bits first).
  function automatic logic [2*SUM_COLS-1:0] row_sum(input logic [ROW_BITS-1:0] row);
    logic [2*SUM_COLS-1:0] s;
    s = '0;
    for (int j = 0; j < DATA_COLS; j++) s += (2*SUM_COLS)'(row[2*j +: 2]);
    return s;
  endfunction

endpackage
