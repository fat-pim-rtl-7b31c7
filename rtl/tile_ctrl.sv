// tile_ctrl: runs a tile's commands and its error-recovery policy.
//
// CMD_PROGRAM (ima, xbar, arg0 = weight base): records the base in a table
// of the tile's crossbars and has the preparator write the 128 word lines,
// with their sums, into the crossbar. The command ends when the last line
// has been handed to the IMA; its write finishes there on its own, and the
// crossbar controller holds back any operation until it has.
//
// CMD_INFER (ima, xbar_mask, arg0 = input address, arg1 = output address):
// has the preparator start one operation with the same input vector on every
// crossbar of the mask that is not marked faulty, waits until all of them are
// done, then looks at each crossbar's flags. A crossbar whose sum check
// passed has its 16 results written to eDRAM words arg1 + 16*xbar + col
// (zero-extended to 64 bits, ECC-encoded by the tile). A crossbar whose check
// failed is stalled and re-programmed from its recorded weight base, then the
// operation is re-run on the failed crossbars only. After MAX_RETRY re-runs
// that still fail, the crossbar is marked faulty (it receives no further
// operations), the command ends with err set and irq pulses. An uncorrectable
// ECC error in the eDRAM ends the command the same way.
//
// Counters: sum-check failures detected (per crossbar operation),
// re-programs, crossbars marked faulty. Commands are taken only when idle.
module tile_ctrl #(
  parameter int unsigned NIMA      = fatpim_pkg::IMAS_PER_TILE,
  parameter int unsigned MAX_RETRY = 1,
  localparam int unsigned NX = fatpim_pkg::XBARS_PER_IMA,
  localparam int unsigned NC = fatpim_pkg::NCOL,
  localparam int unsigned RB = fatpim_pkg::RES_BITS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         cmd_valid,
  input  fatpim_pkg::tile_cmd_t        cmd,
  output logic                         busy,
  output logic                         cmd_done,   // pulse
  output logic                         cmd_err,    // valid with cmd_done
  output logic                         irq,        // pulse
  output logic [31:0]                  cnt_detect,
  output logic [31:0]                  cnt_reprog,
  output logic [31:0]                  cnt_faulty,
  output logic [NIMA-1:0][NX-1:0]      fault_map,
  // preparator
  output logic                         prep_start,
  output logic                         prep_mode,
  output logic [3:0]                   prep_ima,
  output logic [3:0]                   prep_xbar,
  output logic [NX-1:0]                prep_mask,
  output fatpim_pkg::eaddr_t           prep_base,
  input  logic                         prep_done,
  input  logic                         prep_abort,
  // IMA status through the interconnect
  output logic [3:0]                   rd_ima,
  output logic [3:0]                   rd_xbar,
  input  logic [NX-1:0]                rd_busy,
  input  logic [NX-1:0]                rd_done,
  input  logic [NX-1:0]                rd_err,
  input  logic [NC-1:0][RB-1:0]        rd_res,
  // result write to eDRAM (64-bit data, encoded by the tile)
  output logic                         wr_en,
  output fatpim_pkg::eaddr_t           wr_addr,
  output logic [63:0]                  wr_data
);
  import fatpim_pkg::*;

  typedef enum logic [3:0] {
   
    T_IDLE, T_PROG, T_PROG_WAIT, T_RUN, T_RUN_WAIT, T_IMA_WAIT, T_SCAN, T_WRITE,
    T_DECIDE, T_REPROG, T_REPROG_WAIT, T_FINISH, T_START_WAIT
  } tstate_e;
  tstate_e state;

  tile_cmd_t    c;
  eaddr_t       wbase [NIMA][NX];
  logic [NX-1:0] mask, fail;
  logic [3:0]   x, col;
  logic [3:0]   retry;
  logic         err_q;

  assign busy    = (state != T_IDLE);
  assign rd_ima  = c.ima;
  assign rd_xbar = x;
  assign wr_en   = (state == T_WRITE);
  assign wr_addr = eaddr_t'(c.arg1 + eaddr_t'({x, col}));
  assign wr_data = 64'(rd_res[col]);

  always_comb begin
    prep_start = (state == T_PROG) || (state == T_RUN) || (state == T_REPROG && fail[x]);
    prep_mode  = (state == T_RUN);
    prep_ima   = c.ima;
    prep_xbar  = (state == T_PROG) ? c.xbar : x;
    prep_mask  = mask;
    prep_base  = (state == T_RUN) ? c.arg0
               : (state == T_PROG) ? c.arg0 : wbase[c.ima][x];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= T_IDLE;
      c          <= '0;
      mask       <= '0;
      fail       <= '0;
      x          <= '0;
      col        <= '0;
      retry      <= '0;
      err_q      <= 1'b0;
      cmd_done   <= 1'b0;
      cmd_err    <= 1'b0;
      irq        <= 1'b0;
      cnt_detect <= '0;
      cnt_reprog <= '0;
      cnt_faulty <= '0;
      fault_map  <= '0;
      for (int i = 0; i < NIMA; i++)
        for (int j = 0; j < NX; j++) wbase[i][j] <= '0;
    end else begin
      cmd_done <= 1'b0;
      irq      <= 1'b0;
      unique case (state)
        T_IDLE: if (cmd_valid) begin
          c     <= cmd;
          err_q <= 1'b0;
          retry <= '0;
          x     <= '0;
          col   <= '0;
          if (cmd.op == CMD_PROGRAM && int'(cmd.ima) < NIMA && int'(cmd.xbar) < NX)
            state <= T_PROG;
          else if (cmd.op == CMD_INFER && int'(cmd.ima) < NIMA) begin
            mask  <= cmd.xbar_mask & ~fault_map[cmd.ima];
            state <= ((cmd.xbar_mask & ~fault_map[cmd.ima]) == '0) ? T_FINISH : T_RUN;
          end else
            state <= T_FINISH;
        end
        T_PROG: begin
          wbase[c.ima][c.xbar] <= c.arg0;
          state <= T_PROG_WAIT;
        end
        T_PROG_WAIT: if (prep_done) begin
          err_q <= prep_abort;
          state <= T_FINISH;
        end
        T_RUN: state <= T_RUN_WAIT;
        T_RUN_WAIT: if (prep_done) begin
          if (prep_abort) begin
            err_q <= 1'b1;
            state <= T_FINISH;
          end else state <= T_START_WAIT;
        end
        // The request still has to cross the interconnect: wait until the
        // crossbars have started, so that old done flags are not taken.
        T_START_WAIT: if ((rd_busy & mask) == mask) state <= T_IMA_WAIT;
        T_IMA_WAIT: if ((rd_done & mask) == mask && (rd_busy & mask) == '0) begin
          fail  <= '0;
          x     <= '0;
          state <= T_SCAN;
        end
        T_SCAN: begin
          if (mask[x] && rd_err[x]) begin
            fail[x]    <= 1'b1;
            cnt_detect <= cnt_detect + 1;
          end
          if (mask[x] && !rd_err[x]) begin
            col   <= '0;
            state <= T_WRITE;
          end else if (int'(x) == NX - 1) state <= T_DECIDE;
          else x <= x + 1'b1;
        end
        T_WRITE: begin
          col <= col + 1'b1;
          if (int'(col) == NC - 1) begin
            if (int'(x) == NX - 1) state <= T_DECIDE;
            else begin
              x     <= x + 1'b1;
              state <= T_SCAN;
            end
          end
        end
        T_DECIDE: begin
          x <= '0;
          if (fail == '0) state <= T_FINISH;
          else if (int'(retry) < MAX_RETRY) state <= T_REPROG;
          else begin
            fault_map[c.ima] <= fault_map[c.ima] | fail;
            cnt_faulty       <= cnt_faulty + 32'($countones(fail));
            err_q            <= 1'b1;
            state            <= T_FINISH;
          end
        end
        // Stall and re-program each failed crossbar in turn.
        T_REPROG: begin
          if (fail[x]) begin
            cnt_reprog <= cnt_reprog + 1;
            state      <= T_REPROG_WAIT;
          end else if (int'(x) == NX - 1) begin
            retry <= retry + 1'b1;
            mask  <= fail;
            state <= T_RUN;
          end else x <= x + 1'b1;
        end
        T_REPROG_WAIT: if (prep_done) begin
          if (prep_abort) begin
            err_q <= 1'b1;
            state <= T_FINISH;
          end else if (int'(x) == NX - 1) begin
            retry <= retry + 1'b1;
            mask  <= fail;
            state <= T_RUN;
          end else begin
            x     <= x + 1'b1;
            state <= T_REPROG;
          end
        end
        T_FINISH: begin
          cmd_done <= 1'b1;
          cmd_err  <= err_q;
          irq      <= err_q;
          state    <= T_IDLE;
        end
        default: state <= T_IDLE;
      endcase
    end
  end
endmodule
