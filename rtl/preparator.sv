// preparator: moves weights and inputs from the eDRAM to the IMAs.
//
// Every word it reads passes the SEC-DED decoder: a single-bit error is
// corrected and counted (ecc_corr pulse), a double-bit error aborts the job
// (ecc_uncorr pulse, then done with ecc_abort set) so that no unchecked value reaches a
// crossbar.
//
// PROGRAM job (mode 0): for each word line r of the target crossbar it reads
// the 4 words at base + 4r .. base + 4r + 3, which hold the 16 weights of the
// line (weight c in bits [16c+15:16c] of the 256-bit line, so cell j is bits
// [2j+1:2j]), adds the 128 two-bit cell values into the word-line sum and
// sends the line, data cells followed by the sum spread over SUM_COLS two-bit
// cells (low bits first), as one REQ_PROG request. The next line is fetched
// while the crossbar is still writing the previous one.
//
// INFER job (mode 1): it reads the 32 words at base, which hold the 128
// 16-bit inputs (input i in bits [16i+15:16i]), and sends one REQ_OP request
// that starts the operation on every crossbar of xbar_mask.
//
// eDRAM reads have one cycle of latency; a word is requested every other
// cycle. start is taken only when idle.
module preparator (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               start,
  input  logic                               mode,       // 0 program, 1 infer
  input  logic [3:0]                         ima,
  input  logic [3:0]                         xbar,
  input  logic [fatpim_pkg::XBARS_PER_IMA-1:0] xbar_mask,
  input  fatpim_pkg::eaddr_t                 base,
  output logic                               busy,
  output logic                               done,       // pulse
  output logic                               ecc_abort,      // with done: ECC failure
  output logic                               ecc_corr,
  output logic                               ecc_uncorr,
  // eDRAM read port
  output logic                               mem_en,
  output fatpim_pkg::eaddr_t                 mem_addr,
  input  logic [71:0]                        mem_rdata,
  // request to the interconnect
  output logic                               req_valid,
  output logic [3:0]                         req_ima,
  output fatpim_pkg::ima_req_t               req,
  input  logic                               req_ready
);
  import fatpim_pkg::*;

  typedef enum logic [2:0] {P_IDLE, P_RD, P_WAIT, P_SUM, P_SEND} pstate_e;
  pstate_e state;

  logic                         m_infer;
  logic [3:0]                   m_ima, m_xbar;
  logic [XBARS_PER_IMA-1:0]     m_mask;
  eaddr_t                       m_base;
  logic [6:0]                   row;
  logic [4:0]                   w;         // word within line / vector
  logic [ROWS*IN_BITS-1:0]      buf_bits;  // 2048 bits: a line uses the low 256
  logic [63:0]                  dec_data;
  logic                         dec_corr, dec_uncorr;
  logic [2*SUM_COLS-1:0]        line_sum;
  ima_req_t                     req_q;

  secded_dec u_dec (.code(mem_rdata), .data(dec_data), .corr(dec_corr), .uncorr(dec_uncorr));

  assign busy      = (state != P_IDLE);
  assign mem_en    = (state == P_RD);
  assign mem_addr  = m_infer ? eaddr_t'(m_base + eaddr_t'(w))
                             : eaddr_t'(m_base + eaddr_t'({row, 2'b00}) + eaddr_t'(w));
  assign req_valid = (state == P_SEND);
  assign req_ima   = m_ima;
  assign req       = req_q;

  // Word-line sum with one adder chain (combinational, registered in P_SUM).
  assign line_sum  = row_sum(buf_bits[ROW_BITS-1:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= P_IDLE;
      m_infer    <= 1'b0;
      m_ima      <= '0;
      m_xbar     <= '0;
      m_mask     <= '0;
      m_base     <= '0;
      row        <= '0;
      w          <= '0;
      buf_bits   <= '0;
      req_q      <= '0;
      done       <= 1'b0;
      ecc_abort      <= 1'b0;
      ecc_corr   <= 1'b0;
      ecc_uncorr <= 1'b0;
    end else begin
      done       <= 1'b0;
      ecc_corr   <= 1'b0;
      ecc_uncorr <= 1'b0;
      unique case (state)
        P_IDLE: if (start) begin
          m_infer <= mode;
          m_ima   <= ima;
          m_xbar  <= xbar;
          m_mask  <= xbar_mask;
          m_base  <= base;
          row     <= '0;
          w       <= '0;
          ecc_abort   <= 1'b0;
          state   <= P_RD;
        end
        P_RD:   state <= P_WAIT;
        P_WAIT: begin
          buf_bits[64*w +: 64] <= dec_data;
          ecc_corr   <= dec_corr && !dec_uncorr;
          ecc_uncorr <= dec_uncorr;
          if (dec_uncorr) begin
            ecc_abort <= 1'b1;
            done  <= 1'b1;
            state <= P_IDLE;
          end else if (m_infer ? (int'(w) == WORDS_PER_VEC - 1) : (int'(w) == WORDS_PER_ROW - 1)) begin
            w     <= '0;
            state <= P_SUM;
          end else begin
            w     <= w + 1'b1;
            state <= P_RD;
          end
        end
        P_SUM: begin
          req_q <= '0;
          if (m_infer) begin
            req_q.kind      <= REQ_OP;
            req_q.xbar_mask <= m_mask;
            req_q.vec       <= buf_bits;
          end else begin
            req_q.kind  <= REQ_PROG;
            req_q.xbar  <= m_xbar;
            req_q.row   <= row;
            req_q.cells <= {line_sum, buf_bits[ROW_BITS-1:0]};
          end
          state <= P_SEND;
        end
        P_SEND: if (req_ready) begin
          if (m_infer || row == 7'(ROWS - 1)) begin
            done  <= 1'b1;
            state <= P_IDLE;
          end else begin
            row   <= row + 1'b1;
            state <= P_RD;
          end
        end
        default: state <= P_IDLE;
      endcase
    end
  end
endmodule
