// adc_arbiter: shares an IMA's ADC channels among its crossbars.
//
// An ADC channel is one ADC with its own shift-and-add unit and sum checker.
// A crossbar raises req for the whole of an operation. Each cycle the arbiter
// binds at most one waiting crossbar, chosen round robin, to the lowest free
// channel; the binding holds until that channel pulses release at the end of
// the operation. grant[x] is high while crossbar x is bound, and chan_of[x]
// names its channel. The paper states only that a crossbar waits until an ADC
// is free; binding for a whole operation and the round-robin order are this
// design's choices.
module adc_arbiter #(
  parameter int unsigned NREQ = fatpim_pkg::XBARS_PER_IMA,
  parameter int unsigned NADC = fatpim_pkg::ADCS_PER_IMA,
  localparam int unsigned XW = (NREQ > 1) ? $clog2(NREQ) : 1,
  localparam int unsigned AW = (NADC > 1) ? $clog2(NADC) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [NREQ-1:0]          req,
  input  logic [NADC-1:0]          release_i,
  output logic [NREQ-1:0]          grant,
  output logic [NREQ-1:0][AW-1:0]  chan_of,
  output logic [NADC-1:0]          bound,
  output logic [NADC-1:0][XW-1:0]  bound_xbar
);
  logic [XW-1:0] rr_ptr;
  logic          pick_ok, free_ok;
  logic [XW-1:0] pick;
  logic [AW-1:0] free_ch;

  // Round-robin choice of a waiting, unbound crossbar; lowest free channel.
  always_comb begin
    pick_ok = 1'b0;
    pick    = '0;
    for (int k = 0; k < NREQ; k++) begin
      logic [XW-1:0] x;
      x = XW'((int'(rr_ptr) + k) % NREQ);
      if (!pick_ok && req[x] && !grant[x]) begin
        pick_ok = 1'b1;
        pick    = XW'(x);
      end
    end
    free_ok = 1'b0;
    free_ch = '0;
    for (int a = NADC - 1; a >= 0; a--)
      if (!bound[a]) begin
        free_ok = 1'b1;
        free_ch = AW'(a);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_ptr     <= '0;
      grant      <= '0;
      chan_of    <= '0;
      bound      <= '0;
      bound_xbar <= '0;
    end else begin
      for (int a = 0; a < NADC; a++)
        if (release_i[a] && bound[a]) begin
          bound[a]             <= 1'b0;
          grant[bound_xbar[a]] <= 1'b0;
        end
      if (pick_ok && free_ok) begin
        bound[free_ch]      <= 1'b1;
        bound_xbar[free_ch] <= pick;
        grant[pick]         <= 1'b1;
        chan_of[pick]       <= free_ch;
        rr_ptr              <= XW'((int'(pick) + 1) % NREQ);
      end
    end
  end

  // A channel is never bound to two crossbars, and a bound crossbar's channel
  // points back at it.
  for (genvar x = 0; x < NREQ; x++) begin : g_chk
    a_bind: assert property (@(posedge clk) disable iff (!rst_n)
      grant[x] |-> (bound[chan_of[x]] && bound_xbar[chan_of[x]] == XW'(x)))
      else $error("adc_arbiter: inconsistent binding for crossbar %0d", x);
  end
endmodule
