// tb_adc_arbiter: crossbars request ADC channels at random and hold them for
// a random time. Every cycle the tb checks that no channel serves two
// crossbars, that no more than NADC crossbars are bound, that a free channel
// is never left idle while a crossbar waits for longer than NADC cycles
// (one new binding per cycle), and
// that every request is served.
module tb_adc_arbiter;
  localparam int NREQ = 12, NADC = 4;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic [NREQ-1:0] req = '0, grant;
  logic [NADC-1:0] release_i = '0, bound;
  logic [NREQ-1:0][1:0] chan_of;
  logic [NADC-1:0][3:0] bound_xbar;
  int hold [NADC];
  int served [NREQ];
  int waited;

  adc_arbiter #(.NREQ(NREQ), .NADC(NADC)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int i = 0; i < NREQ; i++) served[i] = 0;
    for (int a = 0; a < NADC; a++) hold[a] = 0;
    waited = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      release_i = '0;
      // consistency of the binding
      chk($countones(grant) == $countones(bound), "granted count equals bound count");
      for (int a = 0; a < NADC; a++)
        if (bound[a]) chk(grant[bound_xbar[a]] && chan_of[bound_xbar[a]] == 2'(a), "binding consistent");
      // no idle channel while someone has waited a full cycle
      if ((req & ~grant) != '0 && bound != '1) waited++; else waited = 0;
      chk(waited <= NADC, "free channel left idle with a waiting crossbar");
      // channels hold a random time, then release and the crossbar drops req
      for (int a = 0; a < NADC; a++)
        if (bound[a]) begin
          hold[a]++;
          if (hold[a] > 3 + int'($urandom % 20)) begin
            release_i[a] = 1;
            served[bound_xbar[a]]++;
            req[bound_xbar[a]] = 0;
            hold[a] = 0;
          end
        end
      for (int x = 0; x < NREQ; x++)
        if (!req[x] && !grant[x] && ($urandom % 4 == 0)) req[x] = 1;
    end
    for (int x = 0; x < NREQ; x++) chk(served[x] > 20, $sformatf("crossbar %0d served %0d times", x, served[x]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
