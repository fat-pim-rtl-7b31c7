// tb_adc_sequencer: a held sample is present for three reads in a row; the
// tb checks that the sequencer selects bit lines 0..132 one per cycle, pulses
// release with the last, runs the next read with no gap when the S&H is
// refilled in the release cycle, and that the tags (one cycle later) carry
// bit line, input bit, first, last-of-read and last-of-operation flags.
module tb_adc_sequencer;
  import fatpim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic active = 0, sh_full = 0, sh_last = 0;
  logic [3:0] sh_bit = 0;
  logic [7:0] sel;
  logic sample, sh_release;
  adc_tag_t tag_out;
  int n_sample, exp_bl, exp_bit, rel_cnt;
  logic [7:0] prev_sel;
  logic prev_sample;
  logic [3:0] prev_bit;
  logic prev_last;

  adc_sequencer dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Selected bit lines, sampled at the clock edge.
  always @(posedge clk)
    if (sample) begin
      chk(int'(sel) == exp_bl, $sformatf("sel %0d expected %0d", sel, exp_bl));
      chk(sh_release == (exp_bl == NUM_BL - 1), "release with last bit line");
      exp_bl = (exp_bl + 1) % NUM_BL;
      n_sample++;
    end

  // S&H model: refilled in the release cycle with the next input bit.
  always @(posedge clk) begin
    prev_sample <= sample; prev_sel <= sel; prev_bit <= sh_bit; prev_last <= sh_last;
    if (sh_release) begin
      rel_cnt <= rel_cnt + 1;
      if (sh_bit == 4'd2) sh_full <= 0;
      else begin
        sh_bit  <= sh_bit + 1;
        sh_last <= (sh_bit + 1 == 4'd2);
      end
    end
  end

  initial begin
    rel_cnt = 0; n_sample = 0; exp_bl = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    active = 1; sh_full = 1; sh_bit = 0; sh_last = 0;
    for (int cyc = 0; cyc < 3 * NUM_BL + 10; cyc++) begin
      // tag for the previous cycle's sample
      chk(tag_out.valid == prev_sample, "tag valid follows sample by one cycle");
      if (prev_sample) begin
        chk(tag_out.bl == prev_sel, "tag bit line");
        chk(tag_out.bitpos == prev_bit, "tag input bit");
        chk(tag_out.first == (prev_sel == 0 && prev_bit == 0), "first flag");
        chk(tag_out.last_rd == (int'(prev_sel) == NUM_BL - 1), "last-of-read flag");
        chk(tag_out.last_op == (int'(prev_sel) == NUM_BL - 1 && prev_last), "last-of-op flag");
      end
      @(negedge clk);
    end
    chk(n_sample == 3 * NUM_BL, $sformatf("%0d samples for 3 reads, expected %0d (no gap)", n_sample, 3 * NUM_BL));
    chk(rel_cnt == 3, "three releases");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
