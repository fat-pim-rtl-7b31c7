// tb_secded: encodes random and corner-case words, then decodes them clean,
// with every single-bit error (must be corrected) and with random double-bit
// errors (must be reported uncorrectable).
module tb_secded;
  int checks = 0, failures = 0;
  logic [63:0] data, dout;
  logic [71:0] code, rx;
  logic corr, uncorr;

  secded_enc u_enc (.data(data), .code(code));
  secded_dec u_dec (.code(rx), .data(dout), .corr(corr), .uncorr(uncorr));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int k = 0; k < 40; k++) begin
      data = (k == 0) ? '0 : (k == 1) ? '1 : {$urandom, $urandom};
      #1 rx = code;
      #1 chk(dout == data && !corr && !uncorr, "clean word");
      for (int p = 0; p < 72; p++) begin
        rx = code; rx[p] = ~rx[p];
        #1 chk(dout == data && corr && !uncorr, $sformatf("single error at %0d corrected", p));
      end
      for (int t = 0; t < 20; t++) begin
        int p1, p2;
        p1 = $urandom % 72;
        p2 = (p1 + 1 + $urandom % 71) % 72;
        rx = code; rx[p1] = ~rx[p1]; rx[p2] = ~rx[p2];
        #1 chk(uncorr, $sformatf("double error %0d,%0d detected", p1, p2));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
