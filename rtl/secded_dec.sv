// secded_dec: (72,64) extended Hamming decoder, the check the preparator
// applies to every eDRAM word before it goes to a crossbar.
//
// The syndrome is the XOR of the indices of all set bits 1..71 and the overall
// parity covers all 72 bits. Odd parity means a single error at the syndrome
// position (position 0 is the parity bit itself), which is corrected (corr).
// Even parity with a non-zero syndrome means two errors, which cannot be
// corrected (uncorr); data is then the uncorrected payload. Layout as in
// secded_enc. Purely combinational.
module secded_dec (
  input  logic [71:0] code,
  output logic [63:0] data,
  output logic        corr,
  output logic        uncorr
);
  always_comb begin
    logic [6:0]  syn;
    logic        par;
    logic [71:0] fixed;
    int unsigned d;
    syn = '0;
    for (int p = 1; p < 72; p++)
      if (code[p]) syn ^= 7'(p);
    par    = ^code;
    fixed  = code;
    corr   = 1'b0;
    uncorr = 1'b0;
    if (par) begin
      corr = 1'b1;
      if (int'(syn) < 72) fixed[syn] = ~code[syn];
      else uncorr = 1'b1;   // syndrome outside the codeword: more than 2 errors
    end else if (syn != '0) begin
      uncorr = 1'b1;
    end
    data = '0;
    d = 0;
    for (int p = 1; p < 72; p++)
      if ((p & (p - 1)) != 0) begin
        data[d] = fixed[p];
        d++;
      end
  end
endmodule
