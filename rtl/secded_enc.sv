// secded_enc: (72,64) extended Hamming encoder for eDRAM words.
//
// Codeword bit p (1..71) is a Hamming position: the seven positions that are
// powers of two carry check bits, the other 64 carry the data in increasing
// order; bit 0 is the parity of bits 1..71. Check bit 2^k is the XOR of all
// positions whose index has bit k set. Purely combinational.
module secded_enc (
  input  logic [63:0] data,
  output logic [71:0] code
);
  always_comb begin
    int unsigned d;
    code = '0;
    d = 0;
    for (int p = 1; p < 72; p++)
      if ((p & (p - 1)) != 0) begin
        code[p] = data[d];
        d++;
      end
    for (int k = 0; k < 7; k++) begin
      logic par;
      par = 1'b0;
      for (int p = 1; p < 72; p++)
        if (((p >> k) & 1) != 0 && p != (1 << k)) par ^= code[p];
      code[1 << k] = par;
    end
    code[0] = ^code[71:1];
  end
endmodule
