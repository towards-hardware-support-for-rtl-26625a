// hamming_enc -- Hamming(31,26) encoder unit.
//
// Takes the 26 data bits in word bits [25:0] and returns the 31-bit codeword in
// bits [30:0] (bit 31 is 0). Codeword position p (1..31) is bit p-1; parity
// bits sit at positions 1, 2, 4, 8 and 16 and parity bit 2^k is the XOR of
// every other position whose index has bit k set; data bits fill the remaining
// positions in increasing order. Combinational. The code (31,26) is the
// paper's; the bit layout is the textbook one, chosen here.
module hamming_enc (
  input  logic [31:0] d_i,
  output logic [31:0] c_o
);
  always_comb begin
    int unsigned j;
    logic [31:1] cw;
    cw = '0;
    j  = 0;
    for (int p = 1; p <= 31; p++) begin
      if ((p & (p - 1)) != 0) begin
        cw[p] = d_i[j];
        j++;
      end
    end
    for (int k = 0; k < 5; k++) begin
      logic par;
      par = 1'b0;
      for (int p = 1; p <= 31; p++)
        if (((p >> k) & 1) == 1 && p != (1 << k)) par ^= cw[p];
      cw[1 << k] = par;
    end
    c_o = {1'b0, cw};
  end
endmodule
