// hamming_dec -- Hamming(31,26) decoder unit with single-error correction.
//
// Takes a codeword in bits [30:0] (layout as in hamming_enc), computes the
// 5-bit syndrome (XOR of the indices of all set positions), flips the bit at
// the syndrome position when it is non-zero, and returns the 26 data bits in
// [25:0], the syndrome in [30:26] and a "corrected" flag in bit 31.
// Combinational. The code is the paper's; the output layout is this design's.
module hamming_dec (
  input  logic [31:0] c_i,
  output logic [31:0] d_o
);
  always_comb begin
    int unsigned j;
    logic [4:0]  syn;
    logic [31:1] cw;
    logic [25:0] data;
    cw  = c_i[30:0];
    syn = '0;
    for (int p = 1; p <= 31; p++)
      if (cw[p]) syn ^= 5'(p);
    if (syn != '0) cw[syn] = !cw[syn];
    j    = 0;
    data = '0;
    for (int p = 1; p <= 31; p++) begin
      if ((p & (p - 1)) != 0) begin
        data[j] = cw[p];
        j++;
      end
    end
    d_o = {(syn != '0), syn, data};
  end
endmodule
