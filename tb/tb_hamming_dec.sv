// tb_hamming_dec -- checks the Hamming(31,26) decoder: clean codewords decode
// to their data with no correction; a codeword with any single bit flipped
// decodes to the same data with the corrected flag and the flipped position as
// syndrome. Codewords are built here with explicit parity masks.
module tb_hamming_dec;
  `include "tb/tb_check.svh"
  logic [31:0] c, d;
  hamming_dec dut (.c_i(c), .d_o(d));

  function automatic logic [31:0] ref_enc(input logic [25:0] x);
    logic [31:0] cw;
    int j;
    cw = '0; j = 0;
    for (int p = 1; p < 32; p++)
      if (p != 1 && p != 2 && p != 4 && p != 8 && p != 16) begin cw[p] = x[j]; j++; end
    cw[1]  = ^(cw & 32'hAAAA_AAA8);
    cw[2]  = ^(cw & 32'hCCCC_CCC8);
    cw[4]  = ^(cw & 32'hF0F0_F0E0);
    cw[8]  = ^(cw & 32'hFF00_FE00);
    cw[16] = ^(cw & 32'hFFFE_0000);
    return {1'b0, cw[31:1]};
  endfunction

  initial begin
    for (int i = 0; i < 200; i++) begin
      logic [25:0] x;
      int pos;
      x = 26'($urandom);
      c = ref_enc(x);
      #1;
      `CHECK(d == {6'd0, x}, "clean decode")
      pos = 1 + (i % 31);
      c[pos-1] = !c[pos-1];
      #1;
      `CHECK(d[25:0] == x, "corrected data")
      `CHECK(d[31] == 1'b1 && d[30:26] == 5'(pos), "correction flag and syndrome")
    end
    `TB_END
  end
  initial begin #100000; failures++; `TB_END end
endmodule
