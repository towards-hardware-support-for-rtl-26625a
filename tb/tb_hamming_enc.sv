// tb_hamming_enc -- checks the Hamming(31,26) encoder: every data bit appears
// at its textbook position and the codeword has a zero syndrome, computed here
// with explicit parity masks.
module tb_hamming_enc;
  `include "tb/tb_check.svh"
  logic [31:0] d, c;
  hamming_enc dut (.d_i(d), .c_o(c));

  // data positions (1-based) in increasing order, skipping powers of two
  function automatic logic [31:0] ref_enc(input logic [25:0] x);
    logic [31:0] cw; // cw[p] for p = 1..31
    int j;
    cw = '0; j = 0;
    for (int p = 1; p < 32; p++)
      if (p != 1 && p != 2 && p != 4 && p != 8 && p != 16) begin cw[p] = x[j]; j++; end
    cw[1]  = ^(cw & 32'hAAAA_AAA8);  // positions with bit0 set, minus 1
    cw[2]  = ^(cw & 32'hCCCC_CCC8);  // bit1 set, minus 2
    cw[4]  = ^(cw & 32'hF0F0_F0E0);  // bit2 set, minus 4
    cw[8]  = ^(cw & 32'hFF00_FE00);  // bit3 set, minus 8
    cw[16] = ^(cw & 32'hFFFE_0000);  // bit4 set, minus 16
    return {1'b0, cw[31:1]};
  endfunction

  initial begin
    for (int i = 0; i < 300; i++) begin
      d = (i < 26) ? (32'd1 << i) : $urandom;
      #1;
      `CHECK(c == ref_enc(d[25:0]), "codeword")
    end
    `TB_END
  end
  initial begin #100000; failures++; `TB_END end
endmodule
