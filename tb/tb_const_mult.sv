// tb_const_mult -- checks the constant multiplier against a 64-bit product
// truncated in the testbench, for random and corner operands and two constants.
module tb_const_mult;
  `include "tb/tb_check.svh"
  logic [31:0] a, y3, y7;
  const_mult #(.MULT_CONST(32'd3)) dut3 (.a_i(a), .y_o(y3));
  const_mult #(.MULT_CONST(32'd7)) dut7 (.a_i(a), .y_o(y7));
  initial begin
    for (int i = 0; i < 200; i++) begin
      longint unsigned e3, e7;
      a = (i == 0) ? 32'hFFFF_FFFF : (i == 1) ? 32'd0 : $urandom;
      #1;
      e3 = longint'(a) * 3;
      e7 = longint'(a) * 7;
      `CHECK(y3 == e3[31:0], "x3 product")
      `CHECK(y7 == e7[31:0], "x7 product")
    end
    `TB_END
  end
  initial begin #100000; failures++; `TB_END end
endmodule
