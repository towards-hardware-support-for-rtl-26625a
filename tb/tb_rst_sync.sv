// tb_rst_sync -- checks that the reset asserts without a clock edge and is
// released on the second rising edge after the asynchronous input rises.
module tb_rst_sync;
  `include "tb/tb_check.svh"
  logic clk = 0, arst_n = 0, rst;
  always #5 clk = ~clk;
  rst_sync dut (.clk, .arst_ni(arst_n), .rst_o(rst));
  initial begin
    repeat (3) @(posedge clk);
    #1 `CHECK(rst, "in reset")
    for (int k = 0; k < 3; k++) begin
      @(negedge clk); arst_n = 1;
      @(posedge clk); #1 `CHECK(rst, "held after first edge")
      @(posedge clk); #1 `CHECK(!rst, "released at second edge")
      repeat (3) @(posedge clk);
      #2 arst_n = 0;
      #1 `CHECK(rst, "asserted asynchronously")
    end
    `TB_END
  end
  initial begin repeat (200) @(posedge clk); failures++; `TB_END end
endmodule
