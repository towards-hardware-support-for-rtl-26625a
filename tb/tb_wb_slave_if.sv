// tb_wb_slave_if -- writes packets into the WB slave interface and checks:
// ACK one cycle after each accepted write, buffer contents by SEL, full flag
// after the last register, STALL (and no ACK) on a register with unread data,
// release by rd_done, and reads returning the addressed register.
module tb_wb_slave_if;
  import wb_pkg::*;
  `include "tb/tb_check.svh"
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  wb_x2s_t s_i;
  wb_s2x_t s_o;
  packet_t buf_o;
  logic    full, rd_done;

  wb_slave_if dut (.clk, .rst, .s_i, .s_o, .buf_o, .full_o(full), .rd_done_i(rd_done));

  // one write strobe; returns whether it was stalled, and the ACK seen next cycle
  task automatic wr(input int sel, input word_t d, output bit stalled, output bit acked);
    @(negedge clk);
    s_i = '{cyc: 1, stb: 1, we: 1, sel: 3'(sel), dat: d};
    #1 stalled = s_o.stall;
    @(negedge clk);
    acked = s_o.ack;
    s_i.stb = 0;
  endtask

  initial begin
    bit st, ak;
    s_i = '0; rd_done = 0;
    repeat (3) @(negedge clk); rst = 0;
    for (int p = 0; p < 2; p++) begin
      for (int i = 0; i < PKT_WORDS; i++) begin
        `CHECK(!full, "not full before last word")
        wr(i, 32'h100 * p + i, st, ak);
        `CHECK(!st && ak, "write accepted and acked")
      end
      @(negedge clk);
      `CHECK(full, "full after 8 words")
      for (int i = 0; i < PKT_WORDS; i++) `CHECK(buf_o[i] == 32'h100 * p + i, "buffer content")
      wr(3, 32'hDEAD, st, ak);
      `CHECK(st && !ak, "stall and no ack when register unread")
      `CHECK(buf_o[3] == 32'h100 * p + 3, "stalled write not stored")
      // read back register 5
      @(negedge clk); s_i = '{cyc: 1, stb: 1, we: 0, sel: 3'd5, dat: '0};
      #1 `CHECK(!s_o.stall, "read not stalled")
      @(negedge clk); s_i.stb = 0;
      `CHECK(s_o.ack && s_o.dat == 32'h100 * p + 5, "read returns register")
      @(negedge clk); rd_done = 1;
      @(negedge clk); rd_done = 0;
      `CHECK(!full, "released after rd_done")
    end
    s_i.cyc = 0;
    `TB_END
  end
  initial begin repeat (2000) @(posedge clk); failures++; `TB_END end
endmodule
