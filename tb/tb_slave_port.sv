// tb_slave_port -- two masters write to one slave port whose slave model
// acknowledges one cycle after each accepted strobe. Checks: grant one cycle
// after the request, only the granted master's strobes and data reach the
// slave, ACKs go only to the granted master, the grant moves to the other
// master after `limit` packages, CYC to the slave follows the grant, and a
// port in reset grants nothing.
module tb_slave_port;
  import wb_pkg::*;
  `include "tb/tb_check.svh"
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic     [3:0] req, gnt, ack;
  wb_m2s_t  [3:0] m_i;
  pkg_cnt_t [3:0] limit;
  wb_x2s_t        s_o;
  wb_s2x_t        s_i;

  slave_port dut (.clk, .rst, .req_i(req), .m_i, .limit_i(limit), .gnt_o(gnt), .ack_o(ack), .s_o, .s_i);

  // slave: ack one cycle after accept, never stalls
  always_ff @(posedge clk) s_i.ack <= s_o.cyc && s_o.stb && !s_i.stall;
  assign s_i.stall = 1'b0;
  assign s_i.dat   = '0;

  // masters 0 and 2 always strobe; data identifies the master
  always_comb begin
    m_i = '0;
    for (int j = 0; j < 4; j++) begin
      m_i[j].cyc = req[j]; m_i[j].stb = req[j]; m_i[j].we = 1;
      m_i[j].dat = 32'hC0DE_0000 + j; m_i[j].sel = 3'(j);
    end
  end

  int got [4];
  int acks [4];
  int bad = 0;
  always @(posedge clk) if (!rst) begin
    if (s_o.stb) begin
      if (!s_o.cyc) bad++;
      for (int j = 0; j < 4; j++) if (gnt[j]) begin
        got[j]++;
        if (s_o.dat != 32'hC0DE_0000 + j || s_o.sel != 3'(j)) bad++;
      end
      if (!$onehot(gnt)) bad++;
    end
    for (int j = 0; j < 4; j++) if (ack[j]) acks[j]++;
  end

  initial begin
    req = 0; limit = '{8'd4, 8'd4, 8'd3, 8'd3};   // [3]..[0]
    repeat (3) @(negedge clk); rst = 0;
    @(negedge clk); req = 4'b0100;
    #1 `CHECK(gnt == 0, "no grant in request cycle")
    @(negedge clk);
    `CHECK(gnt == 4'b0100 && s_o.cyc, "grant and slave CYC one cycle later")
    req = 4'b0101;
    repeat (60) @(negedge clk);
    while (gnt != 0) @(negedge clk);   // stop between two turns
    req = 0;
    repeat (4) @(negedge clk);
    `CHECK(bad == 0, "only granted master's data reaches the slave")
    `CHECK(got[0] > 8 && got[2] > 8, "both masters served")
    `CHECK(got[0] % 3 == 0, "master 0 served in turns of its limit")
    `CHECK(acks[0] == got[0] && acks[2] == got[2], "ACKs returned to the sender")
    `CHECK(acks[1] == 0 && acks[3] == 0, "no ACK to idle masters")
    rst = 1; req = 4'b0001;
    repeat (3) @(negedge clk);
    `CHECK(gnt == 0 && !s_o.cyc, "port in reset grants nothing")
    `TB_END
  end
  initial begin repeat (2000) @(posedge clk); failures++; `TB_END end
endmodule
