// tb_wb_to_axi -- writes result packets into the card-to-host bridge over WB
// and checks that each packet leaves on one channel only, in order, with TLAST
// on its eighth word, that consecutive packets use channels 0, 1, 2, 0, ...
// (one-hot shift register), and that random back-pressure loses nothing.
module tb_wb_to_axi;
  import wb_pkg::*;
  `include "tb/tb_check.svh"
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  wb_x2s_t s_i;
  wb_s2x_t s_o;
  logic [2:0][31:0] td;
  logic [2:0] tl, tv, tr;
  wb_to_axi #(.NCH(3)) dut (.clk, .rst, .s_i, .s_o, .m_tdata(td), .m_tlast(tl), .m_tvalid(tv), .m_tready(tr));

  word_t rx [3][$];
  int pkt_ch [$];
  int lasts = 0;
  always @(posedge clk) if (!rst) begin
    `CHECK($onehot0(tv), "one channel at a time")
    for (int c = 0; c < 3; c++) if (tv[c] && tr[c]) begin
      rx[c].push_back(td[c]);
      if (tl[c]) begin pkt_ch.push_back(c); lasts++; end
      if (tl[c] != (rx[c].size() % 8 == 0)) failures++;
    end
  end
  always @(negedge clk) tr = 3'($urandom);

  task automatic send(input int k);
    for (int i = 0; i < 8; i++) begin
      @(negedge clk);
      s_i = '{cyc: 1, stb: 1, we: 1, sel: 3'(i), dat: 32'(k * 16 + i)};
      #1;
      while (s_o.stall) begin @(negedge clk); #1; end
    end
    @(negedge clk); s_i = '0;
  endtask

  initial begin
    s_i = '0;
    repeat (3) @(negedge clk); rst = 0;
    for (int k = 0; k < 7; k++) send(k);
    repeat (100) @(negedge clk);
    `CHECK(lasts == 7, "seven packets out")
    for (int k = 0; k < pkt_ch.size(); k++) `CHECK(pkt_ch[k] == k % 3, "round-robin channel")
    for (int k = 0; k < 7 && lasts == 7; k++)
      for (int i = 0; i < 8; i++) `CHECK(rx[k % 3][8 * (k / 3) + i] == 32'(k * 16 + i), "packet data")
    `TB_END
  end
  initial begin repeat (5000) @(posedge clk); failures++; `TB_END end
endmodule
