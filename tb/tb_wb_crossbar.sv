// tb_wb_crossbar -- the 4x4 crossbar with four WB master interfaces and four
// WB slave interfaces whose modules read a full buffer at once. Checks:
//  * best case: time-to-grant 4 cycles, request completion 13 cycles;
//  * worst case, three masters to one slave at the same time: times-to-grant
//    4, 16, 28 and completions 13, 25, 37 cycles (8 packages each);
//  * three transfers to three different slaves in parallel, all at best case;
//  * isolation: a destination outside the allowed mask ends with ST_BAD_ADDR
//    and reaches no slave;
//  * bandwidth: with a limit of 4 packages an 8-word transfer is split over
//    two grants and arrives intact;
//  * a slave port in reset grants nothing (ST_GNT_TIMEOUT).
// Every packet received by a slave is compared with the one sent.
module tb_wb_crossbar;
  import wb_pkg::*;
  `include "tb/tb_check.svh"
  localparam int TO = 48;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic     [3:0]      port_rst;
  logic     [3:0][3:0] allowed;
  pkg_cnt_t [3:0][3:0] limit;
  wb_m2s_t  [3:0]      m_i;
  wb_s2m_t  [3:0]      m_o;
  wb_x2s_t  [3:0]      s_o;
  wb_s2x_t  [3:0]      s_i;

  wb_crossbar dut (.clk, .rst, .port_rst_i(port_rst), .allowed_i(allowed), .pkg_limit_i(limit),
                   .m_i, .m_o, .s_o, .s_i);

  logic       [3:0] req, busy, done, full;
  port_mask_t [3:0] dest;
  packet_t    [3:0] words, bufs;
  wb_status_e [3:0] status;

  for (genvar p = 0; p < 4; p++) begin : g_p
    wb_master_if #(.TIMEOUT(TO)) u_m (
      .clk, .rst, .req_i(req[p]), .dest_i(dest[p]), .words_i(words[p]), .avail_i(4'd8),
      .busy_o(busy[p]), .done_o(done[p]), .status_o(status[p]), .m_o(m_i[p]), .m_i(m_o[p]));
    wb_slave_if u_s (.clk, .rst, .s_i(s_o[p]), .s_o(s_i[p]), .buf_o(bufs[p]), .full_o(full[p]),
                     .rd_done_i(full[p]));
  end

  int cnt = 0;
  always @(posedge clk) cnt <= cnt + 1;

  // per-master first-STB and done times relative to t0; received packets
  int t0;
  int ttg [4], tdone [4];
  packet_t rx [4][$];
  int switches [4];
  always @(negedge clk) begin
    for (int p = 0; p < 4; p++) begin
      if (m_i[p].stb && ttg[p] < 0) ttg[p] = cnt - t0;
      if (done[p] && tdone[p] < 0) tdone[p] = cnt - t0;
    end
  end
  always @(posedge clk) for (int s = 0; s < 4; s++) if (full[s]) rx[s].push_back(bufs[s]);
  // count grants given to each master (rising GNT)
  logic [3:0] gnt_q;
  always @(posedge clk) begin
    for (int m = 0; m < 4; m++) if (m_o[m].gnt && !gnt_q[m]) switches[m]++;
    for (int m = 0; m < 4; m++) gnt_q[m] <= m_o[m].gnt;
  end

  task automatic start(input logic [3:0] who);
    @(negedge clk);
    for (int p = 0; p < 4; p++) begin ttg[p] = -1; tdone[p] = -1; end
    t0 = cnt; req = who;
    @(negedge clk); req = 0;
    repeat (150) @(negedge clk);
  endtask

  task automatic fill(input int p, input int tag);
    for (int i = 0; i < 8; i++) words[p][i] = 32'(tag * 256 + p * 16 + i);
  endtask

  initial begin
    int t[$];
    req = 0; port_rst = 0;
    allowed = '{4'b0111, 4'b1011, 4'b1101, 4'b1110};   // [3]..[0]: no self, and master 1 not to 3
    allowed[1] = 4'b0101;
    for (int a = 0; a < 4; a++) for (int b = 0; b < 4; b++) limit[a][b] = 8'd8;
    for (int p = 0; p < 4; p++) rx[p].delete();
    repeat (3) @(negedge clk); rst = 0;

    // best case
    fill(1, 1); dest[1] = 4'b0001;
    start(4'b0010);
    `CHECK(ttg[1] == 4, "best-case time-to-grant 4")
    `CHECK(tdone[1] == 13, "best-case completion 13")
    `CHECK(status[1] == ST_OK, "best-case status")
    `CHECK(rx[0].size() == 1 && rx[0][0] == words[1], "best-case packet intact")

    // worst case: 1, 2, 3 -> 0
    rx[0].delete();
    for (int p = 1; p < 4; p++) begin fill(p, 2); dest[p] = 4'b0001; end
    start(4'b1110);
    t.delete(); for (int p = 1; p < 4; p++) t.push_back(ttg[p]); t.sort();
    `CHECK(t[0] == 4 && t[1] == 16 && t[2] == 28, "worst-case times-to-grant 4/16/28")
    t.delete(); for (int p = 1; p < 4; p++) t.push_back(tdone[p]); t.sort();
    `CHECK(t[0] == 13 && t[1] == 25 && t[2] == 37, "worst-case completions 13/25/37")
    for (int p = 1; p < 4; p++) `CHECK(status[p] == ST_OK, "worst-case status")
    `CHECK(rx[0].size() == 3, "three packets at slave 0")
    for (int i = 0; i < rx[0].size(); i++)
      `CHECK(rx[0][i] == words[1] || rx[0][i] == words[2] || rx[0][i] == words[3], "worst-case packet intact")

    // parallel transfers: 1->2, 2->3, 3->1
    for (int s = 0; s < 4; s++) rx[s].delete();
    fill(1, 3); dest[1] = 4'b0100; fill(2, 3); dest[2] = 4'b1000; fill(3, 3); dest[3] = 4'b0010;
    start(4'b1110);
    for (int p = 1; p < 4; p++) `CHECK(ttg[p] == 4 && tdone[p] == 13, "parallel transfers at best case")
    `CHECK(rx[2].size() == 1 && rx[2][0] == words[1], "parallel packet to 2")
    `CHECK(rx[3].size() == 1 && rx[3][0] == words[2], "parallel packet to 3")
    `CHECK(rx[1].size() == 1 && rx[1][0] == words[3], "parallel packet to 1")

    // isolation: master 1 may not address slave 3
    for (int s = 0; s < 4; s++) rx[s].delete();
    dest[1] = 4'b1000;
    start(4'b0010);
    `CHECK(status[1] == ST_BAD_ADDR, "isolation error")
    `CHECK(ttg[1] == -1 && rx[3].size() == 0, "nothing delivered on isolation error")

    // bandwidth: a limit of 4 packages at slave 0 for master 2 splits its
    // 8-word packet over two grants (re-granted after one idle cycle)
    limit[0][2] = 8'd4;
    for (int s = 0; s < 4; s++) begin rx[s].delete(); switches[s] = 0; end
    fill(2, 4); dest[2] = 4'b0001;
    start(4'b0100);
    `CHECK(status[2] == ST_OK, "quota-limited transfer completes")
    `CHECK(switches[2] == 2, "two grants of 4 packages")
    `CHECK(ttg[2] == 4 && tdone[2] == 16, "quota-limited completion 16 cycles")
    `CHECK(rx[0].size() == 1 && rx[0][0] == words[2], "quota-limited packet intact")
    for (int a = 0; a < 4; a++) for (int b = 0; b < 4; b++) limit[a][b] = 8'd8;

    // port reset: slave port 3 held in reset
    port_rst = 4'b1000; dest[2] = 4'b1000;
    start(4'b0100);
    `CHECK(status[2] == ST_GNT_TIMEOUT, "no grant from a port in reset")
    port_rst = 0;
    `TB_END
  end
  initial begin repeat (5000) @(posedge clk); failures++; `TB_END end
endmodule
