// tb_axi_to_wb -- two bridges, requesting at half-full (default) and at full,
// each fed by three testbench AXI streams and answered by a crossbar model
// (grant one cycle after CYC, ACK one cycle after STB, ERR for an empty
// destination). Checks: delivery latency from the first FIFO read to the last
// word on the bus is 15 cycles at half-full and 19 at full; channels are
// served in turn; the destination is the register-file entry of the packet's
// application ID; packets arrive intact; an application without destination
// is refused and reported with ST_BAD_ADDR, the others with ST_OK.
module tb_axi_to_wb;
  import wb_pkg::*;
  `include "tb/tb_check.svh"
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  port_mask_t [3:0] app_dest;
  int cnt = 0;
  always @(posedge clk) cnt <= cnt + 1;

  for (genvar v = 0; v < 2; v++) begin : g_v
    logic [2:0][31:0] td;
    logic [2:0]       tv, tr;
    logic             ev;
    logic [1:0]       eid;
    wb_status_e       est;
    wb_m2s_t          m_o;
    wb_s2m_t          m_i;

    axi_to_wb #(.NCH(3), .REQ_AT(v == 0 ? 4 : 8), .TIMEOUT(32)) dut (
      .clk, .rst, .s_tdata(td), .s_tvalid(tv), .s_tready(tr), .app_dest_i(app_dest),
      .app_err_valid_o(ev), .app_err_id_o(eid), .app_err_o(est), .m_o, .m_i);

    logic gnt_q, ack_q;
    always_ff @(posedge clk) begin
      gnt_q <= m_o.cyc && (m_o.adr != 0) && !rst;
      ack_q <= m_o.cyc && m_o.stb && !m_i.stall;
    end
    assign m_i = '{gnt: gnt_q && m_o.cyc, ack: ack_q, err: m_o.cyc && m_o.adr == 0,
                   stall: !(gnt_q && m_o.cyc), dat: '0};

    // streams
    word_t q [3][$];
    always_comb for (int c = 0; c < 3; c++) begin
      tv[c] = q[c].size() > 0;
      td[c] = (q[c].size() > 0) ? q[c][0] : '0;
    end
    int first_pop, last_stb, lat [$], chans [$];
    bit in_pkt;
    word_t rx [$];
    port_mask_t rx_adr [$];
    int ok_cnt, bad_cnt, bad_id;
    always @(posedge clk) if (!rst) begin
      for (int c = 0; c < 3; c++) if (tv[c] && tr[c]) begin
        if (!in_pkt) begin first_pop = cnt; in_pkt = 1; chans.push_back(c); end
        void'(q[c].pop_front());
      end
      if (m_o.cyc && m_o.stb && !m_i.stall) begin
        rx.push_back(m_o.dat); rx_adr.push_back(m_o.adr);
        if (m_o.sel == 3'd7) begin lat.push_back(cnt - first_pop); in_pkt = 0; end
      end
      if (ev) begin
        if (est == ST_OK) ok_cnt++; else begin bad_cnt++; bad_id = eid; in_pkt = 0; end
      end
    end
  end

  task automatic load(input int c, input int id, input int tag);
    for (int v = 0; v < 2; v++)
      for (int i = 0; i < 8; i++) begin
        word_t w;
        w = (i == 0) ? 32'(id) : 32'(tag * 16 + i);
        if (v == 0) g_v[0].q[c].push_back(w); else g_v[1].q[c].push_back(w);
      end
  endtask

  initial begin
    app_dest = '{4'b0000, 4'b0100, 4'b0010, 4'b1000};   // [3]..[0]: ID 3 has no destination
    repeat (3) @(negedge clk); rst = 0;
    // one packet alone, to measure latency
    load(1, 0, 1);
    repeat (40) @(negedge clk);
    `CHECK(g_v[0].lat.size() == 1 && g_v[0].lat[0] == 15, "latency 15 cycles at half-full request")
    `CHECK(g_v[1].lat.size() == 1 && g_v[1].lat[0] == 19, "latency 19 cycles at full request")
    // packets on all channels, including one for ID 3
    load(0, 1, 2); load(1, 2, 3); load(2, 3, 4); load(0, 2, 5); load(2, 1, 6);
    repeat (200) @(negedge clk);
    `CHECK(g_v[0].chans.size() == 6, "six packets taken")
    `CHECK(g_v[0].chans[1] == 2 && g_v[0].chans[2] == 0 && g_v[0].chans[3] == 1 && g_v[0].chans[4] == 2,
           "channels served in turn")
    `CHECK(g_v[0].ok_cnt == 5 && g_v[0].bad_cnt == 1 && g_v[0].bad_id == 3, "per-application status")
    `CHECK(g_v[0].rx.size() == 40 && g_v[1].rx.size() == 40, "five packets delivered by each bridge")
    for (int k = 0; k < 5 && g_v[0].rx.size() == 40; k++) begin
      int id;
      id = int'(g_v[0].rx[8*k][1:0]);
      `CHECK(g_v[0].rx_adr[8*k] == app_dest[id], "destination from application ID")
      for (int i = 1; i < 8; i++) `CHECK(g_v[0].rx[8*k+i][3:0] == 4'(i), "packet words in order")
    end
    `TB_END
  end
  initial begin repeat (3000) @(posedge clk); failures++; `TB_END end
endmodule
