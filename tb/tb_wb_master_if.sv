// tb_wb_master_if -- drives the WB master interface against a simple slave
// model (grant one cycle after CYC, ACK one cycle after an accepted STB) and
// checks: best-case time-to-grant of 4 cycles and completion of 13 cycles for
// an 8-word packet; words and register addresses in order; data held while
// stalled; ERR -> ST_BAD_ADDR; no grant -> ST_GNT_TIMEOUT; endless stall ->
// ST_SLV_TIMEOUT; words supplied progressively are only sent once available.
module tb_wb_master_if;
  import wb_pkg::*;
  `include "tb/tb_check.svh"

  localparam int TO = 16;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic       req;
  port_mask_t dest;
  packet_t    words;
  logic [3:0] avail;
  logic       busy, done;
  wb_status_e status;
  wb_m2s_t    m_o;
  wb_s2m_t    m_i;

  wb_master_if #(.TIMEOUT(TO)) dut (
    .clk, .rst, .req_i(req), .dest_i(dest), .words_i(words), .avail_i(avail),
    .busy_o(busy), .done_o(done), .status_o(status), .m_o, .m_i
  );

  // slave model
  logic no_grant, bad, stall;
  logic gnt_q, ack_q;
  always_ff @(posedge clk) begin
    gnt_q <= m_o.cyc && !no_grant && !rst;
    ack_q <= m_o.cyc && m_o.stb && !m_i.stall;
  end
  always_comb begin
    m_i.gnt   = gnt_q && m_o.cyc;
    m_i.ack   = ack_q;
    m_i.err   = m_o.cyc && bad;
    m_i.stall = stall || !m_i.gnt;
    m_i.dat   = '0;
  end

  int cnt = 0;
  always @(posedge clk) cnt <= cnt + 1;

  // record accepted words
  word_t got [$];
  logic [2:0] gsel [$];
  always @(posedge clk) if (m_o.stb && !m_i.stall && m_o.cyc) begin
    got.push_back(m_o.dat); gsel.push_back(m_o.sel);
  end

  // start one transfer; return cycles to first STB and to done, and status
  task automatic run(output int ttg, output int tdone, output wb_status_e st, input int maxc = 200);
    int c0;
    bit seen;
    ttg = -1; tdone = -1; seen = 0;
    @(negedge clk); req = 1; c0 = cnt;
    @(negedge clk); req = 0;
    for (int i = 0; i < maxc; i++) begin
      if (!seen && m_o.stb) begin ttg = cnt - c0; seen = 1; end
      if (done) begin tdone = cnt - c0; st = status; break; end
      @(negedge clk);
    end
  endtask

  initial begin
    int ttg, td;
    wb_status_e st;
    req = 0; dest = 4'b0010; avail = 8; no_grant = 0; bad = 0; stall = 0;
    for (int i = 0; i < PKT_WORDS; i++) words[i] = 32'hA000_0000 + i;
    repeat (3) @(negedge clk); rst = 0;

    // 1: best case
    got.delete(); gsel.delete();
    run(ttg, td, st);
    `CHECK(ttg == 4, "time-to-grant 4 cycles")
    `CHECK(td == 13, "completion 13 cycles")
    `CHECK(st == ST_OK, "status ok")
    `CHECK(got.size() == 8, "8 words accepted")
    for (int i = 0; i < got.size(); i++) begin
      `CHECK(got[i] == 32'hA000_0000 + i, "word order")
      `CHECK(gsel[i] == 3'(i), "register address on SEL")
    end
    `CHECK(!m_o.cyc, "CYC released")

    // 2: stalls in the middle
    got.delete(); gsel.delete();
    fork
      run(ttg, td, st);
      begin repeat (6) @(negedge clk); stall = 1; repeat (5) @(negedge clk); stall = 0; end
    join
    `CHECK(st == ST_OK, "stalled transfer ok")
    `CHECK(got.size() == 8, "stalled transfer 8 words")
    for (int i = 0; i < got.size(); i++) `CHECK(got[i] == 32'hA000_0000 + i, "stalled word order")
    `CHECK(td == 13 + 5, "completion delayed by stall cycles")

    // 3: invalid address
    bad = 1;
    run(ttg, td, st);
    `CHECK(st == ST_BAD_ADDR, "error reported for invalid address")
    `CHECK(ttg == -1, "no data sent on invalid address")
    bad = 0;

    // 4: grant timeout
    no_grant = 1;
    run(ttg, td, st);
    `CHECK(st == ST_GNT_TIMEOUT, "grant timeout")
    `CHECK(td >= TO && td <= TO + 5, "grant timeout period")
    no_grant = 0;

    // 5: slave timeout
    stall = 1;
    run(ttg, td, st);
    `CHECK(st == ST_SLV_TIMEOUT, "slave timeout")
    stall = 0;

    // 6: words arriving progressively
    got.delete();
    avail = 0;
    fork
      run(ttg, td, st);
      begin for (int i = 1; i <= 8; i++) begin repeat (3) @(negedge clk); avail = 4'(i); end end
    join
    `CHECK(st == ST_OK, "progressive words ok")
    `CHECK(got.size() == 8, "progressive 8 words")
    for (int i = 0; i < got.size(); i++) `CHECK(got[i] == 32'hA000_0000 + i, "progressive order")
    `TB_END
  end
  initial begin repeat (5000) @(posedge clk); failures++; `TB_END end
endmodule
