// tb_elastic_shell_top -- end-to-end test of the shell at its default sizes.
//
// The host side is modelled here: an AXI-Lite master configures the register
// file, three host-to-card streams carry 8-word packets (word 0 = application
// ID, words 1..7 data), three card-to-host streams are drained with random
// back-pressure. The application is the three-stage pipeline multiplier ->
// Hamming encoder -> Hamming decoder, and the test grows it the way the
// resource manager would:
//   case 1: only the multiplier on the FPGA (region 1 returns to the host);
//   case 2: multiplier and encoder (region 1 -> region 2 -> host);
//   case 3: all three (1 -> 2 -> 3 -> host).
// Results are compared with values computed here. It also exercises and
// counts: an isolation error (application ID 3 points at a region its port
// may not reach), slave stalls from back-to-back packets, package-limit grant
// splits (limit 1), a region held in reset so that its upstream region times
// out waiting for a grant, round-robin use of all three card-to-host
// channels, and the bitstream path through the dual-clock FIFO. Each of these
// must occur at least once.
module tb_elastic_shell_top;
  import wb_pkg::*;
  `include "tb/tb_check.svh"

  logic clk = 0, icap_clk = 0, rst_n = 1;
  initial #1 rst_n = 0;          // asynchronous reset edge before the first clock
  always #2 clk = ~clk;        // 250 MHz
  always #4 icap_clk = ~icap_clk;  // 125 MHz

  logic [6:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [1:0] bresp, rresp;
  logic [2:0][31:0] h2c_tdata, c2h_tdata;
  logic [2:0] h2c_tvalid, h2c_tready, c2h_tlast, c2h_tvalid, c2h_tready;
  logic [31:0] bit_tdata, icap_data;
  logic bit_tvalid, bit_tready, icap_valid, icap_ready, icap_done, icap_err;

  elastic_shell_top dut (
    .clk, .xdma_rst_ni(rst_n),
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .h2c_tdata, .h2c_tvalid, .h2c_tready, .c2h_tdata, .c2h_tlast, .c2h_tvalid, .c2h_tready,
    .bit_tdata, .bit_tvalid, .bit_tready, .icap_clk, .icap_data_o(icap_data), .icap_valid_o(icap_valid),
    .icap_ready_i(icap_ready), .icap_done_i(icap_done), .icap_err_i(icap_err));

  // ---------------- AXI-Lite master ----------------
  task automatic axil_write(input logic [6:0] a, input logic [31:0] d);
    @(negedge clk); awaddr = a; wdata = d; awvalid = 1; wvalid = 1; bready = 1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk); awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
    @(negedge clk); bready = 0;
  endtask
  task automatic axil_read(input logic [6:0] a, output logic [31:0] d);
    @(negedge clk); araddr = a; arvalid = 1; rready = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(negedge clk); rready = 0;
  endtask

  // ---------------- reference model ----------------
  function automatic logic [31:0] enc(input logic [25:0] x);
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
  function automatic word_t model(input int stages, input word_t x);
    word_t m;
    m = x * 3;                                   // multiplier, constant 3
    if (stages == 1) return m;
    if (stages == 2) return enc(m[25:0]);
    return {6'd0, m[25:0]};                      // decoder of a clean codeword
  endfunction

  // ---------------- host streams ----------------
  word_t hq [3][$];
  always_comb for (int c = 0; c < 3; c++) begin
    h2c_tvalid[c] = hq[c].size() > 0;
    h2c_tdata[c]  = (hq[c].size() > 0) ? hq[c][0] : '0;
  end
  always @(posedge clk) for (int c = 0; c < 3; c++) if (h2c_tvalid[c] && h2c_tready[c]) void'(hq[c].pop_front());

  bit live = 0;   // set once the shell is out of reset
  word_t rxw [3][$];
  packet_t rx_pkts [$];
  int c2h_used [3];
  always @(negedge clk) c2h_tready = 3'($urandom) | 3'b001;
  always @(posedge clk) for (int c = 0; c < 3; c++) if (live && c2h_tvalid[c] && c2h_tready[c]) begin
    rxw[c].push_back(c2h_tdata[c]);
    if (c2h_tlast[c]) begin
      packet_t p;
      if (rxw[c].size() != 8) failures++;
      for (int i = 0; i < 8; i++) p[i] = rxw[c][i];
      rxw[c].delete();
      rx_pkts.push_back(p);
      c2h_used[c]++;
    end
  end

  // ---------------- mechanism counters ----------------
  int n_stall = 0, n_quota = 0;
  always @(posedge clk) begin
    for (int p = 0; p < 4; p++) if (dut.xs_o[p].stb && dut.xs_i[p].stall) n_stall++;
    if (dut.u_xbar.g_port[2].u_sport.u_arb.busy_o && dut.u_xbar.g_port[2].u_sport.u_arb.gnt_o == 0) n_quota++;
  end

  // ---------------- scenario helpers ----------------
  int tag = 0;
  packet_t sent [$];
  task automatic send_pkts(input int n, input int id);
    for (int k = 0; k < n; k++) begin
      packet_t p;
      p[0] = 32'(id);
      for (int i = 1; i < 8; i++) p[i] = $urandom;
      tag++;
      for (int i = 0; i < 8; i++) hq[k % 3].push_back(p[i]);
      sent.push_back(p);
    end
  endtask

  task automatic wait_out(input int n);
    int guard;
    guard = 0;
    while (rx_pkts.size() < n && guard < 20000) begin @(negedge clk); guard++; end
  endtask

  // compare received packets (any order) with the sent ones
  task automatic check_case(input int stages, input string name);
    int matched;
    matched = 0;
    foreach (rx_pkts[r]) begin
      foreach (sent[s]) begin
        bit same;
        same = (rx_pkts[r][0] == sent[s][0]);
        for (int i = 1; i < 8; i++) same &= (rx_pkts[r][i] == model(stages, sent[s][i]));
        if (same) begin matched++; sent.delete(s); break; end
      end
    end
    `CHECK(matched == rx_pkts.size() && sent.size() == 0, name)
    rx_pkts.delete(); sent.delete();
  endtask

  localparam int NPK = 24;

  initial begin
    logic [31:0] d;
    int n_iso, n_gnt_to, n_modes;
    {awvalid, wvalid, bready, arvalid, rready} = '0;
    bit_tvalid = 0; bit_tdata = 0; icap_done = 0; icap_err = 0;
    n_modes = 0;
    repeat (5) @(negedge clk); rst_n = 1;
    repeat (5) @(negedge clk);
    live = 1;

    axil_read(7'h00, d);
    `CHECK(d == 32'hFE1A_0001, "device ID")
    // package limits: 8 everywhere
    for (int p = 0; p < 4; p++) axil_write(7'h24 + 7'(4 * p), 32'h0808_0808);
    // application 0 -> region 1; application 3 -> region 3 (not allowed for port 0)
    axil_write(7'h34, 32'b0010);
    axil_write(7'h40, 32'b1000);
    // port 0 master may reach region 1 only
    axil_write(7'h14, 32'b0010);

    // case 1: multiplier only
    axil_write(7'h18, 32'b0001);     // region 1 master -> host
    axil_write(7'h04, 32'b0001);     // region 1 destination: host
    send_pkts(NPK, 0);
    wait_out(NPK);
    check_case(1, "case 1: multiplier on the FPGA");
    n_modes++;

    // case 2: encoder region becomes available
    axil_write(7'h1C, 32'b0001);     // region 2 master -> host
    axil_write(7'h08, 32'b0001);
    axil_write(7'h18, 32'b0100);     // region 1 master -> region 2
    axil_write(7'h04, 32'b0100);
    send_pkts(NPK, 0);
    wait_out(NPK);
    check_case(2, "case 2: multiplier and encoder on the FPGA");
    n_modes++;

    // case 3: decoder region becomes available, limit 1 at region 2's slave port
    axil_write(7'h20, 32'b0001);     // region 3 master -> host
    axil_write(7'h0C, 32'b0001);
    axil_write(7'h1C, 32'b1000);     // region 2 master -> region 3
    axil_write(7'h08, 32'b1000);
    axil_write(7'h2C, 32'h0101_0101);   // one package per grant: region 1 slows down and back-pressures
    send_pkts(NPK, 0);
    wait_out(NPK);
    check_case(3, "case 3: all three stages on the FPGA");
    n_modes++;
    `CHECK(n_quota > 0, "package-limit grant split occurred")
    `CHECK(n_stall > 0, "slave stall occurred")
    for (int c = 0; c < 3; c++) `CHECK(c2h_used[c] > 0, "every card-to-host channel used")

    // isolation: application 3 targets region 3, not allowed for port 0
    send_pkts(1, 3);
    repeat (300) @(negedge clk);
    axil_read(7'h48, d);
    n_iso = (d[25:24] == 2'(ST_BAD_ADDR));
    `CHECK(n_iso == 1, "isolation error recorded for application 3")
    `CHECK(rx_pkts.size() == 0, "refused packet not delivered")
    sent.delete();

    // region 3 held in reset: region 2 times out waiting for a grant
    axil_write(7'h10, 32'b1000);
    send_pkts(1, 0);
    repeat (600) @(negedge clk);
    axil_read(7'h44, d);
    n_gnt_to = (d[17:16] == 2'(ST_GNT_TIMEOUT));
    `CHECK(n_gnt_to == 1, "grant timeout recorded for region 2")
    axil_write(7'h10, 32'b0000);
    sent.delete(); rx_pkts.delete();
    send_pkts(3, 0);
    wait_out(3);
    check_case(3, "pipeline works again after the region reset");

    // bitstream path to the ICAP
    fork
      begin
        for (int i = 0; i < 40; i++) begin
          @(negedge clk); bit_tdata = 32'hB170_0000 + i; bit_tvalid = 1;
          do @(posedge clk); while (!bit_tready);
        end
        @(negedge clk); bit_tvalid = 0;
      end
      begin
        int got;
        got = 0;
        while (got < 40) begin
          @(negedge icap_clk); icap_ready = $urandom_range(0, 1);
          @(posedge icap_clk);
          if (icap_valid && icap_ready) begin
            `CHECK(icap_data == 32'hB170_0000 + got, "bitstream word order")
            got++;
          end
        end
      end
    join
    icap_done = 1;
    repeat (10) @(negedge clk);
    axil_read(7'h4C, d);
    `CHECK(d[0] == 1'b1, "ICAP done status visible")

    $display("INFO modes=%0d stalls=%0d quota_splits=%0d isolation=%0d grant_timeouts=%0d c2h=%0d/%0d/%0d",
             n_modes, n_stall, n_quota, n_iso, n_gnt_to, c2h_used[0], c2h_used[1], c2h_used[2]);
    `TB_END
  end
  initial begin repeat (200000) @(posedge clk); failures++; `TB_END end
endmodule
