// tb_workload_16kb -- the shell's elasticity use case run at full size.
//
// 16 KB of user data (4096 32-bit words, sent as 586 packets of 7 data words
// plus the application ID word, spread over the three host-to-card streams)
// is processed by the three-stage application multiplier -> Hamming encoder
// -> Hamming decoder in the three configurations the shell can be grown
// through: case 1, only the multiplier is on the FPGA; case 2, multiplier and
// encoder; case 3, all three regions chained. Each case is run twice, with
// the package limit of every master set to 16 and to 128 words per grant,
// the two bandwidth settings of the bandwidth-allocation experiment. Every
// returned word is compared with a model, and the cycles from the first word
// offered to the last packet returned are printed per run. In the full
// system the stages a case does not place on the FPGA would run on the host;
// only the FPGA part is timed here. The packet count and the limits are this
// test's reading of the experiment; the cycle counts are reported, not
// compared with the paper's wall-clock results.
module tb_workload_16kb;
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

  // ---------------- scenario helpers ----------------
  packet_t sent [$];
  task automatic send_pkts(input int n, input int id);
    for (int k = 0; k < n; k++) begin
      packet_t p;
      p[0] = 32'(id);
      for (int i = 1; i < 8; i++) p[i] = $urandom;
      for (int i = 0; i < 8; i++) hq[k % 3].push_back(p[i]);
      sent.push_back(p);
    end
  endtask

  task automatic wait_out(input int n);
    int guard;
    guard = 0;
    while (rx_pkts.size() < n && guard < 100000) begin @(negedge clk); guard++; end
  endtask

  // compare received packets (any order) with the sent ones
  task automatic check_case(input int stages, input string name);
    int matched;
    matched = 0;
    foreach (rx_pkts[r]) begin
      foreach (sent[s]) begin
        bit same;
        same = (rx_pkts[r][0] == sent[s][0]) && (rx_pkts[r][1] == model(stages, sent[s][1]));
        if (same) for (int i = 2; i < 8; i++) same &= (rx_pkts[r][i] == model(stages, sent[s][i]));
        if (same) begin matched++; sent.delete(s); break; end
      end
    end
    `CHECK(matched == NPK && rx_pkts.size() == NPK && sent.size() == 0, name)
    rx_pkts.delete(); sent.delete();
  endtask

  localparam int WORDS = 4096;                 // 16 KB of 32-bit words
  localparam int NPK   = (WORDS + 6) / 7;      // 7 data words per packet -> 586

  task automatic run(input int stages, input int limit);
    longint t0, t1;
    logic [31:0] lim;
    lim = {4{8'(limit)}};
    for (int p = 0; p < 4; p++) axil_write(7'h24 + 7'(4 * p), lim);
    repeat (4) @(negedge clk);
    t0 = cyc;
    send_pkts(NPK, 0);
    wait_out(NPK);
    t1 = cyc;
    $display("INFO case %0d limit %0d: %0d packets (%0d words) in %0d cycles",
             stages, limit, NPK, NPK * 7, t1 - t0);
    check_case(stages, $sformatf("case %0d, limit %0d: all results correct", stages, limit));
  endtask

  longint cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    {awvalid, wvalid, bready, arvalid, rready} = '0;
    bit_tvalid = 0; bit_tdata = 0; icap_done = 0; icap_err = 0; icap_ready = 1;
    repeat (5) @(negedge clk); rst_n = 1;
    repeat (5) @(negedge clk);
    live = 1;

    axil_write(7'h34, 32'b0010);     // application 0 -> region 1
    axil_write(7'h14, 32'b0010);     // host port may reach region 1

    // case 1: multiplier only
    axil_write(7'h18, 32'b0001);
    axil_write(7'h04, 32'b0001);
    run(1, 16);
    run(1, 128);

    // case 2: multiplier -> encoder -> host
    axil_write(7'h1C, 32'b0001);
    axil_write(7'h08, 32'b0001);
    axil_write(7'h18, 32'b0100);
    axil_write(7'h04, 32'b0100);
    run(2, 16);
    run(2, 128);

    // case 3: multiplier -> encoder -> decoder -> host
    axil_write(7'h20, 32'b0001);
    axil_write(7'h0C, 32'b0001);
    axil_write(7'h1C, 32'b1000);
    axil_write(7'h08, 32'b1000);
    run(3, 16);
    run(3, 128);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
