// tb_pr_region -- a multiplier region between a testbench WB master (writing
// packets into the region's slave interface) and a testbench crossbar model
// (grant one cycle after CYC, ACK one cycle after STB). Checks each result
// packet (ID forwarded, words x MULT_CONST, register addresses 0..7, one-hot
// destination from the register file), the error status reported to the
// register file, and that a second packet written while the first is being
// processed is accepted and processed too.
module tb_pr_region;
  import wb_pkg::*;
  `include "tb/tb_check.svh"
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  port_mask_t dest;
  wb_status_e err;
  logic       err_valid;
  wb_m2s_t    m_o;
  wb_s2m_t    m_i;
  wb_x2s_t    s_i;
  wb_s2x_t    s_o;

  pr_region #(.FUNC(FN_MULT), .MULT_CONST(32'd9), .TIMEOUT(32)) dut (
    .clk, .rst, .dest_i(dest), .err_o(err), .err_valid_o(err_valid), .m_o, .m_i, .s_i, .s_o);

  // crossbar model for the region's master interface
  logic gnt_q, ack_q;
  always_ff @(posedge clk) begin
    gnt_q <= m_o.cyc && !rst;
    ack_q <= m_o.cyc && m_o.stb && !m_i.stall;
  end
  assign m_i = '{gnt: gnt_q && m_o.cyc, ack: ack_q, err: 1'b0, stall: !(gnt_q && m_o.cyc), dat: '0};

  word_t rx [$];
  int    rxsel [$];
  always @(posedge clk) if (m_o.cyc && m_o.stb && !m_i.stall) begin
    rx.push_back(m_o.dat); rxsel.push_back(m_o.sel);
    if (m_o.adr != dest) failures++;
  end
  int statuses = 0;
  always @(posedge clk) if (err_valid) begin
    statuses++;
    if (err != ST_OK) failures++;
  end

  // write one packet into the slave interface, honouring STALL
  task automatic send(input packet_t p);
    for (int i = 0; i < 8; i++) begin
      @(negedge clk);
      s_i = '{cyc: 1, stb: 1, we: 1, sel: 3'(i), dat: p[i]};
      #1;
      while (s_o.stall) begin @(negedge clk); #1; end
    end
    @(negedge clk); s_i = '0;
  endtask

  initial begin
    packet_t p [2];
    s_i = '0; dest = 4'b1000;
    repeat (3) @(negedge clk); rst = 0;
    for (int k = 0; k < 2; k++) begin
      p[k][0] = 32'(k);
      for (int i = 1; i < 8; i++) p[k][i] = $urandom;
    end
    send(p[0]);
    send(p[1]);
    repeat (60) @(negedge clk);
    `CHECK(rx.size() == 16, "two result packets")
    `CHECK(statuses == 2, "two status reports")
    for (int k = 0; k < 2 && rx.size() == 16; k++)
      for (int i = 0; i < 8; i++) begin
        `CHECK(rxsel[8*k+i] == i, "register address")
        `CHECK(rx[8*k+i] == ((i == 0) ? p[k][0] : p[k][i] * 9), "result word")
      end
    `TB_END
  end
  initial begin repeat (3000) @(posedge clk); failures++; `TB_END end
endmodule
