// slave_port -- slave side of one crossbar port.
//
// Grants one of the masters requesting this slave (wrr_arbiter), tells that
// master it is granted, enables the slave interface (CYC) while a grant is
// held, and multiplexes the granted master's STB/WE/SEL/DAT onto the slave.
// The slave's ACK is returned only to the granted master. Arbitration is
// therefore decentralised: each slave port owns its own arbiter.
//
// Timing: combinational from the inputs to s_o, gnt_o and ack_o; the only
// state is in the arbiter (grant registered one cycle after a request).
// A word counts as a package when it is strobed to the slave and not stalled.
//
// Signals follow the slave-port column of the crossbar block diagram
// (DAT_I_m, SEL_I_m, WR_I_m, STB_I_m in; ACK_I_s in; STB_O_s, WR_O_s,
// SEL_O_s, DAT_O_s, CYC_O_s out). Holding the grant until outstanding ACKs
// are back is this design's choice.
module slave_port
  import wb_pkg::*;
#(
  parameter int unsigned N = NPORTS
) (
  input  logic                 clk,
  input  logic                 rst,       // global or this port's reset
  input  logic    [N-1:0]      req_i,     // request from master port j
  input  wb_m2s_t [N-1:0]      m_i,       // bus of master j
  input  pkg_cnt_t [N-1:0]     limit_i,   // packages allowed for master j
  output logic    [N-1:0]      gnt_o,     // grant to master j
  output logic    [N-1:0]      ack_o,     // ACK to master j
  output wb_x2s_t              s_o,       // to the WB slave interface
  input  wb_s2x_t              s_i        // from the WB slave interface
);
  logic                  busy, beat;
  logic [$clog2(N)-1:0]  idx;
  logic [N-1:0]          gnt;

  wrr_arbiter #(.N(N), .PKGW(PKGW)) u_arb (
    .clk, .rst, .req_i, .limit_i,
    .beat_i(beat), .ack_i(s_i.ack),
    .gnt_o(gnt), .busy_o(busy), .idx_o(idx)
  );

  always_comb begin
    s_o.cyc = busy;
    s_o.stb = (gnt != '0) && m_i[idx].stb && m_i[idx].cyc;
    s_o.we  = m_i[idx].we;
    s_o.sel = m_i[idx].sel;
    s_o.dat = m_i[idx].dat;
    beat    = s_o.stb && !s_i.stall;
    gnt_o   = gnt;
    ack_o   = '0;
    if (busy) ack_o[idx] = s_i.ack;
  end
endmodule
