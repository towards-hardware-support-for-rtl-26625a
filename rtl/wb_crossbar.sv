// wb_crossbar -- configurable N x N WISHBONE crossbar (N = 4 by default).
//
// Every crossbar port p has a master port, serving the WB master interface of
// the module on port p, and a slave port, serving that module's WB slave
// interface. Master port p raises request line p of the target slave port;
// slave port k arbitrates among its requesters with a weighted round-robin
// arbiter and returns grant and ACK to master p. Separate bus lines per slave
// allow transfers to different slaves in parallel.
//
// Configuration from the register file: allowed_i[p] is the set of slaves
// master p may address (isolation), pkg_limit_i[k][p] the number of packages
// master p may send per grant in slave port k (bandwidth), port_rst_i[p]
// holds master port p and slave port p in reset (used while region p is being
// reconfigured: no requests leave it and it grants nothing).
//
// Timing: a request (CYC with valid ADR) is granted at the next clock edge if
// the slave is free; data, STALL and ACK pass the crossbar combinationally.
module wb_crossbar
  import wb_pkg::*;
#(
  parameter int unsigned N = NPORTS
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic     [N-1:0]           port_rst_i,
  input  logic     [N-1:0][N-1:0]    allowed_i,    // [master][slave]
  input  pkg_cnt_t [N-1:0][N-1:0]    pkg_limit_i,  // [slave port][master]
  input  wb_m2s_t  [N-1:0]           m_i,
  output wb_s2m_t  [N-1:0]           m_o,
  output wb_x2s_t  [N-1:0]           s_o,
  input  wb_s2x_t  [N-1:0]           s_i
);
  logic [N-1:0][N-1:0] req_ms;   // [master][slave]
  logic [N-1:0][N-1:0] req_sm;   // [slave][master]
  logic [N-1:0][N-1:0] gnt_sm, ack_sm, gnt_ms, ack_ms;

  always_comb begin
    for (int m = 0; m < N; m++)
      for (int s = 0; s < N; s++) begin
        req_sm[s][m] = req_ms[m][s];
        gnt_ms[m][s] = gnt_sm[s][m];
        ack_ms[m][s] = ack_sm[s][m];
      end
  end

  for (genvar p = 0; p < N; p++) begin : g_port
    master_port #(.N(N)) u_mport (
      .rst(rst || port_rst_i[p]), .m_i(m_i[p]), .m_o(m_o[p]),
      .allowed_i(allowed_i[p]), .req_o(req_ms[p]),
      .gnt_i(gnt_ms[p]), .ack_i(ack_ms[p]), .s_i(s_i)
    );
    slave_port #(.N(N)) u_sport (
      .clk, .rst(rst || port_rst_i[p]), .req_i(req_sm[p]), .m_i(m_i),
      .limit_i(pkg_limit_i[p]), .gnt_o(gnt_sm[p]), .ack_o(ack_sm[p]),
      .s_o(s_o[p]), .s_i(s_i[p])
    );
  end
endmodule
