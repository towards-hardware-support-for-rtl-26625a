// master_port -- master side of one crossbar port.
//
// Receives CYC and a one-hot destination (ADR) from its WB master interface.
// Communication isolation: the destination is ANDed with the allowed-slaves
// mask from the register file; a zero result (or more than one remaining
// bit) is an invalid address, answered with ERR and no request to any slave
// port. A valid destination raises the request line of that slave port; the
// slave port's grant, ACK, STALL and read data are multiplexed back.
//
// Timing: purely combinational. STALL seen by the master is the target
// slave's STALL or the absence of a usable grant, so a word offered when the
// grant is withdrawn stays on the bus until granted again.
//
// The AND check and the ERR answer follow the paper; rejecting multi-bit
// masks (the paper mentions multicast without describing it) and the
// stall-when-not-granted rule are this design's choices.
module master_port
  import wb_pkg::*;
#(
  parameter int unsigned N = NPORTS
) (
  input  logic                  rst,       // global or this port's reset
  input  wb_m2s_t               m_i,       // from the WB master interface
  output wb_s2m_t               m_o,       // to the WB master interface
  input  logic    [N-1:0]       allowed_i, // allowed slaves (one bit per slave)
  output logic    [N-1:0]       req_o,     // request to slave port k
  input  logic    [N-1:0]       gnt_i,     // grant from slave port k for us
  input  logic    [N-1:0]       ack_i,     // ACK from slave port k for us
  input  wb_s2x_t [N-1:0]       s_i        // STALL/DAT of slave interface k
);
  logic [N-1:0] tgt;
  logic         valid;

  always_comb begin
    tgt   = m_i.adr & allowed_i;
    valid = !rst && m_i.cyc && (tgt != '0) && ((tgt & (tgt - 1'b1)) == '0);
    req_o = valid ? tgt : '0;

    m_o.err   = !rst && m_i.cyc && !valid;
    m_o.gnt   = |(gnt_i & req_o);
    m_o.ack   = |(ack_i & req_o);
    m_o.stall = 1'b1;
    m_o.dat   = '0;
    for (int k = 0; k < N; k++) begin
      if (req_o[k]) begin
        m_o.stall = s_i[k].stall || !gnt_i[k];
        m_o.dat   = s_i[k].dat;
      end
    end
  end
endmodule
