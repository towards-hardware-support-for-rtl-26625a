// tb_master_port -- checks communication isolation and the return path of the
// master port: for every one-hot destination and random allowed mask, a
// destination outside the mask gives ERR and no request, one inside gives a
// request to exactly that slave port; GNT, ACK, STALL and read data come from
// the addressed slave only; a port held in reset requests nothing.
module tb_master_port;
  import wb_pkg::*;
  `include "tb/tb_check.svh"
  wb_m2s_t          m_i;
  wb_s2m_t          m_o;
  logic [3:0]       allowed, req, gnt, ack;
  wb_s2x_t [3:0]    s_i;
  logic             rst;

  master_port dut (.rst, .m_i, .m_o, .allowed_i(allowed), .req_o(req), .gnt_i(gnt), .ack_i(ack), .s_i);

  initial begin
    rst = 0; m_i = '0;
    for (int it = 0; it < 300; it++) begin
      int d;
      d = $urandom_range(0, 3);
      allowed = 4'($urandom);
      gnt = 4'($urandom); ack = 4'($urandom);
      for (int k = 0; k < 4; k++) s_i[k] = '{ack: 1'b0, stall: 1'($urandom), dat: 32'($urandom)};
      m_i.cyc = 1; m_i.adr = 4'b0001 << d;
      #1;
      if (allowed[d]) begin
        `CHECK(!m_o.err && req == (4'b0001 << d), "allowed destination requested")
        `CHECK(m_o.gnt == gnt[d] && m_o.ack == ack[d], "grant/ack from addressed slave")
        `CHECK(m_o.stall == (s_i[d].stall || !gnt[d]), "stall from addressed slave or no grant")
        `CHECK(m_o.dat == s_i[d].dat, "read data from addressed slave")
      end else begin
        `CHECK(m_o.err && req == 0 && !m_o.gnt && !m_o.ack, "isolation: error, no request")
      end
      m_i.adr = 4'b0011 << (d % 3);
      #1 `CHECK(req == 0 || $onehot(req), "never more than one request")
    end
    allowed = 4'hF; m_i.adr = 4'b0100; rst = 1;
    #1 `CHECK(req == 0 && !m_o.err, "held in reset")
    rst = 0; m_i.cyc = 0;
    #1 `CHECK(req == 0 && !m_o.err, "idle without CYC")
    `TB_END
  end
  initial begin #100000; failures++; `TB_END end
endmodule
