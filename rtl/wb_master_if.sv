// wb_master_if -- WB master interface of a computation module (or of the
// AXI-to-WB bridge).
//
// A one-cycle req_i pulse starts a transfer of PKT_WORDS words to the one-hot
// destination dest_i. The interface raises CYC with ADR = destination, waits
// for GNT, then strobes word i with its register address i on SEL, holding a
// word while STALL is high, and counts ACKs. When every word is acknowledged
// it drops CYC and reports ST_OK. ERR from the master port (invalid
// destination) ends the transfer with ST_BAD_ADDR. A watchdog, restarted by
// every accepted word or ACK, ends it with ST_GNT_TIMEOUT when no grant is
// held, or ST_SLV_TIMEOUT when the slave stalls or does not acknowledge.
// Words may be supplied progressively: only words below avail_i are strobed.
//
// Timing (no contention, slave ACK one cycle after STB): req_i in cycle 0,
// CYC in cycle 2, grant in cycle 3, first STB in cycle 4 (time-to-grant 4),
// last of 8 STBs in cycle 11, last ACK in cycle 12, done_o/status in cycle 13
// (completion 13). These are the best-case numbers the paper reports. The
// watchdog period and the status encoding are this design's choices.
module wb_master_if
  import wb_pkg::*;
#(
  parameter int unsigned TIMEOUT = 64
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          req_i,     // start pulse
  input  port_mask_t                    dest_i,    // one-hot destination
  input  packet_t                       words_i,   // words to send
  input  logic [$clog2(PKT_WORDS):0]    avail_i,   // words 0..avail_i-1 valid
  output logic                          busy_o,
  output logic                          done_o,    // one-cycle pulse
  output wb_status_e                    status_o,  // result of last transfer
  output wb_m2s_t                       m_o,
  input  wb_s2m_t                       m_i
);
  localparam int unsigned IW = $clog2(PKT_WORDS) + 1;
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_SEND, S_WACK} state_e;

  state_e              state;
  logic                req_q;
  port_mask_t          dest_q;
  logic [IW-1:0]       idx, acks;
  logic [$clog2(TIMEOUT+1)-1:0] wdog;

  logic          accepted, expired;
  logic [IW-1:0] idx_n;

  assign accepted = m_o.stb && !m_i.stall;
  assign idx_n    = idx + IW'(accepted);
  assign expired  = (wdog == ($clog2(TIMEOUT+1))'(TIMEOUT));
  assign m_o.we   = 1'b1;
  assign busy_o   = (state != S_IDLE) || req_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      req_q    <= 1'b0;
      dest_q   <= '0;
      idx      <= '0;
      acks     <= '0;
      wdog     <= '0;
      done_o   <= 1'b0;
      status_o <= ST_OK;
      m_o.cyc  <= 1'b0;
      m_o.stb  <= 1'b0;
      m_o.adr  <= '0;
      m_o.sel  <= '0;
      m_o.dat  <= '0;
    end else begin
      done_o <= 1'b0;
      if (req_i && state == S_IDLE && !req_q) begin
        req_q  <= 1'b1;
        dest_q <= dest_i;
      end
      unique case (state)
        S_IDLE: if (req_q) begin
          req_q   <= 1'b0;
          state   <= S_REQ;
          m_o.cyc <= 1'b1;
          m_o.adr <= dest_q;
          idx     <= '0;
          acks    <= '0;
          wdog    <= '0;
        end
        S_REQ: begin
          if (m_i.err) begin
            finish(ST_BAD_ADDR);
          end else if (m_i.gnt) begin
            state <= S_SEND;
            wdog  <= '0;
            load_word('0);
          end else if (expired) begin
            finish(ST_GNT_TIMEOUT);
          end else begin
            wdog <= wdog + 1'b1;
          end
        end
        S_SEND: begin
          idx  <= idx_n;
          acks <= acks + IW'(m_i.ack);
          if (accepted || m_i.ack) wdog <= '0;
          else if (!expired)       wdog <= wdog + 1'b1;
          if (idx_n == IW'(PKT_WORDS)) begin
            m_o.stb <= 1'b0;
            state   <= S_WACK;
          end else if (expired && !accepted && !m_i.ack) begin
            finish(m_i.gnt ? ST_SLV_TIMEOUT : ST_GNT_TIMEOUT);
          end else if (accepted || !m_o.stb) begin
            load_word(idx_n);
          end
        end
        S_WACK: begin
          acks <= acks + IW'(m_i.ack);
          if (acks + IW'(m_i.ack) == IW'(PKT_WORDS)) finish(ST_OK);
          else if (m_i.ack)    wdog <= '0;
          else if (expired)    finish(ST_SLV_TIMEOUT);
          else                 wdog <= wdog + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Offer word i if it is available, otherwise leave STB low and retry.
  task automatic load_word(input logic [IW-1:0] i);
    if (i < avail_i) begin
      m_o.stb <= 1'b1;
      m_o.sel <= i[SELW-1:0];
      m_o.dat <= words_i[i[SELW-1:0]];
    end else begin
      m_o.stb <= 1'b0;
    end
  endtask

  task automatic finish(input wb_status_e st);
    state    <= S_IDLE;
    m_o.cyc  <= 1'b0;
    m_o.stb  <= 1'b0;
    done_o   <= 1'b1;
    status_o <= st;
  endtask

  a_stb_in_cyc: assert property (@(posedge clk) disable iff (rst) m_o.stb |-> m_o.cyc);
  a_hold_stalled: assert property (@(posedge clk) disable iff (rst)
    (m_o.stb && m_i.stall && m_o.cyc) |=> (!m_o.cyc || (m_o.stb && $stable(m_o.sel) && $stable(m_o.dat))));
endmodule
