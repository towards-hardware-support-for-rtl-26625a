// comp_module -- computation-module template.
//
// Sits between a WB slave interface (incoming packets) and a WB master
// interface (outgoing packets). When the slave interface reports a full
// buffer, the control logic copies the packet into the input registers and
// pulses rd_done_o so the slave interface can accept the next packet. Word 0
// is the application ID and is copied unchanged to output register 0; words
// 1..PKT_WORDS-1 pass through PKT_WORDS-1 identical computation units working
// in parallel (selected by FUNC) into output registers 1..PKT_WORDS-1. The
// control logic then pulses m_req_o with the destination from the register
// file and waits for the master interface. Its result is stored in the error
// status register (err_o) and announced to the register file (err_valid_o).
// The output registers are then cleared and the next packet, if any, taken.
//
// Timing: buffer full (cycle 0) -> input registers (1) -> output registers and
// request pulse (2) -> transfer -> status. The template's structure follows
// the paper; clearing the outputs also after a failed transfer is this
// design's choice.
module comp_module
  import wb_pkg::*;
#(
  parameter comp_fn_e    FUNC       = FN_MULT,
  parameter logic [31:0] MULT_CONST = 32'd3
) (
  input  logic        clk,
  input  logic        rst,
  // slave interface side
  input  packet_t     buf_i,
  input  logic        full_i,
  output logic        rd_done_o,
  // master interface side
  output logic        m_req_o,
  output port_mask_t  m_dest_o,
  output packet_t     m_words_o,
  input  logic        m_done_i,
  input  wb_status_e  m_status_i,
  // register file side
  input  port_mask_t  dest_i,
  output wb_status_e  err_o,
  output logic        err_valid_o
);
  typedef enum logic [1:0] {C_IDLE, C_COMPUTE, C_WAIT} cstate_e;

  cstate_e state;
  packet_t in_q, out_q, unit_y;

  assign rd_done_o = (state == C_IDLE) && full_i;
  assign m_words_o = out_q;
  assign m_dest_o  = dest_i;
  assign unit_y[0] = in_q[0];

  for (genvar k = 1; k < PKT_WORDS; k++) begin : g_unit
    if (FUNC == FN_MULT) begin : g_mult
      const_mult #(.DW(DW), .MULT_CONST(MULT_CONST)) u_unit (.a_i(in_q[k]), .y_o(unit_y[k]));
    end else if (FUNC == FN_HAM_ENC) begin : g_enc
      hamming_enc u_unit (.d_i(in_q[k]), .c_o(unit_y[k]));
    end else begin : g_dec
      hamming_dec u_unit (.c_i(in_q[k]), .d_o(unit_y[k]));
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= C_IDLE;
      in_q        <= '0;
      out_q       <= '0;
      m_req_o     <= 1'b0;
      err_o       <= ST_OK;
      err_valid_o <= 1'b0;
    end else begin
      m_req_o     <= 1'b0;
      err_valid_o <= 1'b0;
      unique case (state)
        C_IDLE: if (full_i) begin
          in_q  <= buf_i;
          state <= C_COMPUTE;
        end
        C_COMPUTE: begin
          out_q   <= unit_y;
          m_req_o <= 1'b1;
          state   <= C_WAIT;
        end
        C_WAIT: if (m_done_i) begin
          err_o       <= m_status_i;
          err_valid_o <= 1'b1;
          out_q       <= '0;
          state       <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
