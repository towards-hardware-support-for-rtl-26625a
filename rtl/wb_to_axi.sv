// wb_to_axi -- card-to-host bridge from the crossbar to the AXI-stream FIFOs.
//
// A WB slave interface collects a result packet. When it is full the packet is
// copied out, the slave interface is released for the next packet, and the
// PKT_WORDS words are streamed on one of the NCH card-to-host channels, TLAST
// on the last word. The channel is chosen by an NCH-bit one-hot shift register
// that rotates after every packet, so the channels are used in round-robin
// order. The shift-register selection is from the paper; TLAST framing is this
// design's choice.
module wb_to_axi
  import wb_pkg::*;
#(
  parameter int unsigned NCH = 3
) (
  input  logic                   clk,
  input  logic                   rst,
  input  wb_x2s_t                s_i,
  output wb_s2x_t                s_o,
  output logic [NCH-1:0][DW-1:0] m_tdata,
  output logic [NCH-1:0]         m_tlast,
  output logic [NCH-1:0]         m_tvalid,
  input  logic [NCH-1:0]         m_tready
);
  localparam int unsigned IW = $clog2(PKT_WORDS);

  packet_t        buf_w, out_q;
  logic           full_w, rd_done, sending;
  logic [NCH-1:0] sel;
  logic [IW-1:0]  idx;
  logic           fire;

  wb_slave_if u_slv (
    .clk, .rst, .s_i, .s_o, .buf_o(buf_w), .full_o(full_w), .rd_done_i(rd_done)
  );

  assign rd_done = !sending && full_w;
  assign fire    = sending && |(m_tready & sel);

  always_comb begin
    for (int c = 0; c < NCH; c++) begin
      m_tdata[c]  = out_q[idx];
      m_tlast[c]  = (idx == IW'(PKT_WORDS - 1));
      m_tvalid[c] = sending && sel[c];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      sending <= 1'b0;
      out_q   <= '0;
      idx     <= '0;
      sel     <= NCH'(1);
    end else if (!sending) begin
      if (full_w) begin
        out_q   <= buf_w;
        idx     <= '0;
        sending <= 1'b1;
      end
    end else if (fire) begin
      idx <= idx + 1'b1;
      if (idx == IW'(PKT_WORDS - 1)) begin
        sending <= 1'b0;
        sel     <= {sel[NCH-2:0], sel[NCH-1]};
      end
    end
  end

  a_onehot_sel: assert property (@(posedge clk) disable iff (rst) $onehot(sel));
endmodule
