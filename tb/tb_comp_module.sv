// tb_comp_module -- drives the computation-module template in its three
// flavours (multiplier x5, Hamming encoder, Hamming decoder) with full
// buffers and a mock master interface. Checks: rd_done pulses once per packet,
// the request carries the register-file destination, word 0 (application ID)
// is forwarded unchanged, words 1..7 are transformed (reference computed
// here), the transfer status lands in the error register with a valid pulse,
// and the output registers are cleared afterwards.
module tb_comp_module;
  import wb_pkg::*;
  `include "tb/tb_check.svh"
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  packet_t     bufw;
  logic  [2:0] full, rd_done, req, done, err_valid;
  port_mask_t  [2:0] mdest;
  packet_t     [2:0] words;
  wb_status_e  [2:0] err;
  wb_status_e  mst;
  port_mask_t  dest;

  comp_module #(.FUNC(FN_MULT), .MULT_CONST(32'd5)) u0 (.clk, .rst, .buf_i(bufw), .full_i(full[0]),
    .rd_done_o(rd_done[0]), .m_req_o(req[0]), .m_dest_o(mdest[0]), .m_words_o(words[0]),
    .m_done_i(done[0]), .m_status_i(mst), .dest_i(dest), .err_o(err[0]), .err_valid_o(err_valid[0]));
  comp_module #(.FUNC(FN_HAM_ENC)) u1 (.clk, .rst, .buf_i(bufw), .full_i(full[1]),
    .rd_done_o(rd_done[1]), .m_req_o(req[1]), .m_dest_o(mdest[1]), .m_words_o(words[1]),
    .m_done_i(done[1]), .m_status_i(mst), .dest_i(dest), .err_o(err[1]), .err_valid_o(err_valid[1]));
  comp_module #(.FUNC(FN_HAM_DEC)) u2 (.clk, .rst, .buf_i(bufw), .full_i(full[2]),
    .rd_done_o(rd_done[2]), .m_req_o(req[2]), .m_dest_o(mdest[2]), .m_words_o(words[2]),
    .m_done_i(done[2]), .m_status_i(mst), .dest_i(dest), .err_o(err[2]), .err_valid_o(err_valid[2]));

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

  function automatic word_t expect_w(input int f, input word_t x);
    case (f)
      0: return x * 5;
      1: return enc(x[25:0]);
      default: return {6'd0, x[25:0]};   // clean codeword of x in -> data of x out
    endcase
  endfunction

  int rd_pulses = 0;
  initial begin
    full = 0; done = 0; mst = ST_OK; dest = 4'b0100;
    repeat (3) @(negedge clk); rst = 0;
    for (int f = 0; f < 3; f++) begin
      for (int n = 0; n < 3; n++) begin
        int rdn;
        packet_t sent, data;
        sent[0] = 32'(n + 1);
        for (int i = 1; i < 8; i++) begin
          data[i] = $urandom;
          sent[i] = (f == 2) ? enc(data[i][25:0]) : data[i];
        end
        bufw = sent; full[f] = 1; rdn = 0;
        @(negedge clk);
        full[f] = 0;
        while (!req[f]) @(negedge clk);
        `CHECK(mdest[f] == dest, "request carries register-file destination")
        `CHECK(words[f][0] == sent[0], "application ID forwarded")
        for (int i = 1; i < 8; i++) `CHECK(words[f][i] == expect_w(f, data[i]), "unit output")
        mst = (n == 2) ? ST_GNT_TIMEOUT : ST_OK;
        repeat (5) @(negedge clk);
        done[f] = 1; @(negedge clk); done[f] = 0;
        `CHECK(err_valid[f] && err[f] == mst, "status stored and announced")
        `CHECK(words[f] == '0, "outputs cleared")
      end
    end
    `CHECK(rd_pulses == 9, "one rd_done pulse per packet")
    `TB_END
  end
  // rd_done must pulse exactly when the module is idle and the buffer is full
  always @(posedge clk) if (rd_done != 0) rd_pulses++;
  initial begin repeat (3000) @(posedge clk); failures++; `TB_END end
endmodule
