// pr_region -- one reconfigurable region: a computation module with its WB
// slave and WB master interfaces.
//
// Incoming packets land in the slave interface, the computation module
// processes them and sends the result packet through the master interface to
// the destination held in the register file. The region's error status goes to
// the register file. FUNC selects the computation (constant multiplier,
// Hamming encoder or Hamming decoder). The region is reset by the global
// reset or its own reset bit in the register file, so it can be isolated while
// it is reconfigured. Structure as in the paper's system figure; the regions
// here are statically instantiated, as in the paper's prototype.
module pr_region
  import wb_pkg::*;
#(
  parameter comp_fn_e    FUNC       = FN_MULT,
  parameter logic [31:0] MULT_CONST = 32'd3,
  parameter int unsigned TIMEOUT    = 64
) (
  input  logic       clk,
  input  logic       rst,
  input  port_mask_t dest_i,      // destination address from the register file
  output wb_status_e err_o,       // last transaction error status
  output logic       err_valid_o,
  output wb_m2s_t    m_o,         // master interface to the crossbar
  input  wb_s2m_t    m_i,
  input  wb_x2s_t    s_i,         // slave interface from the crossbar
  output wb_s2x_t    s_o
);
  packet_t    buf_w, words_w;
  logic       full_w, rd_done_w, req_w, done_w;
  port_mask_t dest_w;
  wb_status_e status_w;
  logic       busy_w;

  wb_slave_if u_slv (
    .clk, .rst, .s_i, .s_o, .buf_o(buf_w), .full_o(full_w), .rd_done_i(rd_done_w)
  );

  comp_module #(.FUNC(FUNC), .MULT_CONST(MULT_CONST)) u_comp (
    .clk, .rst, .buf_i(buf_w), .full_i(full_w), .rd_done_o(rd_done_w),
    .m_req_o(req_w), .m_dest_o(dest_w), .m_words_o(words_w),
    .m_done_i(done_w), .m_status_i(status_w),
    .dest_i, .err_o, .err_valid_o
  );

  wb_master_if #(.TIMEOUT(TIMEOUT)) u_mst (
    .clk, .rst, .req_i(req_w), .dest_i(dest_w), .words_i(words_w),
    .avail_i(($clog2(PKT_WORDS)+1)'(PKT_WORDS)), .busy_o(busy_w), .done_o(done_w),
    .status_o(status_w), .m_o, .m_i
  );
endmodule
