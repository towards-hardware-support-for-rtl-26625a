// tb_reg_file -- AXI-Lite writes and reads of the register file. Checks the
// read-only device ID, read-back of every writable register, the mapping of
// the registers onto the configuration outputs (destinations, resets, allowed
// masks, package limits, application destinations), that status registers
// ignore host writes and capture hardware status, and SLVERR beyond 0x4C.
module tb_reg_file;
  import wb_pkg::*;
  `include "tb/tb_check.svh"
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [6:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [1:0] bresp, rresp;
  port_mask_t [3:0] pr_dest, allowed, app_dest;
  logic [3:0] port_rst, pr_err_valid;
  pkg_cnt_t [3:0][3:0] pkg_limit;
  wb_status_e [3:0] pr_err;
  logic app_err_valid, icap_done, icap_err;
  logic [1:0] app_err_id;
  wb_status_e app_err;

  reg_file #(.DEVICE_ID(32'h1234_5678)) dut (.clk, .rst, .awaddr, .awvalid, .awready, .wdata, .wvalid, .wready,
    .bresp, .bvalid, .bready, .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid, .rready,
    .pr_dest_o(pr_dest), .port_rst_o(port_rst), .allowed_o(allowed), .pkg_limit_o(pkg_limit),
    .app_dest_o(app_dest), .pr_err_valid_i(pr_err_valid), .pr_err_i(pr_err),
    .app_err_valid_i(app_err_valid), .app_err_id_i(app_err_id), .app_err_i(app_err),
    .icap_done_i(icap_done), .icap_err_i(icap_err));

  task automatic axil_write(input logic [6:0] a, input logic [31:0] d, output logic [1:0] resp);
    @(negedge clk); awaddr = a; wdata = d; awvalid = 1; wvalid = 1; bready = 1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk); awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
    resp = bresp;
    @(negedge clk); bready = 0;
  endtask
  task automatic axil_read(input logic [6:0] a, output logic [31:0] d, output logic [1:0] resp);
    @(negedge clk); araddr = a; arvalid = 1; rready = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata; resp = rresp;
    @(negedge clk); rready = 0;
  endtask

  initial begin
    logic [31:0] d, v [20];
    logic [1:0] r;
    {awvalid, wvalid, bready, arvalid, rready} = '0;
    pr_err_valid = 0; pr_err = '{default: ST_OK}; app_err_valid = 0; app_err_id = 0; app_err = ST_OK;
    icap_done = 0; icap_err = 0;
    repeat (3) @(negedge clk); rst = 0;
    axil_read(7'h00, d, r);
    `CHECK(d == 32'h1234_5678 && r == 2'b00, "device ID")
    for (int i = 1; i <= 16; i++) begin
      v[i] = $urandom;
      axil_write(7'(4 * i), v[i], r);
      `CHECK(r == 2'b00, "write OKAY")
    end
    for (int i = 1; i <= 16; i++) begin
      axil_read(7'(4 * i), d, r);
      `CHECK(d == v[i], "read back")
    end
    for (int p = 1; p < 4; p++) `CHECK(pr_dest[p] == v[p][3:0], "PR destination output")
    `CHECK(port_rst == v[4][3:0], "reset output")
    for (int p = 0; p < 4; p++) begin
      `CHECK(allowed[p] == v[5 + p][3:0], "allowed output")
      `CHECK(app_dest[p] == v[13 + p][3:0], "application destination output")
      for (int m = 0; m < 4; m++) `CHECK(pkg_limit[p][m] == v[9 + p][8*m +: 8], "package limit output")
    end
    // status from hardware
    @(negedge clk); pr_err_valid = 4'b0100; pr_err[2] = ST_SLV_TIMEOUT;
    app_err_valid = 1; app_err_id = 2'd3; app_err = ST_BAD_ADDR; icap_done = 1;
    @(negedge clk); pr_err_valid = 0; app_err_valid = 0;
    axil_write(7'h44, 32'hFFFF_FFFF, r);
    axil_read(7'h44, d, r);
    `CHECK(d == 32'h0003_0000, "PR region 2 status, host write ignored")
    axil_read(7'h48, d, r);
    `CHECK(d == 32'h0100_0000, "application 3 status")
    axil_read(7'h4C, d, r);
    `CHECK(d == 32'h1, "ICAP done")
    axil_read(7'h50, d, r);
    `CHECK(r == 2'b10, "SLVERR beyond the register file")
    axil_write(7'h00, 32'h0, r);
    axil_read(7'h00, d, r);
    `CHECK(d == 32'h1234_5678, "device ID read only")
    `TB_END
  end
  initial begin repeat (3000) @(posedge clk); failures++; `TB_END end
endmodule
