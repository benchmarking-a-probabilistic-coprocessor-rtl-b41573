// pcomputer_top_small_tb: end-to-end test of the probabilistic coprocessor
// at reduced size (64 pi units, 32 bootstrap units, 3 knapsack chains with 256-item tables) for a quick run.
// See top_tb_body.svh for the flow and the checks.
module pcomputer_top_small_tb;
  import pc_pkg::*;
  localparam int PI_NP = 64, BOOT_NP = 32, KNAP_NCH = 3;

`include "top_tb_body.svh"

  pcomputer_top #(.PI_NP(64), .BOOT_NP(32), .KNAP_NCH(3), .KNAP_N(256)) dut (
    .clk, .rst,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .m_axi_awaddr(m_awaddr), .m_axi_awlen(m_awlen), .m_axi_awsize(m_awsize),
    .m_axi_awburst(m_awburst), .m_axi_awvalid(m_awvalid), .m_axi_awready(m_awready),
    .m_axi_wdata(m_wdata), .m_axi_wstrb(m_wstrb), .m_axi_wlast(m_wlast),
    .m_axi_wvalid(m_wvalid), .m_axi_wready(m_wready),
    .m_axi_bresp(m_bresp), .m_axi_bvalid(m_bvalid), .m_axi_bready(m_bready),
    .busy);
endmodule
