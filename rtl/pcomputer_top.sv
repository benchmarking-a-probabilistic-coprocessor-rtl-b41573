// pcomputer_top: the probabilistic coprocessor ("p-computer") as emulated
// on an FPGA.
//
// The coprocessor is an array of N_p parallel units, each an N-bit random
// number generator feeding a problem-specific kernel, whose outputs are
// gathered by a data collector. This top holds the four kernels the paper
// benchmarks, each as an engine with its own RNG/kernel array and
// collector:
//   pi_engine     2800 units, Monte Carlo estimate of pi
//   boot_engine   1500 units, bootstrap histogram of a difference of means
//   bayes_engine  10 copies of a 127-node Bayesian network of p-bits
//   knap_engine   10 Markov chains for the 0-1 knapsack problem
// The host writes parameters and tables and starts engines through the
// AXI-Lite slave (axil_ctrl); engines report results as records, which
// result_mux time-stamps and ddr_writer stores in DDR4 through an AXI4
// write port, from where the host reads them by DMA. PCIe, the AXI
// interconnect and the DDR4 controller are outside this module: their
// signals are the AXI-Lite slave and AXI4 master ports.
// Clock and reset: one clock; rst is synchronous and active high.
// In the paper each kernel is a separate FPGA build of the same
// architecture; placing all four engines side by side under one register
// map is this design's choice.
module pcomputer_top
  import pc_pkg::*;
#(
  parameter int PI_NP    = 2800,
  parameter int PI_W     = 18,
  parameter int BOOT_NP  = 1500,
  parameter int BOOT_DEPTH = 1024,
  parameter int BAYES_L  = 7,
  parameter int BAYES_NC = 10,
  parameter int KNAP_NCH = 10,
  parameter int KNAP_N   = 8192
) (
  input  logic        clk,
  input  logic        rst,
  // AXI-Lite slave (host registers)
  input  logic [23:0] s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic [3:0]  s_axil_wstrb,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [23:0] s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // AXI4 write master (to DDR4)
  output logic [63:0] m_axi_awaddr,
  output logic [7:0]  m_axi_awlen,
  output logic [2:0]  m_axi_awsize,
  output logic [1:0]  m_axi_awburst,
  output logic        m_axi_awvalid,
  input  logic        m_axi_awready,
  output logic [63:0] m_axi_wdata,
  output logic [7:0]  m_axi_wstrb,
  output logic        m_axi_wlast,
  output logic        m_axi_wvalid,
  input  logic        m_axi_wready,
  input  logic [1:0]  m_axi_bresp,
  input  logic        m_axi_bvalid,
  output logic        m_axi_bready,
  // engine status
  output logic [3:0]  busy
);
  cfg_t        cfg;
  logic [3:0]  done_p;
  logic [3:0]  rv, rr;
  rec_t        recs [4];
  trec_t       tr;
  logic        tr_valid, tr_ready;
  logic [63:0] now, ddr_base, ddr_size;
  logic [31:0] rec_count;
  logic [47:0] pi_n_in, pi_n_all;

  axil_ctrl u_ctrl (
    .clk, .rst,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wstrb, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready,
    .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .cfg, .busy, .done_pulse(done_p), .rec_count, .now, .ddr_base, .ddr_size);

  pi_engine #(.NP(PI_NP), .W(PI_W)) u_pi (
    .clk, .rst, .cfg, .busy(busy[0]), .done(done_p[0]),
    .n_in(pi_n_in), .n_all(pi_n_all),
    .rec_valid(rv[0]), .rec_ready(rr[0]), .rec(recs[0]));

  boot_engine #(.NP(BOOT_NP), .DEPTH(BOOT_DEPTH)) u_boot (
    .clk, .rst, .cfg, .busy(busy[1]), .done(done_p[1]),
    .rec_valid(rv[1]), .rec_ready(rr[1]), .rec(recs[1]));

  bayes_engine #(.L(BAYES_L), .NC(BAYES_NC)) u_bayes (
    .clk, .rst, .cfg, .busy(busy[2]), .done(done_p[2]),
    .rec_valid(rv[2]), .rec_ready(rr[2]), .rec(recs[2]));

  knap_engine #(.NCH(KNAP_NCH), .N(KNAP_N)) u_knap (
    .clk, .rst, .cfg, .busy(busy[3]), .done(done_p[3]),
    .rec_valid(rv[3]), .rec_ready(rr[3]), .rec(recs[3]));

  result_mux #(.NIN(4)) u_mux (
    .clk, .rst, .in_valid(rv), .in_ready(rr), .in_rec(recs),
    .out_valid(tr_valid), .out_ready(tr_ready), .out(tr), .now);

  ddr_writer #(.AW(64)) u_wr (
    .clk, .rst, .base(ddr_base), .size(ddr_size),
    .in_valid(tr_valid), .in_ready(tr_ready), .in(tr), .count(rec_count),
    .m_axi_awaddr, .m_axi_awlen, .m_axi_awsize, .m_axi_awburst,
    .m_axi_awvalid, .m_axi_awready,
    .m_axi_wdata, .m_axi_wstrb, .m_axi_wlast, .m_axi_wvalid, .m_axi_wready,
    .m_axi_bresp, .m_axi_bvalid, .m_axi_bready);
endmodule
