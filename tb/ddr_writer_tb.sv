// ddr_writer_tb: 40 records through the AXI4 writer into a memory model
// with random ready delays and a 256-byte ring at 0x8000_0000. Each record
// must be two beats (time stamp, then record) at the next 16-byte slot;
// the ring must wrap after 16 records, so memory holds the last 16; the
// record counter must reach 40 and the memory model must see no protocol
// error.
module ddr_writer_tb;
  import pc_pkg::*;
  localparam int NREC = 40;
  localparam longint BASE = 64'h8000_0000, SIZE = 256;
  logic clk = 0, rst = 1;
  logic in_valid = 0, in_ready;
  trec_t in;
  logic [31:0] count;
  logic [63:0] awaddr, wdata;
  logic [7:0] awlen, wstrb;
  logic [2:0] awsize;
  logic [1:0] awburst, bresp;
  logic awvalid, awready, wlast, wvalid, wready, bvalid, bready;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ddr_writer #(.AW(64)) dut (
    .clk, .rst, .base(BASE), .size(SIZE), .in_valid, .in_ready, .in, .count,
    .m_axi_awaddr(awaddr), .m_axi_awlen(awlen), .m_axi_awsize(awsize),
    .m_axi_awburst(awburst), .m_axi_awvalid(awvalid), .m_axi_awready(awready),
    .m_axi_wdata(wdata), .m_axi_wstrb(wstrb), .m_axi_wlast(wlast),
    .m_axi_wvalid(wvalid), .m_axi_wready(wready),
    .m_axi_bresp(bresp), .m_axi_bvalid(bvalid), .m_axi_bready(bready));

  axi_mem_model #(.READY_PCT(60)) mem (
    .clk, .rst, .awaddr, .awlen, .awsize, .awburst, .awvalid, .awready,
    .wdata, .wstrb, .wlast, .wvalid, .wready, .bresp, .bvalid, .bready);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic trec_t mk(input int k);
    trec_t r;
    r.ts = 64'(1000 + 7 * k);
    r.rec = '{tag: TAG_PI_NIN, index: 12'(k), value: 48'(k * 12345)};
    return r;
  endfunction

  initial begin
    int k;
    repeat (3) @(posedge clk);
    rst = 0;
    k = 0;
    while (k < NREC) begin
      @(negedge clk);
      in_valid = 1; in = mk(k);
      @(posedge clk);
      if (in_ready) k++;
      #1;
    end
    @(negedge clk); in_valid = 0;
    while (count != NREC) @(negedge clk);
    check(mem.bursts == NREC, $sformatf("bursts %0d", mem.bursts));
    check(mem.beats == 2 * NREC, $sformatf("beats %0d", mem.beats));
    check(mem.errors == 0, $sformatf("protocol errors %0d", mem.errors));
    check(mem.mem.num() == SIZE / 8, $sformatf("words written %0d", mem.mem.num()));
    for (int j = NREC - 16; j < NREC; j++) begin
      longint unsigned a;
      trec_t r;
      r = mk(j);
      a = BASE + 16 * (j % 16);
      check(mem.mem[a] == r.ts, $sformatf("ts of record %0d", j));
      check(mem.mem[a + 8] == 64'(r.rec), $sformatf("record %0d", j));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
