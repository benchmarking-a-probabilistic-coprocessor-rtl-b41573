// axil_ctrl_tb: AXI-Lite writes must appear as one-clock cfg broadcasts
// with target = addr[23:20] and offset = addr[19:2], with address and data
// arriving in either order; global registers must read back; the ID,
// status (busy and sticky done, cleared by the engine's start write),
// record count and time stamp must read correctly; every write is answered
// once with OKAY.
module axil_ctrl_tb;
  import pc_pkg::*;
  logic clk = 0, rst = 1;
  logic [23:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic [31:0] wdata = 0, rdata;
  logic [3:0] wstrb = 4'hF;
  logic awready, wready, bvalid, arready, rvalid;
  logic [1:0] bresp, rresp;
  cfg_t cfg;
  logic [3:0] busy = 4'b0101, done_pulse = 0;
  logic [31:0] rec_count = 32'd77;
  logic [63:0] now = 64'h1_2345_6789;
  logic [63:0] ddr_base, ddr_size;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  axil_ctrl dut (
    .clk, .rst,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .cfg, .busy, .done_pulse, .rec_count, .now, .ddr_base, .ddr_size);

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

  // cfg monitor
  cfg_t seen [$];
  always @(posedge clk) if (cfg.we) seen.push_back(cfg);

  task automatic write(input logic [23:0] a, input logic [31:0] d, input int skew);
    @(negedge clk);
    if (skew >= 0) begin awaddr = a; awvalid = 1; end
    if (skew <= 0) begin wdata = d; wvalid = 1; end
    if (skew != 0) begin
      repeat (2) @(negedge clk);
      awaddr = a; awvalid = 1; wdata = d; wvalid = 1;
    end
    do @(posedge clk); while (!(awvalid && awready));
    #1 awvalid = 0; wvalid = 0;
    bready = 1;
    do @(posedge clk); while (!bvalid);
    check(bresp == 2'b00, "OKAY");
    #1 bready = 0;
  endtask

  task automatic read(input logic [23:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1;
    do @(posedge clk); while (!arready);
    #1 arvalid = 0; rready = 1;
    do @(posedge clk); while (!rvalid);
    d = rdata;
    #1 rready = 0;
  endtask

  initial begin
    logic [31:0] d;
    repeat (3) @(posedge clk);
    rst = 0;
    write(24'h312344, 32'hDEAD_BEEF, 0);
    write(24'h140000, 32'h0000_1234, 1);
    write(24'h000000, 32'h1, -1);
    repeat (3) @(negedge clk);
    check(seen.size() == 3, $sformatf("cfg pulses %0d", seen.size()));
    if (seen.size() == 3) begin
      check(seen[0].target == 4'h3 && seen[0].offset == 18'h4_8D1 && seen[0].data == 32'hDEAD_BEEF, "cfg 0");
      check(seen[1].target == 4'h1 && seen[1].offset == 18'h1_0000 && seen[1].data == 32'h1234, "cfg 1");
      check(seen[2].target == 4'h0 && seen[2].offset == 18'h0 && seen[2].data == 32'h1, "cfg 2");
    end
    write(24'hF00000, 32'h4000_0000, 0);
    write(24'hF00004, 32'h0000_0001, 0);
    write(24'hF00008, 32'h0001_0000, 0);
    check(ddr_base == 64'h1_4000_0000 && ddr_size == 64'h1_0000, "ddr registers");
    read(24'hF00000, d); check(d == 32'h4000_0000, "read base lo");
    read(24'hF00004, d); check(d == 32'h1, "read base hi");
    read(24'hF00020, d); check(d == 32'h5043_0001, "id");
    read(24'hF00028, d); check(d == 32'd77, "record count");
    read(24'hF0002C, d); check(d == 32'h2345_6789, "time stamp");
    @(negedge clk); done_pulse = 4'b0110; @(negedge clk); done_pulse = 0;
    read(24'hF00024, d); check(d == 32'h56, $sformatf("status %h", d));
    write(24'h100000, 32'h1, 0);     // start boot engine clears its done
    read(24'hF00024, d); check(d == 32'h54, $sformatf("status after start %h", d));
    read(24'h100004, d); check(d == 32'h0, "engine space reads zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
