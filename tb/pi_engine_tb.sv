// pi_engine_tb: runs the pi engine with 16 units for 200 clocks. The count
// of points inside the circle is rebuilt here from the units' LFSR outputs,
// observed hierarchically, and compared exactly with the engine's N_in
// record; N_all must be 16*200, the run must take n_cycles + 6 clocks from
// the start write to the first record (one sample per unit per clock),
// and 4*N_in/N_all must be near pi.
module pi_engine_tb;
  import pc_pkg::*;
  localparam int NP = 16, W = 18, NCYC = 200;
  logic clk = 0, rst = 1;
  cfg_t cfg = '0;
  logic busy, done, rec_valid, rec_ready;
  logic [47:0] n_in, n_all;
  rec_t rec;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pi_engine #(.NP(NP), .W(W)) dut (.clk, .rst, .cfg, .busy, .done, .n_in, .n_all,
                                   .rec_valid, .rec_ready, .rec);

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

  // independent count of inside points
  longint ref_in = 0;
  int     gen_cycles = 0;
  for (genvar u = 0; u < NP; u++) begin : g_ref
    always @(posedge clk) if (dut.gen) begin
      longint unsigned s;
      s = longint'(dut.g_unit[u].x) * longint'(dut.g_unit[u].x)
        + longint'(dut.g_unit[u].y) * longint'(dut.g_unit[u].y);
      if (s <= (64'd1 << (2 * W))) ref_in++;
    end
  end
  always @(posedge clk) if (dut.gen) gen_cycles++;

  task automatic wr(input logic [17:0] off, input logic [31:0] d);
    @(negedge clk);
    cfg = '{we: 1'b1, target: TGT_PI, offset: off, data: d};
    @(negedge clk);
    cfg = '0;
  endtask

  initial begin
    longint got_in, got_all;
    int t0, t1, nrec;
    rec_ready = 1;
    repeat (3) @(posedge clk);
    rst = 0;
    wr(18'd1, NCYC);
    // other targets must be ignored
    @(negedge clk); cfg = '{we: 1'b1, target: TGT_BOOT, offset: 18'd0, data: 32'd1};
    @(negedge clk); cfg = '0;
    check(!busy, "ignores other targets");
    @(negedge clk); cfg = '{we: 1'b1, target: TGT_PI, offset: 18'd0, data: 32'd1};
    t0 = $time / 10;
    @(negedge clk); cfg = '0;
    check(busy, "busy after start");
    rec_ready = 0;
    while (!rec_valid) @(negedge clk);
    t1 = $time / 10;
    check(t1 - t0 == NCYC + 6, $sformatf("latency start->record %0d, expected %0d", t1 - t0, NCYC + 6));
    repeat (3) @(negedge clk);   // back-pressure: record must wait
    check(rec_valid && rec.tag == TAG_PI_NIN, "record held under back-pressure");
    rec_ready = 1;
    nrec = 0;
    while (rec_valid) begin
      if (rec.tag == TAG_PI_NIN) got_in = rec.value;
      if (rec.tag == TAG_PI_NALL) got_all = rec.value;
      nrec++;
      @(negedge clk);
    end
    check(nrec == 2, $sformatf("two records, got %0d", nrec));
    check(gen_cycles == NCYC, "sampling clocks");
    check(got_all == NP * NCYC, $sformatf("N_all %0d", got_all));
    check(got_in == ref_in, $sformatf("N_in %0d ref %0d", got_in, ref_in));
    check(n_in == got_in && n_all == got_all, "count outputs match records");
    check(4.0 * got_in / got_all > 3.0 && 4.0 * got_in / got_all < 3.3,
          $sformatf("pi estimate %f", 4.0 * got_in / got_all));
    check(!busy, "idle at end");
    $display("pi ~ %f from %0d samples", 4.0 * got_in / got_all, got_all);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
