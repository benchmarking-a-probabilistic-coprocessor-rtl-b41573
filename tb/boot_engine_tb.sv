// boot_engine_tb: 8 bootstrap units, 16-entry tables, loaded over the cfg
// bus. Run 1: constant groups (A = 100, B = 40) put all 8*3 samples into
// the bin of a difference of 60. Run 2: both groups hold 0..15; the 64 bin
// records must match a tally of the units' one-hot outputs made here, sum
// to 8*rounds, and the run must take rounds * 16 clocks plus pipeline.
module boot_engine_tb;
  import pc_pkg::*;
  localparam int NP = 8, DEPTH = 16, BINS = 64;
  logic clk = 0, rst = 1;
  cfg_t cfg = '0;
  logic busy, done, rec_valid, rec_ready = 1;
  rec_t rec;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  boot_engine #(.NP(NP), .DEPTH(DEPTH), .BINS(BINS)) dut (
    .clk, .rst, .cfg, .busy, .done, .rec_valid, .rec_ready, .rec);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [17:0] off, input logic [31:0] d);
    @(negedge clk);
    cfg = '{we: 1'b1, target: TGT_BOOT, offset: off, data: d};
    @(negedge clk);
    cfg = '0;
  endtask

  // tally of the units' outputs
  longint tally [BINS];
  always @(posedge clk) if (dut.state == 2'd1)
    for (int u = 0; u < NP; u++)
      if (dut.hv[u]) for (int b = 0; b < BINS; b++) if (dut.hist[u][b]) tally[b]++;

  task automatic run_and_read(input int rounds, output longint cnt [BINS], output int clocks);
    int t0, n;
    for (int b = 0; b < BINS; b++) tally[b] = 0;
    wr(18'd1, rounds);
    @(negedge clk); cfg = '{we: 1'b1, target: TGT_BOOT, offset: 18'd0, data: 32'd1};
    t0 = $time / 10;
    @(negedge clk); cfg = '0;
    while (!rec_valid) @(negedge clk);
    clocks = $time / 10 - t0;
    n = 0;
    while (rec_valid) begin
      check(rec.tag == TAG_BOOT_BIN && rec.index == 12'(n), "record order");
      cnt[n] = rec.value;
      n++;
      @(negedge clk);
    end
    check(n == BINS, $sformatf("%0d bin records", n));
  endtask

  initial begin
    longint cnt [BINS];
    longint total;
    int clocks;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < DEPTH; i++) begin
      wr(18'h10000 + 18'(i), 100);
      wr(18'h20000 + 18'(i), 40);
    end
    wr(18'd2, 5); wr(18'd3, 3);
    wr(18'd4, 3355443); wr(18'd5, 5592405);   // 2^24/5, 2^24/3
    wr(18'd6, 32'(40 * 256)); wr(18'd7, 16'd512);  // bin width 0.5 from 40
    run_and_read(3, cnt, clocks);
    for (int b = 0; b < BINS; b++)
      check(cnt[b] == ((b == 40) ? NP * 3 : 0), $sformatf("run1 bin %0d = %0d", b, cnt[b]));
    $display("run 1: %0d clocks", clocks);
    check(clocks == 3 * 5 + 7, $sformatf("run1 clocks %0d", clocks));
    // run 2
    for (int i = 0; i < DEPTH; i++) begin
      wr(18'h10000 + 18'(i), i);
      wr(18'h20000 + 18'(i), i);
    end
    wr(18'd2, 16); wr(18'd3, 16);
    wr(18'd4, 1048576); wr(18'd5, 1048576);
    wr(18'd6, 32'(-8 * 256)); wr(18'd7, 16'd1024);     // 64 bins of 0.25 from -8
    run_and_read(20, cnt, clocks);
    total = 0;
    for (int b = 0; b < BINS; b++) begin
      check(cnt[b] == tally[b], $sformatf("run2 bin %0d = %0d tally %0d", b, cnt[b], tally[b]));
      total += cnt[b];
    end
    check(total == NP * 20, $sformatf("total %0d", total));
    check(clocks == 20 * 16 + 7, $sformatf("run2 clocks %0d", clocks));
    check(cnt[32] + cnt[31] + cnt[33] > 0, "samples near zero difference");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
