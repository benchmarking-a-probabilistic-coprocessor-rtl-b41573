// bayes_engine_tb: the family-tree network at its full size (7 generations,
// 127 nodes, 10 copies) with the inheritance model (a child copies one of
// its two parents at random). Reference node 0 is a first-layer ancestor.
// Checks: 255 records in order; total = 10 * n; agreement of node 0 with
// itself is total (correlation 1); the +1 counts equal a recount made here
// from the aligned network states; the measured correlations are near the
// inheritance values 1/2 (child), 1/4 (grandchild), 1/8, 1/16 and 0 for
// nodes that share no ancestor line with node 0; run length n + 9 clocks.
module bayes_engine_tb;
  import pc_pkg::*;
  localparam int L = 7, NC = 10, NN = 127, NCYC = 4000;
  logic clk = 0, rst = 1;
  cfg_t cfg = '0;
  logic busy, done, rec_valid, rec_ready = 1;
  rec_t rec;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  bayes_engine #(.L(L), .NC(NC)) dut (.clk, .rst, .cfg, .busy, .done,
                                      .rec_valid, .rec_ready, .rec);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [17:0] off, input logic [31:0] d);
    @(negedge clk);
    cfg = '{we: 1'b1, target: TGT_BAYES, offset: off, data: d};
    @(negedge clk);
    cfg = '0;
  endtask

  // recount of +1 outcomes from the aligned states
  longint recount [NN];
  always @(posedge clk) if (dut.state == 2'd1 && dut.warm == 0)
    for (int g = 0; g < NN; g++)
      for (int c = 0; c < NC; c++) if (dut.al[c][g]) recount[g]++;

  initial begin
    longint pos [NN], agr [NN], total;
    real corr [NN];
    int n, t0, clocks;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 64; i++) wr(18'h100 + 18'(i), 0);
    wr(18'h100 + 18'd32, 32'h8000);    // I = 0  -> 1/2
    wr(18'h100 + 18'd34, 32'h10000);   // I = +2 -> 1
    for (int g = 0; g < NN; g++) begin
      wr(18'h1000 + 18'(4 * g), 0);
      wr(18'h1000 + 18'(4 * g + 1), (g < 64) ? 0 : 1);
      wr(18'h1000 + 18'(4 * g + 2), (g < 64) ? 0 : 1);
    end
    wr(18'd1, NCYC);
    wr(18'd2, 0);
    for (int g = 0; g < NN; g++) recount[g] = 0;
    @(negedge clk); cfg = '{we: 1'b1, target: TGT_BAYES, offset: 18'd0, data: 32'd1};
    t0 = $time / 10;
    @(negedge clk); cfg = '0;
    while (!rec_valid) @(negedge clk);
    clocks = $time / 10 - t0;
    n = 0;
    while (rec_valid) begin
      if (n < NN)          check(rec.tag == TAG_BAYES_POS && rec.index == 12'(n), "pos record order");
      else if (n < 2 * NN) check(rec.tag == TAG_BAYES_AGREE && rec.index == 12'(n - NN), "agree record order");
      else                 check(rec.tag == TAG_BAYES_TOTAL, "total record");
      if (n < NN) pos[n] = rec.value;
      else if (n < 2 * NN) agr[n - NN] = rec.value;
      else total = rec.value;
      n++;
      @(negedge clk);
    end
    check(n == 2 * NN + 1, $sformatf("%0d records", n));
    check(total == NC * NCYC, $sformatf("total %0d", total));
    check(agr[0] == total, "self agreement");
    check(clocks == NCYC + 9, $sformatf("run clocks %0d", clocks));
    for (int g = 0; g < NN; g++) begin
      real t;
      t = real'(total);
      check(pos[g] == recount[g], $sformatf("pos %0d: %0d vs %0d", g, pos[g], recount[g]));
      corr[g] = (2.0 * agr[g] - t) / t - ((2.0 * pos[g] - t) / t) * ((2.0 * pos[0] - t) / t);
    end
    $display("corr: self %f child %f grandchild %f g3 %f g4 %f stranger %f %f",
             corr[0], corr[64], corr[96], corr[112], corr[120], corr[1], corr[65]);
    check(corr[64]  > 0.45  && corr[64]  < 0.55,  "child 1/2");
    check(corr[96]  > 0.20  && corr[96]  < 0.30,  "grandchild 1/4");
    check(corr[112] > 0.085 && corr[112] < 0.165, "3rd generation 1/8");
    check(corr[120] > 0.025 && corr[120] < 0.10,  "4th generation 1/16");
    check(corr[1]   > -0.04 && corr[1]   < 0.04,  "stranger (other root)");
    check(corr[65]  > -0.04 && corr[65]  < 0.04,  "stranger (cousin line)");
    check(pos[0] > total * 4 / 10 && pos[0] < total * 6 / 10, "root unbiased");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
