// knap_engine_tb: three chains, 40 random items, tables and parameters
// written over the cfg bus, 20000 clocks with the temperature halved every
// 2000 clocks. Checks: improvement records of each chain increase; each
// chain's final record pair (best value/weight, then the best item vector
// in 32-item words) is self-consistent when the vector is re-evaluated
// here against the item tables; the weight respects the capacity; the best
// chain is within 1% of the dynamic-programming optimum; beta has doubled
// ten times; the run takes n_cycles + 4 clocks to the first final record.
module knap_engine_tb;
  import pc_pkg::*;
  localparam int NCH = 3, N = 64, NI = 40, NCYC = 20000;
  logic clk = 0, rst = 1;
  cfg_t cfg = '0;
  logic busy, done, rec_valid, rec_ready = 1;
  rec_t rec;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  knap_engine #(.NCH(NCH), .N(N)) dut (.clk, .rst, .cfg, .busy, .done,
                                       .rec_valid, .rec_ready, .rec);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [17:0] off, input logic [31:0] d);
    @(negedge clk);
    cfg = '{we: 1'b1, target: TGT_KNAP, offset: off, data: d};
    @(negedge clk);
    cfg = '0;
  endtask

  int W [N], V [N];
  function automatic int knap_opt(input int cap);
    int best [];
    best = new[cap + 1];
    for (int c = 0; c <= cap; c++) best[c] = 0;
    for (int i = 0; i < NI; i++)
      for (int c = cap; c >= W[i]; c--)
        if (best[c - W[i]] + V[i] > best[c]) best[c] = best[c - W[i]] + V[i];
    return best[cap];
  endfunction

  initial begin
    int sumw, cap, opt, t0, clocks, last_imp [NCH], n_imp, bestv [NCH], bestw [NCH];
    int maxbest, sv, sw, nstate [NCH];
    logic [63:0] xs [NCH];
    bit in_final;
    void'($urandom(11));
    sumw = 0;
    for (int i = 0; i < N; i++) begin
      W[i] = (i < NI) ? $urandom_range(0, 1000) : 0;
      V[i] = (i < NI) ? $urandom_range(0, 1000) : 0;
      sumw += W[i];
    end
    cap = sumw / 2;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < N; i++) begin wr(18'h10000 + 18'(i), W[i]); wr(18'h20000 + 18'(i), V[i]); end
    for (int i = 0; i < 256; i++) wr(18'h100 + 18'(i), int'(65535.0 * $exp(-i / 16.0)));
    wr(18'd1, NCYC); wr(18'd2, NI); wr(18'd3, cap); wr(18'd4, 4); wr(18'd5, NCYC / 10);
    @(negedge clk); cfg = '{we: 1'b1, target: TGT_KNAP, offset: 18'd0, data: 32'd1};
    t0 = $time / 10;
    @(negedge clk); cfg = '0;
    for (int c = 0; c < NCH; c++) begin last_imp[c] = 0; nstate[c] = 0; xs[c] = 0; end
    n_imp = 0; in_final = 0; clocks = 0;
    while (!done) begin
      if (rec_valid) begin
        if (rec.tag == TAG_KNAP_IMPROVE) begin
          check(!in_final, "improvement after run");
          check(int'(rec.value) > last_imp[rec.index], "improvements increase");
          last_imp[rec.index] = int'(rec.value);
          n_imp++;
        end else if (rec.tag == TAG_KNAP_BEST) begin
          if (!in_final) clocks = $time / 10 - t0;
          in_final = 1;
          bestv[rec.index] = int'(rec.value[23:0]);
          bestw[rec.index] = int'(rec.value[47:24]);
        end else if (rec.tag == TAG_KNAP_STATE) begin
          xs[rec.index[11:8]][32 * rec.index[7:0] +: 32] = rec.value[31:0];
          nstate[rec.index[11:8]]++;
        end else check(0, "unexpected tag");
      end
      @(negedge clk);
    end
    check(dut.beta == 16'd4096, $sformatf("beta at end %0d", dut.beta));
    check(clocks == NCYC + 4, $sformatf("run clocks %0d", clocks));
    check(n_imp > NCH, "improvement records");
    opt = knap_opt(cap);
    maxbest = 0;
    for (int c = 0; c < NCH; c++) begin
      sv = 0; sw = 0;
      for (int i = 0; i < N; i++) if (xs[c][i]) begin sv += V[i]; sw += W[i]; end
      check(nstate[c] == 2, $sformatf("chain %0d state words %0d", c, nstate[c]));
      check(sv == bestv[c] && sw == bestw[c], $sformatf("chain %0d vector %0d/%0d vs %0d/%0d", c, sv, sw, bestv[c], bestw[c]));
      check(sw <= cap, "capacity");
      check(last_imp[c] <= bestv[c], "improvement <= best");
      if (bestv[c] > maxbest) maxbest = bestv[c];
      $display("chain %0d best %0d weight %0d", c, bestv[c], bestw[c]);
    end
    $display("optimum %0d capacity %0d", opt, cap);
    check(maxbest * 100 >= opt * 99 && maxbest <= opt, "best chain within 1% of optimum");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
