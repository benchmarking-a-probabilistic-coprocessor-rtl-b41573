// knap_chain_tb: one knapsack chain with 24 random items (weights and
// values 0..1000, capacity half the total weight, as in the paper).
// Every clock the chain's totals are recomputed here from its item vector
// and must match; the weight must never exceed the capacity; the vector
// changes in exactly two items when a proposal is accepted and not at all
// otherwise; one proposal is decided per clock once the pipeline is full.
// Phase 1 (exponential table all zero): only value-increasing moves may be
// accepted. Phase 2 (annealing, beta doubled every 3000 clocks): the best
// value found must reach 99% of the optimum computed here by dynamic
// programming, and the best vector must hold that value.
module knap_chain_tb;
  localparam int N = 32, NI = 24, TW = 24;
  logic clk = 0, rst = 1, clear = 0;
  logic we_w = 0, we_v = 0, we_e = 0;
  logic [7:0] waddr = 0;
  logic [15:0] wdata = 0;
  logic [5:0] n_items = NI;
  logic [TW-1:0] capacity = 0;
  logic [15:0] beta = 0;
  logic run = 0;
  logic [N-1:0] x, best_x;
  logic [TW-1:0] tot_w, tot_v, best_w, best_v;
  logic new_best, accepted, evaluated;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  knap_chain #(.N(N), .TW(TW), .SEED(32'h1234)) dut (
    .clk, .rst, .clear, .we_w, .we_v, .we_e, .waddr, .wdata, .n_items, .capacity,
    .beta, .run, .x, .tot_w, .tot_v, .best_x, .best_w, .best_v, .new_best,
    .accepted, .evaluated);

  int W [N], V [N];
  int errs_tot = 0, errs_cap = 0, errs_flip = 0, errs_rate = 0, errs_mono = 0, n_acc = 0;
  bit phase1 = 0;

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

  // per-clock invariants
  logic [N-1:0] x_prev = '0;
  logic [TW-1:0] v_prev;
  bit acc_prev = 0;
  int clr_hold = 0;
  int run_clocks = 0;
  always @(negedge clk) if (!rst) begin
    int sw, sv, nflip;
    sw = 0; sv = 0;
    for (int i = 0; i < N; i++) if (x[i]) begin sw += W[i]; sv += V[i]; end
    if (sw != tot_w || sv != tot_v) errs_tot++;
    if (tot_w > capacity) errs_cap++;
    nflip = $countones(x ^ x_prev);
    if (clr_hold == 0 && (acc_prev ? (nflip != 2) : (nflip != 0))) errs_flip++;
    if (phase1 && acc_prev && tot_v <= v_prev) errs_mono++;
    if (run) begin
      run_clocks++;
      if (run_clocks > 2 && !evaluated) errs_rate++;
    end else run_clocks = 0;
    if (accepted) n_acc++;
    x_prev = x; v_prev = tot_v; acc_prev = accepted;
    if (clear) clr_hold = 2; else if (clr_hold > 0) clr_hold--;
  end

  task automatic load(input bit is_e, input bit is_w, input int a, input int d);
    @(negedge clk);
    waddr = 8'(a); wdata = 16'(d); we_e = is_e; we_w = is_w && !is_e; we_v = !is_w && !is_e;
    @(negedge clk);
    we_e = 0; we_w = 0; we_v = 0;
  endtask

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
    int sumw, opt, bv;
    void'($urandom(7));
    sumw = 0;
    for (int i = 0; i < N; i++) begin
      W[i] = (i < NI) ? $urandom_range(0, 1000) : 0;
      V[i] = (i < NI) ? $urandom_range(0, 1000) : 0;
      sumw += W[i];
    end
    capacity = sumw / 2;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < N; i++) begin load(0, 1, i, W[i]); load(0, 0, i, V[i]); end
    for (int i = 0; i < 256; i++) load(1, 0, i, 0);
    // phase 1: greedy
    phase1 = 1;
    beta = 16'd16;
    @(negedge clk); run = 1;
    repeat (2000) @(negedge clk);
    run = 0;
    @(negedge clk); phase1 = 0;
    check(n_acc > 0, "phase 1 accepted moves");
    check(errs_mono == 0, $sformatf("phase 1 non-improving accepts %0d", errs_mono));
    // phase 2: Metropolis with annealing
    for (int i = 0; i < 256; i++) load(1, 0, i, int'(65535.0 * $exp(-i / 16.0)));
    clear = 1; @(negedge clk); clear = 0;
    n_acc = 0;
    beta = 16'd4;
    run = 1;
    for (int k = 0; k < 10; k++) begin
      repeat (3000) @(negedge clk);
      beta = beta << 1;
    end
    run = 0;
    repeat (3) @(negedge clk);
    opt = knap_opt(capacity);
    bv = 0;
    for (int i = 0; i < N; i++) if (best_x[i]) bv += V[i];
    $display("best %0d (weight %0d of %0d), optimum %0d, accepted %0d", best_v, best_w, capacity, opt, n_acc);
    check(best_v * 100 >= opt * 99, "best within 1% of optimum");
    check(best_v <= opt, "best not above optimum");
    check(bv == best_v, "best vector holds best value");
    check(best_w <= capacity, "best weight within capacity");
    check(errs_tot == 0, $sformatf("total mismatches %0d", errs_tot));
    check(errs_cap == 0, $sformatf("capacity violations %0d", errs_cap));
    check(errs_flip == 0, $sformatf("flip count errors %0d", errs_flip));
    check(errs_rate == 0, $sformatf("clocks without a decided proposal %0d", errs_rate));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
