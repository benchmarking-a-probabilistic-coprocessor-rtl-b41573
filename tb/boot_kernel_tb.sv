// boot_kernel_tb: bootstrap unit with 16-entry tables.
// Test 1: constant tables (A = 100, B = 40) make every bootstrap sample's
// difference of means 60; the Q.8 result, the one-hot bin for several bin
// positions (including both clamped edges) and the result period of
// max(n_a, n_b) clocks are checked. Test 2: tables with values 0..15 and
// n_a = n_b = 16: every difference must lie in [-15, 15] and their average
// must be near 0 (both groups hold the same data).
module boot_kernel_tb;
  localparam int DEPTH = 16, AW = 4, BINS = 64;
  logic clk = 0, rst = 1;
  logic we_a = 0, we_b = 0;
  logic [AW-1:0] addr = 0;
  logic [15:0] data = 0;
  logic [AW:0] n_a = 0, n_b = 0;
  logic [23:0] recip_a = 0, recip_b = 0;
  logic signed [31:0] bin_pos = 0;
  logic [15:0] bin_scale = 0;
  logic run = 0;
  logic hv;
  logic [BINS-1:0] hist;
  logic signed [31:0] diff;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  boot_kernel #(.DEPTH(DEPTH), .BINS(BINS)) dut (
    .clk, .rst, .lut_we_a(we_a), .lut_we_b(we_b), .lut_addr(addr), .lut_data(data),
    .n_a, .n_b, .recip_a, .recip_b, .bin_pos, .bin_scale, .run,
    .hist_valid(hv), .hist, .diff_q8(diff));

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

  function automatic logic [23:0] recip(input int n);
    return 24'((64'd1 << 24) / n + ((((64'd1 << 24) % n) * 2 >= n) ? 1 : 0));
  endfunction

  task automatic load(input int va [DEPTH], input int vb [DEPTH]);
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      addr = AW'(i); data = 16'(va[i]); we_a = 1; we_b = 0;
      @(negedge clk);
      data = 16'(vb[i]); we_a = 0; we_b = 1;
    end
    @(negedge clk); we_b = 0;
  endtask

  // expected bin for a Q.8 difference
  function automatic int ref_bin(input int d, input int pos, input int scale);
    longint s;
    s = (longint'(d - pos) * scale) >>> 16;
    if (s < 0) return 0;
    if (s > BINS - 1) return BINS - 1;
    return int'(s);
  endfunction

  initial begin
    int va [DEPTH], vb [DEPTH];
    int last_t, n_res, pos, expb;
    longint sum;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < DEPTH; i++) begin va[i] = 100; vb[i] = 40; end
    load(va, vb);
    n_a = 5; n_b = 3; recip_a = recip(5); recip_b = recip(3);
    bin_scale = 16'd256;            // bin width 256 Q.8 = 1.0
    for (int k = 0; k < 4; k++) begin
      pos = (k == 0) ? 0 : (k == 1) ? 30 * 256 : (k == 2) ? 100 * 256 : -100 * 256;
      bin_pos = pos;
      expb = ref_bin(60 * 256, pos, 256);
      rst = 1; @(negedge clk); rst = 0;
      run = 1;
      n_res = 0; last_t = 0;
      while (n_res < 4) begin
        @(negedge clk);
        if (hv) begin
          check(diff >= 60 * 256 - 2 && diff <= 60 * 256 + 2, $sformatf("diff %0d", diff));
          check(hist == (BINS'(1) << expb), $sformatf("bin pos=%0d hist=%h exp=%0d", pos, hist, expb));
          if (n_res > 0) check(($time / 10) - last_t == 5, $sformatf("period %0d", ($time / 10) - last_t));
          last_t = $time / 10;
          n_res++;
        end else check(hist == '0, "hist idle");
      end
      run = 0;
    end
    // test 2: identical groups of 0..15
    for (int i = 0; i < DEPTH; i++) begin va[i] = i; vb[i] = i; end
    load(va, vb);
    n_a = 16; n_b = 16; recip_a = recip(16); recip_b = recip(16);
    bin_pos = -32 * 256; bin_scale = 16'd256;
    rst = 1; @(negedge clk); rst = 0;
    run = 1; n_res = 0; sum = 0;
    while (n_res < 300) begin
      @(negedge clk);
      if (hv) begin
        check(diff >= -15 * 256 && diff <= 15 * 256, $sformatf("diff range %0d", diff));
        check(hist == (BINS'(1) << ref_bin(diff, -32 * 256, 256)), "bin of random diff");
        sum += diff; n_res++;
      end
    end
    check(sum / 300 > -256 && sum / 300 < 256, $sformatf("mean diff %0d", sum / 300));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
