// pbit_tb: the emulated p-bit must be always 0 for threshold 0, always 1
// for threshold 2^16, hold its value while en = 0, and be 1 with
// probability close to (thr-1)/(2^16-1) for thresholds of 1/4, 1/2, 3/4.
module pbit_tb;
  logic clk = 0, rst = 1, en = 0;
  logic [16:0] thr = 0;
  logic m;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pbit #(.RW(16), .SEED(32'hACE1)) dut (.clk, .rst, .en, .thr, .m);

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

  task automatic measure(input logic [16:0] t, input int n, output real p);
    int ones;
    ones = 0;
    thr = t;
    en = 1;
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      if (m) ones++;
    end
    p = real'(ones) / n;
  endtask

  initial begin
    real p;
    logic hold;
    repeat (3) @(posedge clk);
    rst = 0;
    measure(17'd0, 1000, p);      check(p == 0.0, $sformatf("thr 0: %f", p));
    measure(17'h10000, 1000, p);  check(p == 1.0, $sformatf("thr 2^16: %f", p));
    measure(17'h4000, 20000, p);  check(p > 0.23 && p < 0.27, $sformatf("thr 1/4: %f", p));
    measure(17'h8000, 20000, p);  check(p > 0.48 && p < 0.52, $sformatf("thr 1/2: %f", p));
    measure(17'hC000, 20000, p);  check(p > 0.73 && p < 0.77, $sformatf("thr 3/4: %f", p));
    en = 0; hold = m;
    thr = 17'h10000 - 17'(hold) * 17'h10000;    // would flip it
    repeat (5) @(negedge clk);
    check(m == hold, "hold while en = 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
