// lfsr_tb: checks the LFSR's reset value, hold on en = 0 and that the
// 8-, 12- and 18-bit versions are maximal length (period 2^W - 1 with no
// earlier repeat of the seed and never zero).
module lfsr_tb;
  logic clk = 0, rst = 1, en = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic [7:0]  q8;
  logic [11:0] q12;
  logic [17:0] q18;
  lfsr #(.W(8),  .SEED(32'h5A))    u8  (.clk, .rst, .en, .q(q8));
  lfsr #(.W(12), .SEED(32'h123))   u12 (.clk, .rst, .en, .q(q12));
  lfsr #(.W(18), .SEED(32'h0))     u18 (.clk, .rst, .en, .q(q18));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #2_000_000_0;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p8, p12, p18;
    bit z8, z12, z18;
    repeat (2) @(posedge clk);
    rst = 0;
    @(negedge clk);
    check(q8 == 8'h5A,  "8-bit seed");
    check(q12 == 12'h123, "12-bit seed");
    check(q18 == 18'h1, "zero seed replaced by 1");
    repeat (3) @(negedge clk);
    check(q8 == 8'h5A, "hold while en=0");
    en = 1;
    p8 = 0; p12 = 0; p18 = 0; z8 = 0; z12 = 0; z18 = 0;
    for (int t = 1; t <= 262143; t++) begin
      @(negedge clk);
      if (q8 == 0) z8 = 1;
      if (q12 == 0) z12 = 1;
      if (q18 == 0) z18 = 1;
      if (p8 == 0 && q8 == 8'h5A) p8 = t;
      if (p12 == 0 && q12 == 12'h123) p12 = t;
      if (p18 == 0 && q18 == 18'h1) p18 = t;
    end
    check(p8 == 255,     $sformatf("8-bit period %0d", p8));
    check(p12 == 4095,   $sformatf("12-bit period %0d", p12));
    check(p18 == 262143, $sformatf("18-bit period %0d", p18));
    check(!z8 && !z12 && !z18, "never zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
