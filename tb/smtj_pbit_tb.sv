// smtj_pbit_tb: sweeps V_IN over -2*V0..2*V0 and compares the time average
// of V_OUT (4000 samples, one per fluctuation time) with VDD/2*tanh(V_IN/V0);
// the output must only take the two values +-VDD/2.
module smtj_pbit_tb;
  timeunit 1ns;
  timeprecision 1ps;
  localparam real VDD = 0.8, V0 = 0.05;
  real vin = 0.0, vref = 0.0, vout;
  int checks = 0, failures = 0;

  smtj_pbit #(.VDD(VDD), .V0(V0), .TAU_NS(1.0), .SEED(12345)) dut (
    .V_IN(vin), .V_REF(vref), .V_OUT(vout));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #200_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real sum, expv;
    int bad;
    for (int k = -4; k <= 4; k++) begin
      vin = k * V0 / 2.0;
      #0.5;
      sum = 0.0; bad = 0;
      for (int s = 0; s < 4000; s++) begin
        #1.0;
        sum += vout;
        if (vout != VDD / 2.0 && vout != -VDD / 2.0) bad++;
      end
      expv = VDD / 2.0 * $tanh(vin / V0);
      $display("V_IN=%7.4f  <V_OUT>=%7.4f  expected %7.4f", vin, sum / 4000.0, expv);
      check(bad == 0, "bipolar output");
      check((sum / 4000.0 - expv) < 0.03 && (expv - sum / 4000.0) < 0.03, "tanh law");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
