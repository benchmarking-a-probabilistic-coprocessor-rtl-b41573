// pi_kernel_tb: drives random and corner-case points into the pi kernel and
// compares the outside-the-circle bit, three clocks later, with x^2+y^2 > 1
// computed here in 64-bit arithmetic.
module pi_kernel_tb;
  localparam int W = 18;
  logic clk = 0, rst = 1, in_valid = 0;
  logic [W-1:0] x = 0, y = 0;
  logic out_valid, out;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pi_kernel #(.W(W)) dut (.clk, .rst, .in_valid, .x, .y, .out_valid, .out);

  bit          exp_v [$];
  bit          exp_o [$];
  int          cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit ref_out(input logic [W-1:0] a, input logic [W-1:0] b);
    longint unsigned s;
    s = longint'(a) * longint'(a) + longint'(b) * longint'(b);
    return s > (64'd1 << (2 * W));
  endfunction

  // expected outputs, delayed by exactly three clocks
  bit ev [4];
  bit eo [4];
  initial begin
    int n_in, n_out;
    n_in = 0; n_out = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      // compare what left the pipeline with what entered three clocks ago
      if (t >= 3 && ev[2]) begin
        checks++;
        if (!out_valid || out != eo[2]) begin
          failures++;
          $display("FAIL t=%0d out=%0b exp=%0b v=%0b", t, out, eo[2], out_valid);
        end
        if (out) n_out++; else n_in++;
      end else if (t >= 3) begin
        checks++;
        if (out_valid) begin failures++; $display("FAIL spurious valid t=%0d", t); end
      end
      for (int k = 3; k > 0; k--) begin ev[k] = ev[k-1]; eo[k] = eo[k-1]; end
      in_valid = ($urandom_range(0, 9) != 0);
      case (t)
        5: begin x = 0; y = 0; end
        6: begin x = '1; y = '1; end                       // far outside
        7: begin x = 18'd185364; y = 18'd185364; end        // near the circle
        8: begin x = 18'd185368; y = 18'd185368; end        // near the circle
        default: begin x = W'($urandom); y = W'($urandom); end
      endcase
      ev[0] = in_valid;
      eo[0] = ref_out(x, y);
    end
    checks++;
    if (n_in == 0 || n_out == 0) failures++;
    $display("inside=%0d outside=%0d 4*in/all=%f", n_in, n_out, 4.0 * n_in / (n_in + n_out));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
