// result_mux_tb: four sources send numbered records with random gaps; the
// sink takes them with random stalls. Every record must arrive exactly
// once and in order per source, with a time stamp equal to the clock in
// which it was granted and never decreasing; with all four sources busy
// the grants must rotate (no source waits more than four records).
module result_mux_tb;
  import pc_pkg::*;
  localparam int NIN = 4, PER = 200;
  logic clk = 0, rst = 1;
  logic [NIN-1:0] in_valid = 0, in_ready;
  rec_t in_rec [NIN];
  logic out_valid, out_ready = 0;
  trec_t out;
  logic [63:0] now;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  result_mux #(.NIN(NIN)) dut (.clk, .rst, .in_valid, .in_ready, .in_rec,
                               .out_valid, .out_ready, .out, .now);

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

  int sent [NIN], rcvd [NIN], wait_cnt [NIN], max_wait = 0, bad_order = 0, bad_ts = 0;
  longint grant_ts [NIN][$];
  longint last_ts = 0;
  bit dense = 0;

  // sources
  always @(negedge clk) if (!rst) begin
    for (int s = 0; s < NIN; s++) begin
      if (in_valid[s] && in_ready_q[s]) begin sent[s]++; in_valid[s] = 0; end
      if (!in_valid[s] && sent[s] < PER && (dense || $urandom_range(0, 2) == 0)) begin
        in_valid[s] = 1;
        in_rec[s] = '{tag: TAG_BOOT_BIN, index: 12'(s), value: 48'(sent[s])};
      end
    end
    out_ready = dense ? 1'b1 : ($urandom_range(0, 3) != 0);
  end
  // sample handshakes at the clock edge
  logic [NIN-1:0] in_ready_q;
  always @(posedge clk) begin
    in_ready_q <= in_valid & in_ready;
    for (int s = 0; s < NIN; s++) begin
      if (in_valid[s] && in_ready[s]) begin grant_ts[s].push_back(now); wait_cnt[s] = 0; end
      else if (in_valid[s] && dense) begin
        wait_cnt[s]++;
        if (wait_cnt[s] > max_wait) max_wait = wait_cnt[s];
      end
    end
    if (out_valid && out_ready && !rst) begin
      int s;
      longint exp_ts;
      s = int'(out.rec.index);
      exp_ts = grant_ts[s].pop_front();
      if (out.rec.value != 48'(rcvd[s])) bad_order++;
      if (out.ts != 64'(exp_ts) || out.ts < 64'(last_ts)) bad_ts++;
      last_ts = out.ts;
      rcvd[s]++;
    end
  end

  initial begin
    for (int s = 0; s < NIN; s++) begin sent[s] = 0; rcvd[s] = 0; wait_cnt[s] = 0; end
    in_ready_q = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    dense = 1;                      // all sources busy, sink always ready
    repeat (150) @(negedge clk);
    dense = 0;                      // random traffic and stalls
    repeat (4000) @(negedge clk);
    for (int s = 0; s < NIN; s++) begin
      check(rcvd[s] == PER, $sformatf("source %0d: %0d of %0d", s, rcvd[s], PER));
    end
    check(bad_order == 0, $sformatf("order errors %0d", bad_order));
    check(bad_ts == 0, $sformatf("time stamp errors %0d", bad_ts));
    check(max_wait > 0 && max_wait <= NIN, $sformatf("max wait %0d", max_wait));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
