// Body of the end-to-end testbench of pcomputer_top, kept in an include
// file so that a testbench for another size needs only a different top
// instance (pcomputer_top_small_tb includes it). The including module declares PI_NP, BOOT_NP, KNAP_NCH and
// instantiates the top as `dut` on the signals declared here.
//
// Flow: the host model programs, over AXI-Lite, a 4 KiB DDR ring, the
// bootstrap tables (constant groups A = 100, B = 40), the Bayesian
// inheritance network, a 64-item knapsack, and the pi run; it starts all
// four engines back to back so that they run and report at the same time,
// waits for all done bits and for the record count, and checks the records
// captured from the AXI4 write port: pi estimate and N_all = N_p * clocks,
// all bootstrap samples in the bin of a difference of 60, Bayesian totals
// and parent-child correlation, knapsack best vectors re-evaluated against
// the tables, time stamps in order. Mechanisms that must each occur at
// least once: concurrent records from several engines (arbitration), DDR
// back-pressure, ring wrap-around, annealing steps, knapsack improvement
// records, done status read over AXI-Lite.

  logic clk = 0, rst = 1;
  logic [23:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic [31:0] wdata = 0, rdata;
  logic [3:0]  wstrb = 4'hF;
  logic awready, wready, bvalid, arready, rvalid;
  logic [1:0] bresp, rresp;
  logic [63:0] m_awaddr, m_wdata;
  logic [7:0] m_awlen, m_wstrb;
  logic [2:0] m_awsize;
  logic [1:0] m_awburst, m_bresp;
  logic m_awvalid, m_awready, m_wlast, m_wvalid, m_wready, m_bvalid, m_bready;
  logic [3:0] busy;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  axi_mem_model #(.READY_PCT(50)) mem (
    .clk, .rst, .awaddr(m_awaddr), .awlen(m_awlen), .awsize(m_awsize), .awburst(m_awburst),
    .awvalid(m_awvalid), .awready(m_awready), .wdata(m_wdata), .wstrb(m_wstrb),
    .wlast(m_wlast), .wvalid(m_wvalid), .wready(m_wready), .bresp(m_bresp),
    .bvalid(m_bvalid), .bready(m_bready));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- record capture from the AXI4 write port ---------------------------
  localparam longint RING = 64'h1000_0000, RSIZE = 4096;
  pc_pkg::trec_t recs [$];
  logic [63:0] beat0;
  int wraps = 0, ddr_stalls = 0, contention = 0, anneal_steps = 0;
  logic [63:0] last_aw = 0;
  logic [15:0] last_beta = 0;
  always @(posedge clk) if (!rst) begin
    if (m_wvalid && m_wready) begin
      if (!m_wlast) beat0 = m_wdata;
      else recs.push_back('{ts: beat0, rec: pc_pkg::rec_t'(m_wdata)});
    end
    if (m_awvalid && m_awready) begin
      if (m_awaddr < last_aw) wraps++;
      last_aw = m_awaddr;
    end
    if (dut.tr_valid && !dut.tr_ready) ddr_stalls++;
    if ($countones(dut.rv) > 1) contention++;
    if (dut.u_knap.beta != last_beta) begin
      if (dut.u_knap.state == 3'd1 && last_beta != 0) anneal_steps++;
      last_beta = dut.u_knap.beta;
    end
  end

  // ---- AXI-Lite host model ----------------------------------------------
  task automatic write(input logic [23:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; awvalid = 1; wdata = d; wvalid = 1;
    do @(posedge clk); while (!awready);
    #1 awvalid = 0; wvalid = 0; bready = 1;
    do @(posedge clk); while (!bvalid);
    #1 bready = 0;
  endtask

  task automatic read(input logic [23:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1;
    do @(posedge clk); while (!arready);
    #1 arvalid = 0; rready = 1;
    do @(posedge clk); while (!rvalid);
    d = rdata;
    #1 rready = 0;
  endtask

  function automatic logic [23:0] A(input logic [3:0] tgt, input int off);
    return {tgt, 20'(off * 4)};
  endfunction

  localparam int PI_CYC = 100, BOOT_ROUNDS = 2, BAYES_CYC = 2000, KNAP_CYC = 5000, NI = 64;
  int W [NI], V [NI];

  initial begin
    logic [31:0] d;
    int cap, sumw, n_done_reads, t0;
    longint pi_in, pi_all, boot_tot, boot_bin40, bay_total, bay_pos0, bay_pos64, bay_agr64, bay_agr0;
    int kbest_v [16], kbest_w [16], nimp;
    logic [63:0] kx [16];
    bit ts_ok;
    real c64;
    repeat (4) @(posedge clk);
    rst = 0;
    // DDR ring
    write(A(4'hF, 0), 32'(RING)); write(A(4'hF, 1), 0); write(A(4'hF, 2), 32'(RSIZE));
    read(A(4'hF, 8), d); check(d == 32'h5043_0001, "identification register");
    // bootstrap: 8 entries per group
    for (int i = 0; i < 8; i++) begin
      write(A(4'h1, 32'h10000 + i), 100);
      write(A(4'h1, 32'h20000 + i), 40);
    end
    write(A(4'h1, 1), BOOT_ROUNDS); write(A(4'h1, 2), 8); write(A(4'h1, 3), 8);
    write(A(4'h1, 4), 2097152); write(A(4'h1, 5), 2097152);
    write(A(4'h1, 6), 0); write(A(4'h1, 7), 171);   // bins of about 1.5 from 0
    // Bayesian network: inheritance model, reference node 0
    for (int i = 0; i < 64; i++)
      write(A(4'h2, 32'h100 + i), (i == 32) ? 32'h8000 : (i == 34) ? 32'h10000 : 0);
    for (int g = 0; g < 127; g++) begin
      write(A(4'h2, 32'h1000 + 4 * g), 0);
      write(A(4'h2, 32'h1000 + 4 * g + 1), (g < 64) ? 0 : 1);
      write(A(4'h2, 32'h1000 + 4 * g + 2), (g < 64) ? 0 : 1);
    end
    write(A(4'h2, 1), BAYES_CYC); write(A(4'h2, 2), 0);
    // knapsack: 64 items
    void'($urandom(5));
    sumw = 0;
    for (int i = 0; i < NI; i++) begin
      W[i] = $urandom_range(0, 1000); V[i] = $urandom_range(0, 1000); sumw += W[i];
      write(A(4'h3, 32'h10000 + i), W[i]);
      write(A(4'h3, 32'h20000 + i), V[i]);
    end
    cap = sumw / 2;
    for (int i = 0; i < 256; i++) write(A(4'h3, 32'h100 + i), int'(65535.0 * $exp(-i / 16.0)));
    write(A(4'h3, 1), KNAP_CYC); write(A(4'h3, 2), NI); write(A(4'h3, 3), cap);
    write(A(4'h3, 4), 4); write(A(4'h3, 5), KNAP_CYC / 10);
    // pi
    write(A(4'h0, 1), PI_CYC);
    // start all four
    t0 = $time / 10;
    write(A(4'h3, 0), 1);
    write(A(4'h2, 0), 1);
    write(A(4'h1, 0), 1);
    write(A(4'h0, 0), 1);
    n_done_reads = 0;
    do begin
      repeat (50) @(negedge clk);
      read(A(4'hF, 9), d);
      n_done_reads++;
    end while (d[3:0] != 4'hF);
    $display("all engines done after %0d clocks", $time / 10 - t0);
    check(d[7:4] == 4'h0, "no engine busy");
    do begin
      read(A(4'hF, 10), d);
    end while (d != 32'(recs.size()) || dut.tr_valid || dut.rv != 0);
    $display("%0d records, wraps %0d, ddr stalls %0d, contention %0d, anneal steps %0d",
             recs.size(), wraps, ddr_stalls, contention, anneal_steps);
    // decode
    boot_tot = 0; boot_bin40 = 0; nimp = 0; ts_ok = 1;
    for (int c = 0; c < 16; c++) begin kx[c] = 0; kbest_v[c] = -1; end
    foreach (recs[k]) begin
      pc_pkg::rec_t r;
      r = recs[k].rec;
      if (k > 0 && recs[k].ts < recs[k-1].ts) ts_ok = 0;
      case (r.tag)
        pc_pkg::TAG_PI_NIN:       pi_in = r.value;
        pc_pkg::TAG_PI_NALL:      pi_all = r.value;
        pc_pkg::TAG_BOOT_BIN:     begin boot_tot += r.value; if (r.index == 40) boot_bin40 = r.value; end
        pc_pkg::TAG_BAYES_TOTAL:  bay_total = r.value;
        pc_pkg::TAG_BAYES_POS:    begin if (r.index == 0) bay_pos0 = r.value; if (r.index == 64) bay_pos64 = r.value; end
        pc_pkg::TAG_BAYES_AGREE:  begin if (r.index == 0) bay_agr0 = r.value; if (r.index == 64) bay_agr64 = r.value; end
        pc_pkg::TAG_KNAP_IMPROVE: nimp++;
        pc_pkg::TAG_KNAP_BEST:    begin kbest_v[r.index] = int'(r.value[23:0]); kbest_w[r.index] = int'(r.value[47:24]); end
        pc_pkg::TAG_KNAP_STATE:   kx[r.index[11:8]][32 * r.index[0] +: 32] = r.value[31:0];
        default: check(0, "unknown record tag");
      endcase
    end
    check(ts_ok, "time stamps in order");
    check(pi_all == longint'(PI_NP) * PI_CYC, $sformatf("pi N_all %0d", pi_all));
    check(4.0 * pi_in / pi_all > 3.05 && 4.0 * pi_in / pi_all < 3.25,
          $sformatf("pi estimate %f", 4.0 * pi_in / pi_all));
    $display("pi = %f from %0d samples", 4.0 * pi_in / pi_all, pi_all);
    check(boot_tot == longint'(BOOT_NP) * BOOT_ROUNDS && boot_bin40 == boot_tot,
          $sformatf("bootstrap histogram %0d in bin 40 of %0d", boot_bin40, boot_tot));
    check(bay_total == 10 * BAYES_CYC && bay_agr0 == bay_total, "Bayesian totals");
    c64 = (2.0 * bay_agr64 - bay_total) / bay_total
        - ((2.0 * bay_pos64 - bay_total) / bay_total) * ((2.0 * bay_pos0 - bay_total) / bay_total);
    check(c64 > 0.4 && c64 < 0.6, $sformatf("parent-child correlation %f", c64));
    for (int c = 0; c < KNAP_NCH; c++) begin
      int sv, sw;
      sv = 0; sw = 0;
      for (int i = 0; i < NI; i++) if (kx[c][i]) begin sv += V[i]; sw += W[i]; end
      check(kbest_v[c] > 0 && sv == kbest_v[c] && sw == kbest_w[c] && sw <= cap,
            $sformatf("knapsack chain %0d: %0d/%0d vs vector %0d/%0d cap %0d", c, kbest_v[c], kbest_w[c], sv, sw, cap));
    end
    // mechanisms
    check(contention > 0, "records from several engines at once");
    check(ddr_stalls > 0, "DDR back-pressure");
    check(wraps > 0, "DDR ring wrap-around");
    check(anneal_steps >= 9, $sformatf("annealing steps %0d", anneal_steps));
    check(nimp > 0, "knapsack improvement records");
    check(n_done_reads > 0, "status polled");
    check(mem.errors == 0, "AXI protocol");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
