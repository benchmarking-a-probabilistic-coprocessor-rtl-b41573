// boot_kernel: one bootstrap-resampling unit (RNG + kernel of the paper's
// bootstrap figure).
//
// The dataset is held in two look-up tables, group A and group B (for the
// paper's birth-weight study: babies of non-smoking and of smoking mothers),
// with DW = 16-bit entries as printed in the figure. Every clock each group
// draws one entry with replacement: an RW-bit LFSR word r is scaled to an
// index (r * n) >> RW in [0, n). The drawn values are added into a mean
// register (the accumulator). After P = max(n_a, n_b) clocks group A has
// drawn n_a and group B n_b values, one complete bootstrap sample each; the
// two sums are scaled to means with host-supplied reciprocals
// (recip = round(2^24 / n)), subtracted, and the difference is turned into a
// histogram bin index, delivered as a 64-bit one-hot vector ("To Histogram",
// 64 wires to the data collector in the figure).
//
// Number formats: means and their difference are fixed point with 8
// fraction bits (Q.8). bin = ((diff - bin_pos) * bin_scale) >> 16, clamped
// to 0..BINS-1, so bin width = 2^16 / bin_scale in Q.8 units; bin position
// and width are run-time inputs as in the paper.
// Timing: the draw pipeline is index (1 clock), table read (1 clock),
// accumulate; the bin pipeline after the last accumulate is mean (1),
// difference (1), bin (1). A new sample starts right after the previous one,
// so one result per P clocks; hist_valid pulses for one clock.
// Reading the tables by index scaling, the reciprocal-multiply mean and the
// clamping of out-of-range differences to the edge bins are this design's
// choices; the paper gives only the block structure.
module boot_kernel #(
  parameter int          DEPTH = 1024,        // entries per table
  parameter int          DW    = 16,          // value width (paper: 16)
  parameter int          RW    = 16,          // LFSR width
  parameter int          BINS  = 64,          // histogram bins (paper: 64)
  parameter logic [31:0] SEED_A = 32'h1,
  parameter logic [31:0] SEED_B = 32'h2,
  localparam int AW = $clog2(DEPTH),
  localparam int NW = AW + 1
) (
  input  logic               clk,
  input  logic               rst,
  // table load (shared by all units)
  input  logic               lut_we_a,
  input  logic               lut_we_b,
  input  logic [AW-1:0]      lut_addr,
  input  logic [DW-1:0]      lut_data,
  // run-time parameters
  input  logic [NW-1:0]      n_a,
  input  logic [NW-1:0]      n_b,
  input  logic [23:0]        recip_a,
  input  logic [23:0]        recip_b,
  input  logic signed [31:0] bin_pos,      // Q.8
  input  logic [15:0]        bin_scale,
  input  logic               run,          // draw while high
  output logic               hist_valid,
  output logic [BINS-1:0]    hist,          // one-hot bin
  output logic signed [31:0] diff_q8       // difference of means, Q.8 (for test)
);
  localparam int SW = DW + NW;              // sum width
  localparam int BW = $clog2(BINS);

  logic [DW-1:0] lut_a [DEPTH];
  logic [DW-1:0] lut_b [DEPTH];

  always_ff @(posedge clk) begin
    if (lut_we_a) lut_a[lut_addr] <= lut_data;
    if (lut_we_b) lut_b[lut_addr] <= lut_data;
  end

  // ---- N-bit RNG: two LFSRs -------------------------------------------
  logic [RW-1:0] ra, rb;
  lfsr #(.W(RW), .SEED(SEED_A)) u_ra (.clk, .rst, .en(run), .q(ra));
  lfsr #(.W(RW), .SEED(SEED_B)) u_rb (.clk, .rst, .en(run), .q(rb));

  // ---- draw counter ----------------------------------------------------
  logic [NW-1:0] p_len, c;
  assign p_len = (n_a > n_b) ? n_a : n_b;

  // stage 1: index; stage 2: table value; stage 3: accumulate
  logic [AW-1:0] ia, ib;
  logic          s1_va, s1_vb, s1_last;
  logic [DW-1:0] da, db;
  logic          s2_va, s2_vb, s2_last;
  logic [SW-1:0] acc_a, acc_b;
  logic [SW-1:0] sum_a, sum_b;
  logic          sum_v;

  always_ff @(posedge clk) begin
    if (rst) begin
      c       <= '0;
      s1_va   <= 1'b0; s1_vb <= 1'b0; s1_last <= 1'b0;
      s2_va   <= 1'b0; s2_vb <= 1'b0; s2_last <= 1'b0;
      acc_a   <= '0;   acc_b <= '0;
      sum_a   <= '0;   sum_b <= '0;
      sum_v   <= 1'b0;
      ia      <= '0;   ib    <= '0;
      da      <= '0;   db    <= '0;
    end else begin
      // stage 1
      s1_va   <= run && (c < n_a);
      s1_vb   <= run && (c < n_b);
      s1_last <= run && (c == p_len - NW'(1));
      ia      <= AW'((32'(ra) * 32'(n_a)) >> RW);
      ib      <= AW'((32'(rb) * 32'(n_b)) >> RW);
      if (run) c <= (c == p_len - NW'(1)) ? '0 : c + NW'(1);
      // stage 2
      s2_va   <= s1_va;
      s2_vb   <= s1_vb;
      s2_last <= s1_last;
      da      <= lut_a[ia];
      db      <= lut_b[ib];
      // stage 3: mean registers
      sum_v   <= s2_last;
      if (s2_last) begin
        sum_a <= acc_a + (s2_va ? SW'(da) : '0);
        sum_b <= acc_b + (s2_vb ? SW'(db) : '0);
        acc_a <= '0;
        acc_b <= '0;
      end else begin
        if (s2_va) acc_a <= acc_a + SW'(da);
        if (s2_vb) acc_b <= acc_b + SW'(db);
      end
    end
  end

  // ---- means, difference, histogram bin --------------------------------
  logic [SW+23:0]      pa, pb;
  logic signed [31:0]  mean_a, mean_b;   // Q.8
  logic                m_v, d_v;
  logic signed [47:0]  scaled;
  logic [BW-1:0]       bin;

  assign pa = SW'(sum_a) * 24'(recip_a);
  assign pb = SW'(sum_b) * 24'(recip_b);
  assign scaled = (48'(signed'(diff_q8 - bin_pos)) * $signed({1'b0, bin_scale})) >>> 16;

  always_comb begin
    if (scaled < 0)                    bin = '0;
    else if (scaled > 48'(BINS - 1))   bin = BW'(BINS - 1);
    else                               bin = BW'(scaled);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      m_v <= 1'b0; d_v <= 1'b0; hist_valid <= 1'b0;
      mean_a <= '0; mean_b <= '0; diff_q8 <= '0; hist <= '0;
    end else begin
      m_v        <= sum_v;
      mean_a     <= 32'(pa >> 16);
      mean_b     <= 32'(pb >> 16);
      d_v        <= m_v;
      diff_q8    <= mean_a - mean_b;
      hist_valid <= d_v;
      hist       <= d_v ? (BINS'(1) << bin) : '0;
    end
  end
endmodule
