// boot_engine: N_p bootstrap units and the 64-bin histogram data collector.
//
// The paper's emulation runs N_p = 1500 boot_kernel units in parallel, each
// computing the means of its groups serially (one draw per group per clock).
// All units get the same tables and parameters and run in lock-step with
// differently seeded LFSRs, so every P = max(n_a, n_b) clocks all of them
// deliver one one-hot histogram vector at once. The collector adds, per
// bin, the number of units that hit it (a popcount over the units) into a
// 48-bit bin counter. At the end of a run the 64 bin counts are emitted as
// records (tag TAG_BOOT_BIN, index = bin), matching the paper's "64 values
// for 64 bins are read out".
//
// Register map (target TGT_BOOT, word offsets): 0 start (bit 0), 1 rounds
// per unit, 2 n_a, 3 n_b, 4 recip_a, 5 recip_b, 6 bin_pos (Q.8, signed),
// 7 bin_scale; 0x10000+i table A entry i, 0x20000+i table B entry i.
// A start clears the bin counters and restarts all units from their seeds.
// Total samples of a run = N_p * rounds. The register map, the lock-step
// organisation and the clearing policy are this design's choices.
module boot_engine
  import pc_pkg::*;
#(
  parameter int NP    = 1500,
  parameter int DEPTH = 1024,
  parameter int BINS  = 64,
  parameter int SALT  = 3,
  localparam int AW = $clog2(DEPTH),
  localparam int NW = AW + 1
) (
  input  logic clk,
  input  logic rst,
  input  cfg_t cfg,
  output logic busy,
  output logic done,
  output logic rec_valid,
  input  logic rec_ready,
  output rec_t rec
);
  localparam int CW = $clog2(NP + 1);
  localparam int BW = $clog2(BINS);

  typedef enum logic [1:0] {IDLE, RUN, EMIT} state_e;
  state_e state;

  logic [31:0]        rounds, got;
  logic [NW-1:0]      n_a, n_b;
  logic [23:0]        recip_a, recip_b;
  logic signed [31:0] bin_pos;
  logic [15:0]        bin_scale;
  logic [47:0]        bin_cnt [BINS];
  logic [BW-1:0]      emit_bin;
  logic               start, urst;

  wire wr = cfg.we && cfg.target == TGT_BOOT;
  assign start = wr && cfg.offset == 18'd0 && cfg.data[0] && state == IDLE;
  assign urst  = rst || start;

  logic [NP-1:0]   hv;
  logic [BINS-1:0] hist [NP];
  logic [NP-1:0]   hist_t [BINS];
  logic [CW-1:0]   hcnt [BINS];

  wire lut_we_a = wr && cfg.offset[17:16] == 2'd1;
  wire lut_we_b = wr && cfg.offset[17:16] == 2'd2;

  for (genvar u = 0; u < NP; u++) begin : g_unit
    logic signed [31:0] d_unused;
    boot_kernel #(
      .DEPTH(DEPTH), .BINS(BINS),
      .SEED_A(lfsr_seed(u, 2*SALT, 16)), .SEED_B(lfsr_seed(u, 2*SALT+1, 16))
    ) u_k (
      .clk, .rst(urst),
      .lut_we_a, .lut_we_b, .lut_addr(AW'(cfg.offset)), .lut_data(cfg.data[15:0]),
      .n_a, .n_b, .recip_a, .recip_b, .bin_pos, .bin_scale,
      .run(state == RUN),
      .hist_valid(hv[u]), .hist(hist[u]), .diff_q8(d_unused)
    );
    for (genvar b = 0; b < BINS; b++) begin : g_t
      assign hist_t[b][u] = hist[u][b];
    end
  end

  for (genvar b = 0; b < BINS; b++) begin : g_bin
    popcount #(.N(NP), .OW(CW)) u_pc (.in(hist_t[b]), .count(hcnt[b]));
  end

  assign busy = (state != IDLE);

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) begin
      state     <= IDLE;
      rounds    <= 32'd1;
      got       <= '0;
      n_a       <= NW'(1);
      n_b       <= NW'(1);
      recip_a   <= 24'h80_0000;
      recip_b   <= 24'h80_0000;
      bin_pos   <= '0;
      bin_scale <= 16'd1;
      emit_bin  <= '0;
      for (int b = 0; b < BINS; b++) bin_cnt[b] <= '0;
    end else begin
      if (wr && state == IDLE) begin
        case (cfg.offset)
          18'd1: rounds    <= cfg.data;
          18'd2: n_a       <= NW'(cfg.data);
          18'd3: n_b       <= NW'(cfg.data);
          18'd4: recip_a   <= cfg.data[23:0];
          18'd5: recip_b   <= cfg.data[23:0];
          18'd6: bin_pos   <= cfg.data;
          18'd7: bin_scale <= cfg.data[15:0];
          default: ;
        endcase
      end
      case (state)
        IDLE: if (start && rounds != 0) begin
          state <= RUN;
          got   <= '0;
          for (int b = 0; b < BINS; b++) bin_cnt[b] <= '0;
        end
        RUN: if (hv[0]) begin
          for (int b = 0; b < BINS; b++) bin_cnt[b] <= bin_cnt[b] + 48'(hcnt[b]);
          got <= got + 32'd1;
          if (got + 32'd1 == rounds) begin state <= EMIT; emit_bin <= '0; end
        end
        EMIT: if (rec_ready) begin
          emit_bin <= emit_bin + BW'(1);
          if (emit_bin == BW'(BINS - 1)) begin state <= IDLE; done <= 1'b1; end
        end
        default: state <= IDLE;
      endcase
    end
  end

  assign rec_valid = (state == EMIT);
  always_comb begin
    rec.tag   = TAG_BOOT_BIN;
    rec.index = 12'(emit_bin);
    rec.value = bin_cnt[emit_bin];
  end
endmodule
