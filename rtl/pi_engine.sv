// pi_engine: N_p parallel pi-sampling units and their data collector.
//
// Each unit is an N-bit RNG (two W-bit LFSRs, x and y) feeding a pi_kernel;
// the paper's emulation uses N_p = 2800 such units with 18-bit coordinates,
// so that every clock 2800 samples are produced (TTS = N_S/(f_clk*N_p)).
// The data collector adds the units' "outside" bits each clock with a
// popcount and keeps two counters, N_all and N_in; pi ~ 4*N_in/N_all.
//
// Operation: a write of 1 to offset 0 (target TGT_PI) starts a run of
// n_cycles clocks (offset 1). During the run every unit draws one sample per
// clock. When the last sample has left the 3-stage kernel pipeline and the
// popcount register, the engine emits two records, N_in then N_all, raises
// done and returns to idle. A run thus lasts n_cycles + 4 clocks plus the
// record hand-shake. Counters are cleared at start. The register map,
// run-length control and record format are this design's choices.
module pi_engine
  import pc_pkg::*;
#(
  parameter int NP   = 2800,
  parameter int W    = 18,
  parameter int SALT = 1
) (
  input  logic  clk,
  input  logic  rst,
  input  cfg_t  cfg,
  output logic  busy,
  output logic  done,        // one-clock pulse at the end of a run
  output logic [47:0] n_in,
  output logic [47:0] n_all,
  output logic  rec_valid,
  input  logic  rec_ready,
  output rec_t  rec
);
  localparam int CW = $clog2(NP + 1);

  typedef enum logic [1:0] {IDLE, RUN, DRAIN, EMIT} state_e;
  state_e      state;
  logic [31:0] n_cycles, left;
  logic        gen;            // units draw a sample this clock
  logic [NP-1:0] outside, ovalid;
  logic [CW-1:0] cnt_out;
  logic [CW-1:0] cnt_out_q;
  logic          cnt_v;
  logic [2:0]    drain;
  logic          emit_idx;

  wire wr = cfg.we && cfg.target == TGT_PI;

  for (genvar u = 0; u < NP; u++) begin : g_unit
    logic [W-1:0] x, y;
    lfsr #(.W(W), .SEED(lfsr_seed(u, 2*SALT,   W))) u_x (.clk, .rst, .en(gen), .q(x));
    lfsr #(.W(W), .SEED(lfsr_seed(u, 2*SALT+1, W))) u_y (.clk, .rst, .en(gen), .q(y));
    pi_kernel #(.W(W)) u_k (.clk, .rst, .in_valid(gen), .x, .y,
                            .out_valid(ovalid[u]), .out(outside[u]));
  end

  popcount #(.N(NP), .OW(CW)) u_pc (.in(outside), .count(cnt_out));

  assign gen  = (state == RUN);
  assign busy = (state != IDLE);

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) begin
      state    <= IDLE;
      n_cycles <= 32'd0;
      left     <= '0;
      n_in     <= '0;
      n_all    <= '0;
      cnt_v    <= 1'b0;
      cnt_out_q<= '0;
      drain    <= '0;
      emit_idx <= 1'b0;
    end else begin
      if (wr && cfg.offset == 18'd1) n_cycles <= cfg.data;
      // collector: register the popcount, then accumulate
      cnt_v     <= ovalid[0];
      cnt_out_q <= cnt_out;
      if (cnt_v) begin
        n_all <= n_all + 48'(NP);
        n_in  <= n_in + 48'(NP) - 48'(cnt_out_q);
      end
      case (state)
        IDLE: if (wr && cfg.offset == 18'd0 && cfg.data[0] && n_cycles != 0) begin
          state <= RUN;
          left  <= n_cycles;
          n_in  <= '0;
          n_all <= '0;
        end
        RUN: begin
          left <= left - 32'd1;
          if (left == 32'd1) begin state <= DRAIN; drain <= 3'd5; end
        end
        DRAIN: begin
          drain <= drain - 3'd1;
          if (drain == 3'd1) begin state <= EMIT; emit_idx <= 1'b0; end
        end
        EMIT: if (rec_ready) begin
          emit_idx <= 1'b1;
          if (emit_idx) begin state <= IDLE; done <= 1'b1; end
        end
        default: state <= IDLE;
      endcase
    end
  end

  assign rec_valid = (state == EMIT);
  always_comb begin
    rec.tag   = emit_idx ? TAG_PI_NALL : TAG_PI_NIN;
    rec.index = '0;
    rec.value = emit_idx ? n_all : n_in;
  end
endmodule
