// knap_engine: parallel Markov chains for the 0-1 knapsack problem with a
// simulated-annealing schedule and a best-solution data collector.
//
// NCH = 10 knap_chain instances run side by side, as in the paper's
// emulation, sharing the item tables' contents (each chain keeps its own
// copy so that it can read two items per clock) and differing only in
// their LFSR seeds. A run lasts n_cycles clocks (one proposal per chain
// per clock, so N_S = n_cycles). The annealing schedule of the paper halves
// the temperature every N_S/10 samples: here the inverse temperature beta
// starts at beta0 and doubles (saturating at 0xFFFF) every anneal_period
// clocks; the host sets anneal_period = n_cycles/10.
//
// Records: while running, a chain that improves its best value sets a
// pending flag; pending chains are reported round-robin as
// TAG_KNAP_IMPROVE records (index = chain, value = its best value at the
// time of the record, which the result multiplexer time-stamps). After the
// run, each chain reports TAG_KNAP_BEST (value = {best weight, best value})
// followed by its best item vector in ceil(n_items/32) TAG_KNAP_STATE
// records (index = {chain, word}), which is the N-bit output of the figure.
// Register map (target TGT_KNAP, word offsets): 0 start (bit 0; clears the
// chains), 1 n_cycles, 2 n_items, 3 capacity, 4 beta0, 5 anneal_period,
// 0x100+i exponential table entry i, 0x10000+i weight i, 0x20000+i value i.
// The register map, the beta doubling and the record format are this
// design's choices.
module knap_engine
  import pc_pkg::*;
#(
  parameter int NCH  = 10,
  parameter int N    = 8192,
  parameter int SALT = 7,
  localparam int IW  = $clog2(N)
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
  localparam int CHW = (NCH > 1) ? $clog2(NCH) : 1;
  localparam int WDW = IW - 5;                 // state word index width (32 items per word)
  localparam int TW  = 24;

  typedef enum logic [2:0] {IDLE, RUN, DRAIN, EMIT_BEST, EMIT_STATE} state_e;
  state_e state;

  logic [31:0]   n_cycles, left, anneal_period, acnt;
  logic [IW:0]   n_items;
  logic [TW-1:0] capacity;
  logic [15:0]   beta0, beta;
  logic [1:0]    drain;
  logic [CHW-1:0] ch;
  logic [WDW:0]  word;
  logic [NCH-1:0] pending;
  logic [CHW-1:0] rr;
  logic          start;

  wire wr = cfg.we && cfg.target == TGT_KNAP;
  assign start = wr && cfg.offset == 18'd0 && cfg.data[0] && state == IDLE;
  wire we_e = wr && cfg.offset[17:8] == 10'h001;
  wire we_w = wr && cfg.offset[17:16] == 2'd1;
  wire we_v = wr && cfg.offset[17:16] == 2'd2;

  logic [N-1:0]  best_x [NCH];
  logic [TW-1:0] best_w [NCH];
  logic [TW-1:0] best_v [NCH];
  logic [NCH-1:0] new_best;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    logic [N-1:0]  x_u;
    logic [TW-1:0] tw_u, tv_u;
    logic          acc_u, ev_u;
    knap_chain #(.N(N), .TW(TW), .SEED(lfsr_seed(c, SALT, 16))) u_c (
      .clk, .rst, .clear(start),
      .we_w, .we_v, .we_e, .waddr(((IW > 8) ? IW : 8)'(cfg.offset)), .wdata(cfg.data[15:0]),
      .n_items, .capacity, .beta, .run(state == RUN),
      .x(x_u), .tot_w(tw_u), .tot_v(tv_u),
      .best_x(best_x[c]), .best_w(best_w[c]), .best_v(best_v[c]),
      .new_best(new_best[c]), .accepted(acc_u), .evaluated(ev_u));
  end

  // next pending chain at or after rr (round-robin)
  logic           have_pend;
  logic [CHW-1:0] pick;
  always_comb begin
    have_pend = 1'b0;
    pick      = rr;
    for (int k = NCH - 1; k >= 0; k--) begin
      int idx;
      idx = (int'(rr) + k) % NCH;
      if (pending[idx]) begin have_pend = 1'b1; pick = CHW'(idx); end
    end
  end

  wire [WDW:0] n_words = (WDW+1)'((32'(n_items) + 32'd31) >> 5);

  assign busy = (state != IDLE);

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) begin
      state         <= IDLE;
      n_cycles      <= 32'd1;
      left          <= '0;
      anneal_period <= 32'hFFFF_FFFF;
      acnt          <= '0;
      n_items       <= (IW+1)'(N);
      capacity      <= '0;
      beta0         <= 16'd1;
      beta          <= 16'd1;
      drain         <= '0;
      ch            <= '0;
      word          <= '0;
      pending       <= '0;
      rr            <= '0;
    end else begin
      if (wr && state == IDLE) begin
        case (cfg.offset)
          18'd1: n_cycles      <= cfg.data;
          18'd2: n_items       <= (IW+1)'(cfg.data);
          18'd3: capacity      <= TW'(cfg.data);
          18'd4: beta0         <= cfg.data[15:0];
          18'd5: anneal_period <= cfg.data;
          default: ;
        endcase
      end
      // improvement flags; new_best and the new best value appear in the same
      // clock, so a flag being reported this clock is simply cleared
      pending <= pending | new_best;
      if (state == RUN && have_pend && rec_ready) begin
        pending[pick] <= 1'b0;   // the record shows the current best
        rr <= (pick == CHW'(NCH - 1)) ? '0 : pick + CHW'(1);
      end
      case (state)
        IDLE: if (start && n_cycles != 0) begin
          state   <= RUN;
          left    <= n_cycles;
          beta    <= beta0;
          acnt    <= '0;
          pending <= '0;
        end
        RUN: begin
          left <= left - 32'd1;
          if (acnt + 32'd1 >= anneal_period) begin
            acnt <= '0;
            beta <= (beta[15]) ? 16'hFFFF : {beta[14:0], 1'b0};
          end else acnt <= acnt + 32'd1;
          if (left == 32'd1) begin state <= DRAIN; drain <= 2'd3; end
        end
        DRAIN: begin
          drain <= drain - 2'd1;
          if (drain == 2'd1) begin state <= EMIT_BEST; ch <= '0; end
        end
        EMIT_BEST: if (rec_ready) begin state <= EMIT_STATE; word <= '0; end
        EMIT_STATE: if (rec_ready) begin
          if (word + 1'b1 >= n_words) begin
            if (ch == CHW'(NCH - 1)) begin state <= IDLE; done <= 1'b1; end
            else begin ch <= ch + CHW'(1); state <= EMIT_BEST; end
          end else word <= word + 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

  assign rec_valid = (state == RUN && have_pend) || state == EMIT_BEST || state == EMIT_STATE;
  always_comb begin
    rec = '0;
    case (state)
      RUN: begin
        rec.tag   = TAG_KNAP_IMPROVE;
        rec.index = 12'(pick);
        rec.value = 48'(best_v[pick]);
      end
      EMIT_BEST: begin
        rec.tag   = TAG_KNAP_BEST;
        rec.index = 12'(ch);
        rec.value = {best_w[ch], best_v[ch]};
      end
      default: begin
        rec.tag   = TAG_KNAP_STATE;
        rec.index = {4'(ch), 8'(word)};
        rec.value = 48'(best_x[ch][32 * word[WDW-1:0] +: 32]);
      end
    endcase
  end
endmodule
