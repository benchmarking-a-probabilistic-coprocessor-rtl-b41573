// bayes_engine: Bayesian network of p-bits for the genetic-relatedness
// family tree, with its correlation data collector.
//
// Network: L = 7 layers (generations) with 2^(L-1) = 64 p-bits in the first
// layer halving down to 1 in the last, 127 nodes in all; node j of layer
// k+1 has the two parents 2j and 2j+1 of layer k. The network is copied
// NC = 10 times (1270 p-bits), as in the paper. Between layers sits the
// kernel, a multiply-and-accumulate that forms the input of every node,
// I = b + w0*m0 + w1*m1 with the parents' bipolar states m = +-1 and
// per-node signed 4-bit weights (the same in all copies). An activation
// look-up table (64 entries, index I + 32, shared by all p-bits) turns I
// into the p-bit threshold. With b = 0 in the first layer, w0 = w1 = 1
// elsewhere, and table entries 0, 2^15+1, 2^16 at I = -2, 0, +2, a child
// copies one randomly chosen parent: the genetic-inheritance model, whose
// parent-child correlation is 1/2.
//
// Layers are pipelined: every clock each layer samples from the previous
// layer's registered states, so one complete network sample leaves the
// pipeline per clock. To see one consistent sample, layer k is delayed by
// L-1-k clocks before the collector. The collector measures correlations
// with one reference node r (register): per node g it counts the +1
// outcomes (pos[g]) and the agreements with node r (agree[g]) over all
// copies and clocks; with T samples, corr = (2agree-T)/T -
// (2pos[g]-T)(2pos[r]-T)/T^2. At the end it emits 127 pos, 127 agree and
// one total record.
//
// Register map (target TGT_BAYES, word offsets): 0 start, 1 number of
// clocks to collect, 2 reference node, 0x100+i activation entry i,
// 0x1000+4g+k weight k of node g (k = 0 bias, 1 w0, 2 w1).
// A run lasts n_cycles + L + 1 clocks before the records. The weight
// format, table size, shared table and correlation-to-one-node collector
// are this design's choices; the paper gives the layer/kernel structure,
// the network size and the copy count.
module bayes_engine
  import pc_pkg::*;
#(
  parameter int L    = 7,
  parameter int NC   = 10,
  parameter int RW   = 16,
  parameter int SALT = 5,
  localparam int NN  = (1 << L) - 1
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
  localparam int CCW = $clog2(NC + 1);
  localparam int GW  = $clog2(NN + 1);

  // first node index of layer k
  function automatic int base(input int k);
    return (1 << L) - (1 << (L - k));
  endfunction
  function automatic int layer_of(input int g);
    int k = 0;
    while (k < L - 1 && g >= base(k + 1)) k++;
    return k;
  endfunction

  typedef enum logic [1:0] {IDLE, RUN, EMIT} state_e;
  state_e state;

  logic [31:0]       n_cycles, left;
  logic [7:0]        warm;
  logic [GW-1:0]     ref_node;
  logic [RW:0]       act [64];
  logic signed [3:0] wgt [NN][3];
  logic [47:0]       pos_cnt [NN];
  logic [47:0]       agr_cnt [NN];
  logic [47:0]       total;
  logic [8:0]        emit_i;
  logic              start, urst, en;

  wire wr = cfg.we && cfg.target == TGT_BAYES;
  assign start = wr && cfg.offset == 18'd0 && cfg.data[0] && state == IDLE;
  assign urst  = rst || start;
  assign en    = (state == RUN);

  // configuration storage
  always_ff @(posedge clk) begin
    if (wr && state == IDLE) begin
      if (cfg.offset[17:8] == 10'h001) act[cfg.offset[5:0]] <= cfg.data[RW:0];
      if (cfg.offset[17:12] == 6'h01 && cfg.offset[11:2] < 10'(NN) && cfg.offset[1:0] != 2'd3)
        wgt[GW'(cfg.offset[11:2])][cfg.offset[1:0]] <= cfg.data[3:0];
    end
  end

  // ---- the network --------------------------------------------------------
  logic [NN-1:0] s   [NC];   // p-bit states
  logic [NN-1:0] al  [NC];   // aligned sample

  for (genvar c = 0; c < NC; c++) begin : g_copy
    for (genvar g = 0; g < NN; g++) begin : g_node
      localparam int K = layer_of(g);
      localparam int J = g - base(K);
      logic signed [6:0] i_in;
      logic [5:0]        idx;
      if (K == 0) begin : g_root
        assign i_in = 7'(wgt[g][0]);
      end else begin : g_mac
        localparam int P0 = base(K - 1) + 2 * J;
        localparam int P1 = P0 + 1;
        assign i_in = 7'(wgt[g][0])
                    + (s[c][P0] ? 7'(wgt[g][1]) : -7'(wgt[g][1]))
                    + (s[c][P1] ? 7'(wgt[g][2]) : -7'(wgt[g][2]));
      end
      assign idx = 6'(i_in + 7'sd32);
      pbit #(.RW(RW), .SEED(lfsr_seed(c * NN + g, SALT, RW))) u_p (
        .clk, .rst(urst), .en, .thr(act[idx]), .m(s[c][g]));
      // alignment delay: L-1-K clocks
      if (K == L - 1) begin : g_nodly
        assign al[c][g] = s[c][g];
      end else begin : g_dly
        localparam int D = L - 1 - K;
        logic [D-1:0] sh;
        always_ff @(posedge clk) if (en) sh <= D'({sh, s[c][g]});
        assign al[c][g] = sh[D-1];
      end
    end
  end

  // ---- data collector: counts over copies --------------------------------
  logic [NC-1:0]  pos_v [NN];
  logic [NC-1:0]  agr_v [NN];
  logic [CCW-1:0] pos_n [NN];
  logic [CCW-1:0] agr_n [NN];
  for (genvar g = 0; g < NN; g++) begin : g_col
    for (genvar c = 0; c < NC; c++) begin : g_cc
      assign pos_v[g][c] = al[c][g];
      assign agr_v[g][c] = ~(al[c][g] ^ al[c][ref_node]);
    end
    popcount #(.N(NC), .OW(CCW)) u_pp (.in(pos_v[g]), .count(pos_n[g]));
    popcount #(.N(NC), .OW(CCW)) u_pa (.in(agr_v[g]), .count(agr_n[g]));
  end

  assign busy = (state != IDLE);

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) begin
      state    <= IDLE;
      n_cycles <= 32'd1;
      left     <= '0;
      warm     <= '0;
      ref_node <= '0;
      total    <= '0;
      emit_i   <= '0;
      for (int g = 0; g < NN; g++) begin pos_cnt[g] <= '0; agr_cnt[g] <= '0; end
    end else begin
      if (wr && state == IDLE) begin
        if (cfg.offset == 18'd1) n_cycles <= cfg.data;
        if (cfg.offset == 18'd2) ref_node <= GW'(cfg.data);
      end
      case (state)
        IDLE: if (start && n_cycles != 0) begin
          state <= RUN;
          left  <= n_cycles;
          warm  <= 8'(L + 1);
          total <= '0;
          for (int g = 0; g < NN; g++) begin pos_cnt[g] <= '0; agr_cnt[g] <= '0; end
        end
        RUN: begin
          if (warm != 0) warm <= warm - 8'd1;
          else begin
            for (int g = 0; g < NN; g++) begin
              pos_cnt[g] <= pos_cnt[g] + 48'(pos_n[g]);
              agr_cnt[g] <= agr_cnt[g] + 48'(agr_n[g]);
            end
            total <= total + 48'(NC);
            left  <= left - 32'd1;
            if (left == 32'd1) begin state <= EMIT; emit_i <= '0; end
          end
        end
        EMIT: if (rec_ready) begin
          emit_i <= emit_i + 9'd1;
          if (emit_i == 9'(2 * NN)) begin state <= IDLE; done <= 1'b1; end
        end
        default: state <= IDLE;
      endcase
    end
  end

  assign rec_valid = (state == EMIT);
  always_comb begin
    if (emit_i < 9'(NN)) begin
      rec.tag = TAG_BAYES_POS;   rec.index = 12'(emit_i);
      rec.value = pos_cnt[GW'(emit_i)];
    end else if (emit_i < 9'(2 * NN)) begin
      rec.tag = TAG_BAYES_AGREE; rec.index = 12'(emit_i - 9'(NN));
      rec.value = agr_cnt[GW'(emit_i - 9'(NN))];
    end else begin
      rec.tag = TAG_BAYES_TOTAL; rec.index = '0;
      rec.value = total;
    end
  end
endmodule
