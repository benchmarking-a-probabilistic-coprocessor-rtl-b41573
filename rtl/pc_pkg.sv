// pc_pkg: types and constants shared by the probabilistic coprocessor.
//
// The coprocessor is configured through one write-only bus (cfg_t) that the
// AXI-Lite register block broadcasts to all engines; each engine decodes its
// own target field. Results leave every engine as 64-bit records (rec_t) that
// the result multiplexer time-stamps and hands to the DDR writer.
// The record layout, the address map and the LFSR tap table are choices of
// this design; the paper only states that parameters arrive over AXI-Lite
// and that results are stored in DDR4 together with a time stamp.
package pc_pkg;

  // Engine identifiers, used as cfg_t.target and in record tags.
  localparam logic [3:0] TGT_PI     = 4'h0;
  localparam logic [3:0] TGT_BOOT   = 4'h1;
  localparam logic [3:0] TGT_BAYES  = 4'h2;
  localparam logic [3:0] TGT_KNAP   = 4'h3;
  localparam logic [3:0] TGT_GLOBAL = 4'hF;

  // Configuration write: byte address bits [23:20] select the target,
  // bits [19:2] give a word offset inside the target.
  typedef struct packed {
    logic        we;
    logic [3:0]  target;
    logic [17:0] offset;
    logic [31:0] data;
  } cfg_t;

  // Record tags.
  typedef enum logic [3:0] {
    TAG_PI_NIN      = 4'h1,  // index 0: samples inside the circle
    TAG_PI_NALL     = 4'h2,  // index 0: all samples
    TAG_BOOT_BIN    = 4'h3,  // index = bin, value = count
    TAG_BAYES_POS   = 4'h4,  // index = node, value = number of +1 outcomes
    TAG_BAYES_AGREE = 4'h5,  // index = node, value = agreements with reference node
    TAG_BAYES_TOTAL = 4'h6,  // index 0: samples per node
    TAG_KNAP_IMPROVE= 4'h7,  // index = chain, value = new best value (during run)
    TAG_KNAP_BEST   = 4'h8,  // index = chain, value = {weight[23:0], value[23:0]}
    TAG_KNAP_STATE  = 4'h9   // index = {chain, word}, value[31:0] = 32 item bits
  } tag_e;

  typedef struct packed {
    tag_e        tag;
    logic [11:0] index;
    logic [47:0] value;
  } rec_t;

  // Time-stamped record as written to memory (two 64-bit words).
  typedef struct packed {
    logic [63:0] ts;
    rec_t        rec;
  } trec_t;

  // Feedback mask of a maximal-length Fibonacci LFSR (taps after Xilinx
  // XAPP052). Bit t-1 set means tap t. Shift direction: towards the MSB.
  function automatic logic [31:0] lfsr_mask(input int w);
    case (w)
      8:  return 32'h0000_00B8;  // 8,6,5,4
      10: return 32'h0000_0240;  // 10,7
      12: return 32'h0000_0829;  // 12,6,4,1
      13: return 32'h0000_100D;  // 13,4,3,1
      14: return 32'h0000_2015;  // 14,5,3,1
      15: return 32'h0000_6000;  // 15,14
      16: return 32'h0000_D008;  // 16,15,13,4
      17: return 32'h0001_2000;  // 17,14
      18: return 32'h0002_0400;  // 18,11
      20: return 32'h0009_0000;  // 20,17
      22: return 32'h0030_0000;  // 22,21
      24: return 32'h00E1_0000;  // 24,23,22,17
      default: return 32'h8020_0003;  // 32,22,2,1
    endcase
  endfunction

  // Seed for instance k of a family of LFSRs: a multiplicative hash, forced
  // non-zero in the low w bits.
  function automatic logic [31:0] lfsr_seed(input int k, input int salt, input int w);
    logic [31:0] h;
    h = (32'(k) + 32'd1) * 32'h9E37_79B1 ^ (32'(salt) * 32'h85EB_CA6B);
    h = h ^ (h >> 15);
    h = h * 32'hC2B2_AE35;
    h = h ^ (h >> 13);
    h = h & ((w >= 32) ? 32'hFFFF_FFFF : ((32'd1 << w) - 32'd1));
    if (h == 32'd0) h = 32'd1;
    return h;
  endfunction

endpackage
