// result_mux: output side of the data collector; merges the engines'
// result records and time-stamps them.
//
// NIN record streams (valid/ready) are served round-robin. A granted
// record is stored in the output register together with the value of a
// free-running clock counter, so that every data point carries the time at
// which it was produced; the paper stores such a time stamp with every data
// point to measure the emulator's execution time. The output register is
// refilled in the same clock in which it is emptied, so one record per
// clock can pass. A record waits in its engine until granted.
// Rules checked by assertions: an output record, once valid, stays valid
// and unchanged until taken.
// Round-robin order and the 64-bit cycle-count time stamp are this design's
// choices.
module result_mux
  import pc_pkg::*;
#(
  parameter int NIN = 4
) (
  input  logic           clk,
  input  logic           rst,
  input  logic [NIN-1:0] in_valid,
  output logic [NIN-1:0] in_ready,
  input  rec_t           in_rec [NIN],
  output logic           out_valid,
  input  logic           out_ready,
  output trec_t          out,
  output logic [63:0]    now
);
  localparam int SW = (NIN > 1) ? $clog2(NIN) : 1;

  logic [SW-1:0] rr, pick;
  logic          any;
  logic          load;

  always_comb begin
    any  = 1'b0;
    pick = rr;
    for (int k = NIN - 1; k >= 0; k--) begin
      int idx;
      idx = (int'(rr) + k) % NIN;
      if (in_valid[idx]) begin any = 1'b1; pick = SW'(idx); end
    end
  end

  assign load = any && (!out_valid || out_ready);

  always_comb begin
    in_ready = '0;
    if (load) in_ready[pick] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      now       <= '0;
      rr        <= '0;
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      now <= now + 64'd1;
      if (load) begin
        out_valid <= 1'b1;
        out.ts    <= now;
        out.rec   <= in_rec[pick];
        rr        <= (pick == SW'(NIN - 1)) ? '0 : pick + SW'(1);
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (rst)
    out_valid && !out_ready |=> out_valid && $stable(out));
endmodule
