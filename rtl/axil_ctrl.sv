// axil_ctrl: AXI-Lite register interface of the coprocessor.
//
// The host reaches the coprocessor's registers and tables through an
// AXI-Lite slave (32-bit data, 24-bit byte address), as in the paper, where
// problem parameters are sent from user space over PCIe and AXI-Lite.
// A write is taken when both its address and its data are valid; it is
// turned into a one-clock cfg_t broadcast (target = addr[23:20],
// offset = addr[19:2]) that every engine decodes, and answered with OKAY.
// Target 0xF holds the global registers kept here:
//   write/read 0 DDR ring base [31:0], 1 base [63:32], 2 ring size (bytes)
//   read-only  8 identification 0x5043_0001, 9 status {busy[3:0] at
//              bits 7:4, done[3:0] at bits 3:0}, 10 records written,
//              11 time stamp [31:0]
// done[k] is set by engine k's done pulse and cleared by the next write to
// offset 0 (start) of that engine. Reads return 0 outside the table.
// Timing: a write completes in two clocks (accept, response); a read
// returns data one clock after the address is accepted.
// The register map is this design's choice; the paper does not give one.
module axil_ctrl
  import pc_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  // AXI-Lite slave
  input  logic [23:0] s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic [3:0]  s_axil_wstrb,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [23:0] s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // to the engines
  output cfg_t        cfg,
  input  logic [3:0]  busy,
  input  logic [3:0]  done_pulse,
  input  logic [31:0] rec_count,
  input  logic [63:0] now,
  output logic [63:0] ddr_base,
  output logic [63:0] ddr_size
);
  logic [3:0] done;
  wire take_w = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  wire take_r = s_axil_arvalid && !s_axil_rvalid;

  assign s_axil_awready = take_w;
  assign s_axil_wready  = take_w;
  assign s_axil_arready = take_r;
  assign s_axil_bresp   = 2'b00;
  assign s_axil_rresp   = 2'b00;

  always_ff @(posedge clk) begin
    if (rst) begin
      cfg           <= '0;
      s_axil_bvalid <= 1'b0;
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
      ddr_base      <= '0;
      ddr_size      <= 64'h1000;
      done          <= '0;
    end else begin
      cfg.we <= 1'b0;
      done   <= done | done_pulse;
      // write channel
      if (take_w) begin
        cfg.we        <= 1'b1;
        cfg.target    <= s_axil_awaddr[23:20];
        cfg.offset    <= s_axil_awaddr[19:2];
        cfg.data      <= s_axil_wdata;
        s_axil_bvalid <= 1'b1;
        if (s_axil_awaddr[23:20] == TGT_GLOBAL) begin
          case (s_axil_awaddr[19:2])
            18'd0: ddr_base[31:0]  <= s_axil_wdata;
            18'd1: ddr_base[63:32] <= s_axil_wdata;
            18'd2: ddr_size        <= 64'(s_axil_wdata);
            default: ;
          endcase
        end else if (s_axil_awaddr[19:2] == 18'd0 && s_axil_awaddr[23:22] == 2'b00) begin
          done[s_axil_awaddr[21:20]] <= 1'b0;
        end
      end else if (s_axil_bvalid && s_axil_bready) begin
        s_axil_bvalid <= 1'b0;
      end
      // read channel
      if (take_r) begin
        s_axil_rvalid <= 1'b1;
        s_axil_rdata  <= '0;
        if (s_axil_araddr[23:20] == TGT_GLOBAL) begin
          case (s_axil_araddr[19:2])
            18'd0:  s_axil_rdata <= ddr_base[31:0];
            18'd1:  s_axil_rdata <= ddr_base[63:32];
            18'd2:  s_axil_rdata <= ddr_size[31:0];
            18'd8:  s_axil_rdata <= 32'h5043_0001;
            18'd9:  s_axil_rdata <= {24'd0, busy, done};
            18'd10: s_axil_rdata <= rec_count;
            18'd11: s_axil_rdata <= now[31:0];
            default: ;
          endcase
        end
      end else if (s_axil_rvalid && s_axil_rready) begin
        s_axil_rvalid <= 1'b0;
      end
    end
  end

  a_b_hold: assert property (@(posedge clk) disable iff (rst)
    s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (rst)
    s_axil_rvalid && !s_axil_rready |=> s_axil_rvalid && $stable(s_axil_rdata));
endmodule
