// ddr_writer: AXI4 write master that stores time-stamped result records in
// the board's DDR4 memory, from where the host fetches them by DMA.
//
// Each record becomes one write burst of two 64-bit beats: the time stamp
// at address A and the record {tag, index, value} at A+8. Records are
// written to consecutive 16-byte slots of a ring buffer [base, base+size);
// the write pointer wraps to base at the end. One burst is outstanding at a
// time: the address is issued, then both data beats, then the write
// response is awaited before the next record is accepted. `count` is the
// number of records whose write response has been received.
// Rules checked by assertions: AWVALID and WVALID, once raised, stay high
// with stable payload until accepted.
// The paper states only that results are sent over an AXI interconnect to
// DDR4; the record layout, burst shape, ring buffer and single outstanding
// burst are this design's choices.
module ddr_writer
  import pc_pkg::*;
#(
  parameter int AW = 64
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [AW-1:0] base,
  input  logic [AW-1:0] size,          // bytes, multiple of 16
  input  logic          in_valid,
  output logic          in_ready,
  input  trec_t         in,
  output logic [31:0]   count,
  // AXI4 write channels
  output logic [AW-1:0] m_axi_awaddr,
  output logic [7:0]    m_axi_awlen,
  output logic [2:0]    m_axi_awsize,
  output logic [1:0]    m_axi_awburst,
  output logic          m_axi_awvalid,
  input  logic          m_axi_awready,
  output logic [63:0]   m_axi_wdata,
  output logic [7:0]    m_axi_wstrb,
  output logic          m_axi_wlast,
  output logic          m_axi_wvalid,
  input  logic          m_axi_wready,
  input  logic [1:0]    m_axi_bresp,
  input  logic          m_axi_bvalid,
  output logic          m_axi_bready
);
  typedef enum logic [1:0] {IDLE, ADDR, DATA, RESP} state_e;
  state_e      state;
  trec_t       hold;
  logic [AW-1:0] offs;
  logic        beat;         // 0: time stamp, 1: record

  assign in_ready      = (state == IDLE);
  assign m_axi_awaddr  = base + offs;
  assign m_axi_awlen   = 8'd1;          // two beats
  assign m_axi_awsize  = 3'd3;          // 8 bytes per beat
  assign m_axi_awburst = 2'b01;         // INCR
  assign m_axi_awvalid = (state == ADDR);
  assign m_axi_wdata   = beat ? 64'(hold.rec) : hold.ts;
  assign m_axi_wstrb   = 8'hFF;
  assign m_axi_wlast   = beat;
  assign m_axi_wvalid  = (state == DATA);
  assign m_axi_bready  = (state == RESP);

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= IDLE;
      hold    <= '0;
      offs    <= '0;
      beat    <= 1'b0;
      count   <= '0;
    end else begin
      case (state)
        IDLE: if (in_valid) begin
          hold    <= in;
          beat    <= 1'b0;
          state   <= ADDR;
        end
        ADDR: if (m_axi_awready) state <= DATA;
        DATA: begin
          if (m_axi_wready) begin
            beat <= 1'b1;
            if (beat) state <= RESP;
          end
        end
        RESP: if (m_axi_bvalid) begin
          count <= count + 32'd1;
          offs  <= (offs + AW'(16) >= size) ? '0 : offs + AW'(16);
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

  a_aw: assert property (@(posedge clk) disable iff (rst)
    m_axi_awvalid && !m_axi_awready |=> m_axi_awvalid && $stable(m_axi_awaddr));
  a_w: assert property (@(posedge clk) disable iff (rst)
    m_axi_wvalid && !m_axi_wready |=> m_axi_wvalid && $stable(m_axi_wdata));
endmodule
