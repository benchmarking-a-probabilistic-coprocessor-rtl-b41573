// axi_mem_model: behavioural AXI4 write-only memory for testbenches, a
// stand-in for the board's DDR4 and its controller. Accepts one address
// at a time with random delays, stores INCR bursts of 64-bit beats into a
// sparse memory, and answers each burst with OKAY after a random delay.
// It counts bursts and beats and flags protocol errors (WLAST on the wrong
// beat, data without an address).
module axi_mem_model #(
  parameter int READY_PCT = 70
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [63:0] awaddr,
  input  logic [7:0]  awlen,
  input  logic [2:0]  awsize,
  input  logic [1:0]  awburst,
  input  logic        awvalid,
  output logic        awready,
  input  logic [63:0] wdata,
  input  logic [7:0]  wstrb,
  input  logic        wlast,
  input  logic        wvalid,
  output logic        wready,
  output logic [1:0]  bresp,
  output logic        bvalid,
  input  logic        bready
);
  logic [63:0] mem [longint unsigned];
  int bursts = 0, beats = 0, errors = 0;
  bit          have_addr = 0;
  longint unsigned addr;
  int          left;

  assign bresp = 2'b00;

  always @(posedge clk) begin
    if (rst) begin
      awready <= 0; wready <= 0; bvalid <= 0; have_addr = 0;
    end else begin
      if (bvalid && bready) bvalid <= 0;
      if (awvalid && awready) begin
        if (awburst != 2'b01 || awsize != 3'd3) errors++;
        addr = awaddr; left = int'(awlen) + 1; have_addr = 1;
      end
      if (wvalid && wready) begin
        if (!have_addr) errors++;
        if (wstrb != 8'hFF) errors++;
        mem[addr] = wdata;
        addr += 8; left--; beats++;
        if ((left == 0) != wlast) errors++;
        if (left == 0) begin have_addr = 0; bursts++; bvalid <= 1; end
      end
      awready <= !have_addr && !bvalid && ($urandom_range(0, 99) < READY_PCT);
      wready  <= ($urandom_range(0, 99) < READY_PCT);
    end
  end
endmodule
