// sc_receiver - 4-wire SPI-like slow-control receiver.
//
// Wires: sc_clk, sc_cs_n (frame select, active low), sc_din and sc_dout.
// While sc_cs_n is low, sc_din is shifted in MSB first on each rising edge
// of sc_clk. On the edge that brings in the 64th bit, frame_strobe is high
// and `frame` presents the complete 64-bit frame (the bit on sc_din
// included), so the command decoder can take it on that same edge; no
// further clock is needed after a frame. sc_dout is the bit shifted out of
// the top of the register, i.e. the frame sent before, delayed by 64
// clocks (echo for checking a write, or for chaining chips). Raising
// sc_cs_n clears the bit counter at once (asynchronous reset), so a
// partial frame is dropped; por (power-on reset) clears it too. Frames sent back to back without raising
// sc_cs_n are taken every 64 bits.
//
// The paper states a 4-wire SPI-like receiver with 1.2 V LVCMOS levels and
// 64-bit frames; the wire functions, bit order and echo are this design's.
module sc_receiver (
  input  logic        por,
  input  logic        sc_clk,
  input  logic        sc_cs_n,
  input  logic        sc_din,
  output logic        sc_dout,
  output logic [63:0] frame,
  output logic        frame_strobe
);
  timeunit 1ns;
  timeprecision 1ps;
  logic [63:0] sr;
  logic [5:0]  bitcnt;

  logic clr;
  assign clr = por | sc_cs_n;

  always_ff @(posedge sc_clk or posedge clr) begin
    if (clr) bitcnt <= '0;
    else         bitcnt <= bitcnt + 1'b1;
  end

  always_ff @(posedge sc_clk) begin
    if (!sc_cs_n) sr <= {sr[62:0], sc_din};
  end

  assign frame        = {sr[62:0], sc_din};
  assign frame_strobe = !sc_cs_n && (bitcnt == 6'd63);
  assign sc_dout      = sr[63];
endmodule
