// trigger_channel - BEHAVIOURAL MODEL of one channel's trigger circuit.
//
// The circuit is mixed-signal: (1) a comparator with the threshold on its
// + input and the channel signal on its - input, (2) an XOR with the
// rising/falling select, (3) a flip-flop whose set input is tied high and
// whose clock is the XOR output, so an edge of the XOR output sets OUT,
// and (4)/(5) a transistor pair and capacitor that, once OUT is high,
// pull the flip-flop's active-low reset after a delay set by the
// pulse-width control: OUT is a self-resetting pulse.
//
// Model: comparator and XOR are ideal and instantaneous; the voltages are
// codes. With rf_sel = 1 the XOR output is high while the input is at or
// above the threshold, so OUT fires when the input rises through it; with
// rf_sel = 0 it fires when the input falls below it. The one-shot delay is
// (width + 1) ns, spanning 1..256 ns for the 8-bit width DAC code. An edge
// that arrives while OUT is high does not stretch the pulse. The model holds
// OUT low for 1 ns after time 0, standing for the capacitor's power-up.
//
// Blocks (1)-(5) and their connections are the paper's; the code scale of
// the width DAC and the ideal components are this model's.
//
// Lint notes: the one-shot delay is computed at run time, so a linter
// cannot prove it non-zero; it is at least 1 ns for every width code.
module trigger_channel
  import graph_pkg::*;
(
  input  ain_t       sig,     // channel signal (voltage code)
  input  ain_t       thr,     // threshold DAC (voltage code)
  input  logic       rf_sel,  // rising/falling select
  input  logic [7:0] width,   // pulse width control DAC code
  output logic       out      // trigger output
);
  timeunit 1ns;
  timeprecision 1ps;

  logic comp, xo, clr;

  assign comp = (thr > sig);      // + threshold, - signal
  assign xo   = comp ^ rf_sel;

  initial begin
    clr <= 1'b1;
    #1ns clr <= 1'b0;
  end

  // (3) set flip-flop, clocked by the XOR output, reset by the one-shot
  always @(posedge xo or posedge clr) begin
    if (clr) out <= 1'b0;
    else     out <= 1'b1;
  end

  // (4)/(5) one-shot: OUT high charges the delay node, which resets OUT
  realtime dly;
  assign dly = (width + 9'd1) * 1.0ns;

  always @(posedge out) begin
    #(dly);
    clr <= 1'b1;
    #10ps;
    clr <= 1'b0;
  end
endmodule
