// conversion_controller - Wilkinson conversion controller of one bank.
//
// The Timebase raises `convert` (sampling clock domain) for one bank period.
// The request is synchronised to the conversion clock; its rising edge
// starts a conversion: the 12-bit counter and the ramp start together from
// zero. While `active` is high, the counter steps once per conversion clock
// and its Gray code drives the bank's bus, to which every unlocked memory
// cell of the bank listens. The counter stops at 4095 if the request lasts
// longer than 4096 clocks (a slow sampling clock). When the synchronised
// request falls the conversion ends: counter and ramp return to zero and
// `unlock` pulses for one clock, clearing every cell's overwrite-protection
// flip-flop so the next conversion may write again. rst forces the idle
// state and also pulses unlock.
//
// Timing: with the conversion clock at four times the sampling clock a
// bank period (1024 samples) is exactly 4096 counts, counts 0..4095 are all
// presented, and the last one is seen by the cells on the edge that ends
// the conversion. Start and end are delayed by the same two-flop
// synchroniser, so the count length equals the request length.
//
// From the paper: ramp generator, synchronous counter with Gray coder,
// synchronised start, self reset of counter and ramp and unlocking of the
// memory at the end. The synchroniser, the saturation at 4095 and ending
// on the falling request are this design's choices.
module conversion_controller
  import graph_pkg::*;
(
  input  logic       clk,      // conversion (Wilkinson) clock
  input  logic       rst,      // synchronous, active high
  input  logic       convert,  // request from the Timebase (asynchronous)
  input  logic [7:0] slope,    // ramp current DAC code
  output data_t      gray,     // Gray-coded counter bus
  output data_t      count,    // binary counter value
  output ain_t       ramp,     // ramp voltage code
  output logic       active,   // conversion running: cells follow the bus
  output logic       unlock    // one-clock pulse clearing the cells' locks
);
  timeunit 1ns;
  timeprecision 1ps;
  logic conv_s, conv_q;

  cdc_sync #(.W(1)) u_sync (.clk(clk), .d(convert), .q(conv_s));

  always_ff @(posedge clk) begin
    if (rst) begin
      conv_q <= 1'b0;
      active <= 1'b0;
      count  <= '0;
      unlock <= 1'b1;
    end else begin
      conv_q <= conv_s;
      unlock <= 1'b0;
      if (conv_s && !conv_q) begin          // start
        active <= 1'b1;
        count  <= '0;
      end else if (active && !conv_s) begin // end of conversion
        active <= 1'b0;
        count  <= '0;
        unlock <= 1'b1;
      end else if (active && count != '1) begin
        count <= count + 1'b1;
      end
    end
  end

  assign gray = bin2gray(count);

  ramp_generator u_ramp (.clk(clk), .run(active), .slope(slope), .ramp(ramp));

  // The counter only moves during a conversion.
  a_idle_zero: assert property (@(posedge clk) disable iff (rst) !active |=> (count == '0));
endmodule
