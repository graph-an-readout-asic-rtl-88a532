// ramp_generator - BEHAVIOURAL MODEL of the analog Wilkinson ramp of one
// bank (a programmable current source charging a capacitor).
//
// The real circuit is analog. Here the ramp voltage is a 16-bit code
// (graph_pkg analog scale) that is held at 0 while run is low (capacitor
// discharged) and rises by `slope` codes on every conversion clock edge
// while run is high, saturating at the top of the scale. slope stands for
// the current-source DAC setting: a steeper ramp covers the input range in
// fewer counts. Because the model steps on the conversion clock, ramp and
// counter stay in lock-step; in the chip they are aligned by starting both
// together.
//
// From the paper: a programmable current into a capacitor, reset at the end
// of every conversion. The linear stepped form and the 8-bit slope code are
// this model's own.
module ramp_generator
  import graph_pkg::*;
(
  input  logic       clk,    // conversion clock
  input  logic       run,    // ramp running (conversion active)
  input  logic [7:0] slope,  // current DAC code: codes per conversion clock
  output ain_t       ramp    // ramp voltage as a code
);
  timeunit 1ns;
  timeprecision 1ps;
  logic [AIN_W:0] next;
  assign next = {1'b0, ramp} + {{(AIN_W-7){1'b0}}, slope};

  always_ff @(posedge clk) begin
    if (!run)            ramp <= '0;
    else if (next[AIN_W]) ramp <= '1;
    else                 ramp <= next[AIN_W-1:0];
  end
endmodule
