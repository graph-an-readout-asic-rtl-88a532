// cdc_sync - two flip-flop synchroniser for level signals entering a clock
// domain. Each bit is synchronised on its own, so a multi-bit value must be
// quasi-static (changed only while its users ignore it). Output follows the
// input after two to three destination clock edges. Not described in the
// chip's documentation; it is this design's way of crossing between the
// sampling, conversion, read and slow-control clocks.
module cdc_sync #(
  parameter int unsigned W = 1
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  timeunit 1ns;
  timeprecision 1ps;
  logic [W-1:0] meta;
  always_ff @(posedge clk) begin
    meta <= d;
    q    <= meta;
  end
endmodule
