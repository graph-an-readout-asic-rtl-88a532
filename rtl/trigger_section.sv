// trigger_section - the chip's trigger outputs.
//
// One trigger_channel per input channel, each with its own threshold,
// rising/falling select and pulse width (trig_cfg_t). The outputs of
// adjacent channels (0/1, 2/3, ... 14/15) are OR-ed, giving N_C/2 outputs
// to the LVDS drivers. The OR of all channels is the internal hardware
// trigger for the Timebase's loop mode; it is asynchronous to every clock.
//
// The per-channel circuit and the pairwise OR are the paper's; the
// internal hardware trigger being the OR of all channels is this design's
// choice (the paper only names an internal hardware trigger input).
module trigger_section
  import graph_pkg::*;
#(
  parameter int unsigned N_C = N_CH
) (
  input  ain_t            sig [N_C],
  input  trig_cfg_t       cfg [N_C],
  output logic [N_C-1:0]  trig,        // per-channel trigger pulses
  output logic [N_C/2-1:0] lvds,       // pairwise OR, to the LVDS outputs
  output logic            hw_trig      // OR of all channels
);
  timeunit 1ns;
  timeprecision 1ps;
  for (genvar c = 0; c < N_C; c++) begin : g_ch
    trigger_channel u_ch (
      .sig(sig[c]), .thr(cfg[c].thr), .rf_sel(cfg[c].rf_sel),
      .width(cfg[c].width), .out(trig[c]));
  end

  for (genvar p = 0; p < N_C/2; p++) begin : g_pair
    assign lvds[p] = trig[2*p] | trig[2*p+1];
  end

  assign hw_trig = |trig;
endmodule
