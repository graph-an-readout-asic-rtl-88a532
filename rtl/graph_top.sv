// graph_top - digital and HULA core of the GRAPH 16-channel waveform
// recorder chip.
//
// Each channel's (amplified or bypassed) input is sampled into the HULA
// memory: 2 banks x 16 windows x 64 samples per channel. The Timebase walks
// a sample pulse through the windows at the sampling clock (clk_smp); while
// one bank samples, the other is digitised in place by a Wilkinson ramp
// conversion at the conversion clock (clk_conv), so every sample is
// converted a fixed time after it was taken. The readout, on its own clock
// (rd_clk), streams 12-bit words from any address of the digitised memory.
// Per-channel discriminators drive eight OR-ed trigger outputs and an
// internal trigger that stops loop mode. A 4-wire serial port (sc_*) sets
// everything through 64-bit frames.
//
// Clock domains: clk_smp (Timebase, sampling), clk_conv (conversion
// controllers and the cells' memories), rd_clk (readout), sc_clk (slow
// control). rst (the RST pin, active high) restarts the Timebase and is
// synchronised into the conversion and read domains. por resets the
// configuration registers. Configuration values are quasi-static: change
// them while rst is high. The triggers are asynchronous and synchronised
// into clk_smp; the software trigger crosses as a toggle.
//
// Analog parts are not in this model: the amplifiers, bypass switch and
// bias DACs are outside, and their settings leave through fe_cfg and bias;
// ain stands for the voltage reaching the sampling cells and the trigger
// comparators, as a 16-bit code. The ramp and the trigger circuits are
// behavioural models inside.
//
// The block structure follows the paper; the clock-crossing scheme, the
// por input and the register map are this design's.
//
// Lint notes: the Timebase's counter values and running flag, the
// conversion-active flags and the sixteen per-channel triggers are
// observation points of the blocks and are left unconnected here; the
// chip brings out only AnB, halted and the paired LVDS triggers.
module graph_top
  import graph_pkg::*;
#(
  parameter int unsigned N_C  = N_CH,        // channels
  parameter int unsigned N_WB = N_WIN_BANK,  // windows per bank
  parameter int unsigned N_S  = N_SMP        // samples per window
) (
  // sampling and conversion
  input  logic              clk_smp,
  input  logic              rst,
  input  logic              clk_conv,
  input  ain_t              ain [N_C],
  output logic              anb,
  output logic              halted,
  // data readout
  input  logic              rd_clk,
  input  logic              rd_ser_ch,
  input  logic              rd_ser_win,
  input  logic              rd_ser_smp,
  input  logic              rd_load,
  output data_t             dout,
  output logic              dout_valid,
  // triggers
  output logic [N_C/2-1:0]  trig_lvds,
  // slow control
  input  logic              por,
  input  logic              sc_clk,
  input  logic              sc_cs_n,
  input  logic              sc_din,
  output logic              sc_dout,
  // settings of the analog front end and bias DACs
  output fe_cfg_t           fe_cfg [N_C],
  output logic [BIAS_W-1:0] bias   [N_BIAS]
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned CW  = $clog2(N_C);
  localparam int unsigned WW  = $clog2(2*N_WB);
  localparam int unsigned SW  = $clog2(N_S);

  // ---------------- slow control ----------------
  logic [63:0] frame;
  logic        frame_strobe;
  tb_cfg_t     tb_cfg_sc, tb_cfg;
  logic        sw_tgl_sc;
  logic [7:0]  slope_a_sc, slope_b_sc, slope_a, slope_b;
  trig_cfg_t   trig_cfg [N_C];

  sc_receiver u_sc_rx (
    .por(por), .sc_clk(sc_clk), .sc_cs_n(sc_cs_n), .sc_din(sc_din), .sc_dout(sc_dout),
    .frame(frame), .frame_strobe(frame_strobe));

  sc_decoder #(.N_C(N_C), .N_B(N_BIAS)) u_sc_dec (
    .sc_clk(sc_clk), .por(por), .frame(frame), .frame_strobe(frame_strobe),
    .tb_cfg(tb_cfg_sc), .sw_trig_tgl(sw_tgl_sc), .slope_a(slope_a_sc),
    .slope_b(slope_b_sc), .trig_cfg(trig_cfg), .fe_cfg(fe_cfg), .bias(bias));

  // ---------------- triggers ----------------
  logic [N_C-1:0] trig;
  logic           hw_trig_async, hw_trig, sw_tgl, sw_tgl_q, sw_trig;

  trigger_section #(.N_C(N_C)) u_trig (
    .sig(ain), .cfg(trig_cfg), .trig(trig), .lvds(trig_lvds),
    .hw_trig(hw_trig_async));

  // ---------------- into the sampling clock domain ----------------
  cdc_sync #(.W($bits(tb_cfg_t))) u_sync_cfg (.clk(clk_smp), .d(tb_cfg_sc), .q(tb_cfg));
  cdc_sync #(.W(2)) u_sync_trig (.clk(clk_smp), .d({hw_trig_async, sw_tgl_sc}),
                                 .q({hw_trig, sw_tgl}));

  always_ff @(posedge clk_smp) sw_tgl_q <= sw_tgl;
  assign sw_trig = sw_tgl ^ sw_tgl_q;

  // ---------------- timebase ----------------
  logic [N_S-1:0]    smpl;
  logic [2*N_WB-1:0] win;
  logic [WW-1:0]     win_idx;
  logic [SW-1:0]     smp_idx;
  logic              convert_a, convert_b, running;

  timebase #(.N_S(N_S), .N_W(2*N_WB)) u_tb (
    .clk(clk_smp), .rst(rst), .cfg(tb_cfg), .hw_trig(hw_trig), .sw_trig(sw_trig),
    .smpl(smpl), .win(win), .win_idx(win_idx), .smp_idx(smp_idx), .anb(anb),
    .convert_a(convert_a), .convert_b(convert_b), .running(running),
    .halted(halted));

  // ---------------- HULA core ----------------
  logic          conv_rst, rd_rst;
  logic          active_a, active_b;
  logic [CW-1:0] rd_ch;
  logic [WW-1:0] rd_win;
  logic [SW-1:0] rd_smp;
  data_t         rd_gray;

  cdc_sync #(.W(17)) u_sync_conv (.clk(clk_conv), .d({rst, slope_a_sc, slope_b_sc}),
                                  .q({conv_rst, slope_a, slope_b}));

  hula_core #(.N_C(N_C), .N_WB(N_WB), .N_S(N_S)) u_core (
    .clk_smp(clk_smp), .smp_sel(smpl), .win_sel(win), .ain(ain),
    .clk_conv(clk_conv), .conv_rst(conv_rst), .convert_a(convert_a),
    .convert_b(convert_b), .slope_a(slope_a), .slope_b(slope_b),
    .active_a(active_a), .active_b(active_b),
    .rd_ch(rd_ch), .rd_win(rd_win), .rd_smp(rd_smp), .rd_gray(rd_gray));

  // ---------------- readout ----------------
  cdc_sync #(.W(1)) u_sync_rd (.clk(rd_clk), .d(rst), .q(rd_rst));

  readout #(.CW(CW), .WW(WW), .SW(SW)) u_rd (
    .clk(rd_clk), .rst(rd_rst), .ser_ch(rd_ser_ch), .ser_win(rd_ser_win),
    .ser_smp(rd_ser_smp), .load(rd_load), .rd_ch(rd_ch), .rd_win(rd_win),
    .rd_smp(rd_smp), .rd_gray(rd_gray), .dout(dout), .dout_valid(dout_valid));

endmodule
