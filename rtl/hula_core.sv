// hula_core - the HULA double-buffered sampling memory: bank A and bank B,
// each with its own conversion controller (ramp + Gray counter), and the
// shared read bus.
//
// The Timebase's window select spans both banks: windows 0..N_WB-1 belong
// to bank A, the rest to bank B. While one bank samples, the other is
// converted (convert_a / convert_b from the Timebase) and afterwards holds
// digitised data until it is converted again one revolution later, so the
// data of revolution t-1 can be read while revolution t is taken.
//
// Read address: channel, window 0..2*N_WB-1 (its top bit selects the bank)
// and sample; rd_gray is the addressed cell's Gray-coded word, available
// combinationally. The two banks get their own ramp slope so that their
// pedestals can be matched.
//
// The bank/controller arrangement follows the paper; the port grouping is
// this design's. The controllers' binary counts are not used here (the
// cells take the Gray bus); they are left open.
module hula_core
  import graph_pkg::*;
#(
  parameter int unsigned N_C  = N_CH,
  parameter int unsigned N_WB = N_WIN_BANK,   // windows per bank
  parameter int unsigned N_S  = N_SMP
) (
  input  logic                      clk_smp,
  input  logic [N_S-1:0]            smp_sel,
  input  logic [2*N_WB-1:0]         win_sel,
  input  ain_t                      ain [N_C],
  input  logic                      clk_conv,
  input  logic                      conv_rst,
  input  logic                      convert_a,
  input  logic                      convert_b,
  input  logic [7:0]                slope_a,
  input  logic [7:0]                slope_b,
  output logic                      active_a,
  output logic                      active_b,
  input  logic [$clog2(N_C)-1:0]    rd_ch,
  input  logic [$clog2(2*N_WB)-1:0] rd_win,
  input  logic [$clog2(N_S)-1:0]    rd_smp,
  output data_t                     rd_gray
);
  timeunit 1ns;
  timeprecision 1ps;
  localparam int unsigned WBW = $clog2(N_WB);

  data_t gray_a, gray_b, count_a, count_b, rd_a, rd_b;
  ain_t  ramp_a, ramp_b;
  logic  unlock_a, unlock_b;

  conversion_controller u_cc_a (
    .clk(clk_conv), .rst(conv_rst), .convert(convert_a), .slope(slope_a),
    .gray(gray_a), .count(count_a), .ramp(ramp_a), .active(active_a),
    .unlock(unlock_a));

  conversion_controller u_cc_b (
    .clk(clk_conv), .rst(conv_rst), .convert(convert_b), .slope(slope_b),
    .gray(gray_b), .count(count_b), .ramp(ramp_b), .active(active_b),
    .unlock(unlock_b));

  hula_bank #(.N_C(N_C), .N_W(N_WB), .N_S(N_S)) u_bank_a (
    .clk_smp(clk_smp), .smp_sel(smp_sel), .win_sel(win_sel[N_WB-1:0]), .ain(ain),
    .clk_conv(clk_conv), .conv_active(active_a), .conv_gray(gray_a),
    .ramp(ramp_a), .unlock(unlock_a),
    .rd_ch(rd_ch), .rd_win(rd_win[WBW-1:0]), .rd_smp(rd_smp), .rd_gray(rd_a));

  hula_bank #(.N_C(N_C), .N_W(N_WB), .N_S(N_S)) u_bank_b (
    .clk_smp(clk_smp), .smp_sel(smp_sel), .win_sel(win_sel[2*N_WB-1:N_WB]), .ain(ain),
    .clk_conv(clk_conv), .conv_active(active_b), .conv_gray(gray_b),
    .ramp(ramp_b), .unlock(unlock_b),
    .rd_ch(rd_ch), .rd_win(rd_win[WBW-1:0]), .rd_smp(rd_smp), .rd_gray(rd_b));

  assign rd_gray = rd_win[WBW] ? rd_b : rd_a;

endmodule
