// sc_decoder - slow-control command decoder and configuration registers.
//
// A 64-bit frame is {address[15:0], unused[15:0], value[31:0]}. On a
// frame_strobe edge of sc_clk the addressed register takes the value:
//
//   0x0000  CTRL     [0] loop mode, [1] hardware trigger mask,
//                    [2] software trigger mask, [13:8] sample pulse width
//   0x0001  SWTRIG   any write: software trigger (toggles sw_trig_tgl)
//   0x0002  RAMP     [7:0] bank A ramp slope, [15:8] bank B ramp slope
//   0x0010+c TRIG[c] [15:0] threshold, [16] rising/falling select,
//                    [31:24] pulse width code            (c = 0..15)
//   0x0020+c FE[c]   [15:0] amplifier option bits, [16] amplifier bypass
//   0x0030+n BIAS[n] [11:0] bias DAC code                 (n = 0..7)
//
// Other addresses are ignored. por (power-on reset, asynchronous, active
// high) loads the defaults: continuous mode, triggers unmasked, pulse
// width 1, slopes 16 (4096 counts span the whole input scale), thresholds
// at mid scale with rising select and width code 19 (20 ns), all other bits
// zero. The outputs are static settings for the other clock domains; the
// software trigger crosses as a toggle that the receiving domain
// synchronises and edge-detects.
//
// The paper states that frames carry an internal address and values for
// circuit settings and bias DACs, and that the software trigger comes from
// this register set; the map, field widths and defaults are this design's.
// Frame bits 47:32 and the unused value bits of the TRIG registers are
// ignored by design.
module sc_decoder
  import graph_pkg::*;
#(
  parameter int unsigned N_C = N_CH,
  parameter int unsigned N_B = N_BIAS
) (
  input  logic              sc_clk,
  input  logic              por,
  input  logic [63:0]       frame,
  input  logic              frame_strobe,
  output tb_cfg_t           tb_cfg,
  output logic              sw_trig_tgl,
  output logic [7:0]        slope_a,
  output logic [7:0]        slope_b,
  output trig_cfg_t         trig_cfg [N_C],
  output fe_cfg_t           fe_cfg   [N_C],
  output logic [BIAS_W-1:0] bias     [N_B]
);
  timeunit 1ns;
  timeprecision 1ps;
  localparam logic [15:0] A_CTRL   = 16'h0000;
  localparam logic [15:0] A_SWTRIG = 16'h0001;
  localparam logic [15:0] A_RAMP   = 16'h0002;
  localparam logic [15:0] A_TRIG   = 16'h0010;
  localparam logic [15:0] A_FE     = 16'h0020;
  localparam logic [15:0] A_BIAS   = 16'h0030;

  logic [15:0] addr;
  logic [31:0] val;
  assign addr = frame[63:48];
  assign val  = frame[31:0];

  always_ff @(posedge sc_clk or posedge por) begin
    if (por) begin
      tb_cfg      <= '{smp_width: 6'd1, sw_trig_mask: 1'b0, hw_trig_mask: 1'b0, loop_mode: 1'b0};
      sw_trig_tgl <= 1'b0;
      slope_a     <= 8'd16;
      slope_b     <= 8'd16;
      for (int c = 0; c < N_C; c++) begin
        trig_cfg[c] <= '{width: 8'd19, rf_sel: 1'b1, thr: ain_t'(1 << (AIN_W - 1))};
        fe_cfg[c]   <= '0;
      end
      for (int n = 0; n < N_B; n++) bias[n] <= '0;
    end else if (frame_strobe) begin
      if (addr == A_CTRL) begin
        tb_cfg <= '{smp_width: val[13:8], sw_trig_mask: val[2],
                    hw_trig_mask: val[1], loop_mode: val[0]};
      end
      if (addr == A_SWTRIG) sw_trig_tgl <= ~sw_trig_tgl;
      if (addr == A_RAMP) begin
        slope_a <= val[7:0];
        slope_b <= val[15:8];
      end
      for (int c = 0; c < N_C; c++) begin
        if (addr == A_TRIG + 16'(c))
          trig_cfg[c] <= '{width: val[31:24], rf_sel: val[16], thr: val[15:0]};
        if (addr == A_FE + 16'(c))
          fe_cfg[c] <= '{bypass: val[16], csa: val[15:0]};
      end
      for (int n = 0; n < N_B; n++)
        if (addr == A_BIAS + 16'(n)) bias[n] <= val[BIAS_W-1:0];
    end
  end
endmodule
