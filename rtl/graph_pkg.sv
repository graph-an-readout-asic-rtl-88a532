// graph_pkg - constants, types and Gray-code helpers shared by the GRAPH
// readout chip.
//
// The sampling memory (HULA) holds, for each of 16 channels, 2 banks of
// 16 windows of 64 samples: 2048 samples per channel, 12 bits each. These
// numbers are the chip's own. Analog voltages (channel inputs, the
// Wilkinson ramp, trigger thresholds) are carried through the digital model
// as unsigned 16-bit codes, 0 = ground and 65535 = top of the usable input
// range; that representation is a modelling choice, not part of the chip.
// Configuration types below follow this design's own register map.
// Some constants are only read by the modules' parameter defaults, so a
// linter run on the package alone reports them as unused.
package graph_pkg;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned N_CH       = 16;  // input channels
  localparam int unsigned N_BANK     = 2;   // banks A and B
  localparam int unsigned N_WIN_BANK = 16;  // windows per bank
  localparam int unsigned N_SMP      = 64;  // samples per window
  localparam int unsigned DATA_W     = 12;  // Wilkinson counter / memory width
  localparam int unsigned AIN_W      = 16;  // width of an analog voltage code
  localparam int unsigned N_BIAS     = 8;   // bias DAC codes held by slow control
  localparam int unsigned BIAS_W     = 12;  // width of one bias DAC code

  typedef logic [AIN_W-1:0]  ain_t;   // analog voltage as a code
  typedef logic [DATA_W-1:0] data_t;  // one digitised sample

  // Per-channel trigger settings (threshold DAC, edge select, width DAC).
  typedef struct packed {
    logic [7:0]       width;    // pulse width code: (width+1) ns
    logic             rf_sel;   // 1: fire when the input rises above thr
    logic [AIN_W-1:0] thr;      // threshold voltage code
  } trig_cfg_t;

  // Per-channel front-end settings (amplifier options and bypass switch).
  typedef struct packed {
    logic        bypass;   // route the input around the amplifier
    logic [15:0] csa;      // amplifier gain/shaping option bits
  } fe_cfg_t;

  // Timebase settings.
  typedef struct packed {
    logic [5:0] smp_width;     // sample pulse width in sampling clocks (0 = 1)
    logic       sw_trig_mask;  // 1: ignore the software trigger
    logic       hw_trig_mask;  // 1: ignore the channel triggers
    logic       loop_mode;     // 0: continuous, 1: loop
  } tb_cfg_t;

  function automatic data_t bin2gray(input data_t b);
    return b ^ (b >> 1);
  endfunction

  function automatic data_t gray2bin(input data_t g);
    data_t b;
    b[DATA_W-1] = g[DATA_W-1];
    for (int i = DATA_W - 2; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

endpackage
