// timebase - sampling sequencer of the HULA memory.
//
// A self-looped 64-bit shift register circulates a sample-actuation pulse
// of programmable width (smp_width sampling clocks, 0 counts as 1); every
// bit of it drives one sample row of all windows (smpl). Each time the
// leading edge of the pulse wraps from the last sample to sample 0, a 5-bit
// window counter steps on; its one-hot decode (win) picks the window that
// samples. Windows 0..15 form bank A, 16..31 bank B. A cell tracks its
// input while both its sample bit and its window bit are high.
//
// anb is the counter's top bit: 0 while bank A samples, 1 while bank B
// samples. convert_a / convert_b request the Wilkinson conversion of the
// bank that is not sampling (convert_a = anb, convert_b = !anb while
// running), so each request lasts one bank period (16 x 64 sampling clocks).
//
// Modes: continuous (loop_mode = 0) revolves for ever and ignores triggers.
// In loop mode the first unmasked trigger (hw_trig level or sw_trig pulse,
// both synchronous to clk) lets the sampling finish the revolution in
// progress; sampling then stops, convert_b stays high for one more bank
// period so bank B is digitised too, and the block halts (halted = 1) with
// the whole memory digitised. Only rst restarts it.
//
// Timing: rst is synchronous and active high; while it is high nothing
// samples and both conversion requests are low. The first clock edge after
// rst falls addresses sample 0 of window 0, then one sample per clock.
//
// From the paper: the 64-bit looped shift register, the programmable pulse
// width, the 5-bit window counter, AnB, Convert A/B, the two modes and the
// trigger masks. This design's own choices: the synchronous active-high
// reset, the exact place where loop mode stops, and that cells near a
// window's end stop tracking early when the pulse is wider than one clock
// (the window counter follows the pulse's leading edge).
module timebase
  import graph_pkg::*;
#(
  parameter int unsigned N_S = N_SMP,            // samples per window
  parameter int unsigned N_W = N_BANK*N_WIN_BANK // windows in both banks
) (
  input  logic            clk,       // sampling clock
  input  logic            rst,       // RST, active high, synchronous
  input  tb_cfg_t         cfg,
  input  logic            hw_trig,   // internal hardware trigger (synchronised)
  input  logic            sw_trig,   // software trigger pulse (synchronised)
  output logic [N_S-1:0]  smpl,      // sample row actuation
  output logic [N_W-1:0]  win,       // window select, one-hot
  output logic [$clog2(N_W)-1:0] win_idx,  // window counter value
  output logic [$clog2(N_S)-1:0] smp_idx,  // position of the pulse's leading edge
  output logic            anb,       // 0: bank A sampling, 1: bank B sampling
  output logic            convert_a, // conversion request bank A
  output logic            convert_b, // conversion request bank B
  output logic            running,   // sampling in progress
  output logic            halted     // loop mode finished, memory digitised
);
  timeunit 1ns;
  timeprecision 1ps;
  localparam int unsigned WW = $clog2(N_W);
  localparam int unsigned SW = $clog2(N_S);
  localparam int unsigned BANK_PERIOD = N_S * N_W / 2;
  localparam int unsigned PW = $clog2(BANK_PERIOD + 1);

  typedef enum logic [2:0] {
    ST_IDLE,      // held in reset
    ST_RUN,       // revolving, trigger armed in loop mode
    ST_FINISH,    // loop mode triggered: finishing the revolution
    ST_LAST_CONV, // sampling stopped, bank B being converted
    ST_HALT       // loop mode complete
  } state_e;

  state_e           state;
  logic [N_S-1:0]   sreg;
  logic [PW-1:0]    conv_cnt;
  logic             trig;

  // Starting pattern: leading edge at sample 0, the tail behind it.
  function automatic logic [N_S-1:0] init_pattern(input logic [5:0] width);
    logic [N_S-1:0] p;
    int unsigned    w;
    w = (width == 6'd0) ? 1 : int'(width);
    if (w > N_S) w = N_S;
    p = '0;
    for (int unsigned i = 0; i < N_S; i++)
      if (i < w) p[(N_S - i) % N_S] = 1'b1;
    return p;
  endfunction

  assign trig = (hw_trig & ~cfg.hw_trig_mask) | (sw_trig & ~cfg.sw_trig_mask);

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= ST_IDLE;
      sreg     <= init_pattern(cfg.smp_width);
      smp_idx  <= '0;
      win_idx  <= '0;
      conv_cnt <= '0;
    end else begin
      unique case (state)
        ST_IDLE: state <= ST_RUN;
        ST_RUN, ST_FINISH: begin
          sreg    <= {sreg[N_S-2:0], sreg[N_S-1]};
          smp_idx <= (smp_idx == SW'(N_S - 1)) ? '0 : smp_idx + 1'b1;
          if (smp_idx == SW'(N_S - 1))
            win_idx <= (win_idx == WW'(N_W - 1)) ? '0 : win_idx + 1'b1;
          if (state == ST_RUN && cfg.loop_mode && trig)
            state <= ST_FINISH;
          // The last sample of the revolution is being taken now.
          if (smp_idx == SW'(N_S - 1) && win_idx == WW'(N_W - 1) &&
              (state == ST_FINISH || (cfg.loop_mode && trig))) begin
            state    <= ST_LAST_CONV;
            conv_cnt <= '0;
          end
        end
        ST_LAST_CONV: begin
          conv_cnt <= conv_cnt + 1'b1;
          if (conv_cnt == PW'(BANK_PERIOD - 1)) state <= ST_HALT;
        end
        ST_HALT: state <= ST_HALT;
        default: state <= ST_IDLE;
      endcase
    end
  end

  assign running   = (state == ST_RUN) || (state == ST_FINISH);
  assign halted    = (state == ST_HALT);
  assign smpl      = running ? sreg : '0;
  assign anb       = win_idx[WW-1];
  assign convert_a = running & anb;
  assign convert_b = (running & ~anb) | (state == ST_LAST_CONV);

  always_comb begin
    win = '0;
    if (running) win[win_idx] = 1'b1;
  end

  // The two conversion requests never overlap.
  a_conv_excl: assert property (@(posedge clk) !(convert_a && convert_b));
  // At most one window samples at a time.
  a_win_onehot: assert property (@(posedge clk) $onehot0(win));

endmodule
