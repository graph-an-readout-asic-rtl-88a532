// timebase_tb - self-checking test of the Timebase at full size
// (64 samples x 32 windows).
//
// A reference counter t (clocks since sampling began) predicts the sample
// pointer (t mod 64), the window (t / 64 mod 32), the one-hot window select,
// the sample pulse of the chosen width, AnB (high for windows 16..31) and
// the two conversion requests. Covered: continuous mode ignoring triggers,
// pulse widths 1 and 3, a loop-mode stop by software trigger (the
// revolution is finished, then 1024 clocks of bank-B conversion, then
// halt), a loop-mode stop by hardware trigger, and both masks.
module timebase_tb;
  import graph_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int NS = 64, NW = 32, REV = NS*NW, BANK = REV/2;

  logic clk = 1'b0, rst = 1'b1, hw_trig = 1'b0, sw_trig = 1'b0;
  tb_cfg_t cfg;
  logic [NS-1:0] smpl;
  logic [NW-1:0] win;
  logic [4:0] win_idx;
  logic [5:0] smp_idx;
  logic anb, convert_a, convert_b, running, halted;

  int checks = 0, failures = 0;

  timebase dut (.*);

  always #4ns clk = ~clk;   // 125 MHz

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic logic [NS-1:0] pulse(input int ptr, input int width);
    logic [NS-1:0] p = '0;
    for (int i = 0; i < width; i++) p[(ptr - i + NS) % NS] = 1'b1;
    return p;
  endfunction

  // Check one running cycle t after the first sample.
  task automatic check_running(input int t, input int width);
    int ptr, w;
    ptr = t % NS;
    w   = (t / NS) % NW;
    check(running && !halted, "running");
    check(smp_idx == 6'(ptr) && win_idx == 5'(w), "counters");
    check(win == (NW'(1) << w), "window one-hot");
    check(smpl == pulse(ptr, width), "sample pulse");
    check(anb == (w >= 16), "AnB");
    check(convert_a == (w >= 16) && convert_b == (w < 16), "convert requests");
  endtask

  task automatic restart(input bit loop_mode, input int width, input bit hwm, input bit swm);
    @(negedge clk);
    rst = 1'b1;
    cfg = '{smp_width: 6'(width), sw_trig_mask: swm, hw_trig_mask: hwm, loop_mode: loop_mode};
    repeat (3) @(negedge clk);
    check(!running && smpl == '0 && win == '0 && !convert_a && !convert_b, "idle in reset");
    rst = 1'b0;
    @(negedge clk);           // first edge after release: sample 0 of window 0
  endtask

  // Loop-mode run: trigger at clock trig_t, expect the stop after the
  // revolution and one bank of conversion.
  task automatic loop_run(input bit use_hw, input int trig_t);
    int t;
    for (t = 0; t < REV; t++) begin
      check_running(t, 1);
      if (t == trig_t) begin
        if (use_hw) hw_trig = 1'b1; else sw_trig = 1'b1;
      end
      @(negedge clk);
      hw_trig = 1'b0;
      sw_trig = 1'b0;
    end
    for (int k = 0; k < BANK; k++) begin
      check(!running && smpl == '0 && win == '0, "sampling stopped");
      check(convert_b && !convert_a && !halted, "last bank-B conversion");
      @(negedge clk);
    end
    check(halted && !convert_b && !convert_a && !running, "halted");
    repeat (50) @(negedge clk);
    check(halted && smpl == '0, "stays halted");
  endtask

  initial begin
    cfg = '{smp_width: 6'd1, sw_trig_mask: 1'b0, hw_trig_mask: 1'b0, loop_mode: 1'b0};

    // Continuous mode, width 1, two revolutions, triggers ignored.
    restart(1'b0, 1, 1'b0, 1'b0);
    for (int t = 0; t < 2*REV; t++) begin
      check_running(t, 1);
      sw_trig = (t == 100);
      hw_trig = (t == 3000);
      @(negedge clk);
    end
    sw_trig = 1'b0; hw_trig = 1'b0;

    // Continuous mode, width 3.
    restart(1'b0, 3, 1'b0, 1'b0);
    for (int t = 0; t < REV + 5; t++) begin
      check_running(t, 3);
      @(negedge clk);
    end

    // Loop mode, software trigger in bank A.
    restart(1'b1, 1, 1'b0, 1'b0);
    loop_run(1'b0, 500);

    // Loop mode, hardware trigger in bank B.
    restart(1'b1, 1, 1'b0, 1'b0);
    loop_run(1'b1, 1500);

    // Loop mode, both triggers masked: keeps revolving.
    restart(1'b1, 1, 1'b1, 1'b1);
    for (int t = 0; t < REV + 200; t++) begin
      check_running(t, 1);
      sw_trig = (t == 10);
      hw_trig = (t == 20);
      @(negedge clk);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
