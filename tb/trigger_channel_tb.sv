// trigger_channel_tb - checks the trigger circuit model: it fires on the
// selected crossing of the threshold only, the pulse lasts (width+1) ns
// for several width codes, a second crossing inside the pulse does not
// stretch it, and a later crossing fires again.
module trigger_channel_tb;
  import graph_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  ain_t sig = 16'd10000, thr = 16'd30000;
  logic rf_sel = 1'b1;
  logic [7:0] width = 8'd19;
  logic out;
  int checks = 0, failures = 0;
  realtime t_rise, t_fall;

  trigger_channel dut (.*);

  always @(posedge out) t_rise = $realtime;
  always @(negedge out) t_fall = $realtime;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Move the signal from `from` to `to` at a known time; expect a pulse
  // of `ns` nanoseconds, or none when ns is 0.
  task automatic step(input int from, input int to, input int ns);
    realtime t0;
    sig = ain_t'(from);
    #400ns;
    check(out == 1'b0, "quiet before the step");
    t_rise = -1.0;
    t0 = $realtime;
    sig = ain_t'(to);
    #300ns;
    if (ns == 0) begin
      check(t_rise < 0.0 && out == 1'b0, "no pulse on the other edge");
    end else begin
      check(t_rise == t0, "fires at the crossing");
      check(t_fall - t_rise > real'(ns) - 0.05 && t_fall - t_rise < real'(ns) + 0.05,
            "pulse width");
      check(out == 1'b0, "self reset");
    end
  endtask

  initial begin
    #5ns;
    check(out == 1'b0, "low after power-up");
    // rising select
    rf_sel = 1'b1;
    width = 8'd19;  step(10000, 40000, 20);
    step(40000, 10000, 0);                 // falling crossing: nothing
    width = 8'd0;   step(10000, 40000, 1);
    width = 8'd99;  step(20000, 30000, 100);  // reaching the threshold counts
    width = 8'd255; step(10000, 40000, 256);
    step(10000, 29999, 0);                 // just below: nothing
    // falling select
    rf_sel = 1'b1;
    sig = 16'd50000;
    #400ns;
    rf_sel = 1'b0;
    #400ns;
    width = 8'd49;
    step(50000, 10000, 50);
    step(10000, 50000, 0);
    // re-crossing inside the pulse does not stretch it
    rf_sel = 1'b1;
    sig = 16'd10000;
    #400ns;
    t_rise = -1.0;
    sig = 16'd40000;
    #5ns sig = 16'd10000;
    #5ns sig = 16'd40000;
    #200ns;
    check(t_fall - t_rise > 49.95 && t_fall - t_rise < 50.05, "not retriggered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
