// trigger_section_tb - checks the trigger outputs: a pulse on channel c
// appears on LVDS output c/2 only and on the internal hardware trigger;
// two channels of a pair with different widths give the OR of their
// pulses; per-channel thresholds are independent.
module trigger_section_tb;
  import graph_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int NC = 16;
  ain_t sig [NC];
  trig_cfg_t cfg [NC];
  logic [NC-1:0] trig;
  logic [NC/2-1:0] lvds;
  logic hw_trig;
  int checks = 0, failures = 0;

  trigger_section dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    for (int c = 0; c < NC; c++) begin
      sig[c] = 16'd1000;
      cfg[c] = '{width: 8'd29, rf_sel: 1'b1, thr: ain_t'(20000 + 100*c)};
    end
    #300ns;
    check(lvds == '0 && !hw_trig && trig == '0, "quiet");
    for (int c = 0; c < NC; c++) begin
      sig[c] = ain_t'(20000 + 100*c);        // reaches its own threshold
      #10ns;
      check(trig == (NC'(1) << c), "only this channel fires");
      check(lvds == (8'(1) << (c/2)), "pair output");
      check(hw_trig, "internal trigger");
      #30ns;
      check(lvds == '0 && !hw_trig, "pulse over");
      sig[c] = 16'd1000;
      #100ns;
    end
    // channel just below its threshold stays quiet
    sig[5] = ain_t'(20000 + 100*5 - 1);
    #50ns;
    check(trig == '0 && lvds == '0, "below threshold");
    sig[5] = 16'd1000;
    #100ns;
    // a pair with different widths: OR of the two pulses
    cfg[6].width = 8'd9;     // 10 ns
    cfg[7].width = 8'd59;    // 60 ns
    #100ns;
    sig[6] = 16'd60000;
    sig[7] = 16'd60000;
    #5ns;
    check(lvds[3] && trig[6] && trig[7], "both fire");
    #15ns;
    check(lvds[3] && !trig[6] && trig[7], "short one over, output still high");
    #50ns;
    check(!lvds[3] && !hw_trig, "both over");
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
