// conversion_controller_tb - checks the Wilkinson conversion controller
// (with its ramp model) at the chip's 500 MHz conversion clock.
//
// A request lasting exactly 4096 conversion clocks (one bank period at a
// 125 MHz sampling clock) must give exactly 4096 active clocks presenting
// counts 0..4095, with the Gray bus equal to the count's Gray code and the
// ramp equal to count x slope (saturating at the top code), followed by one
// unlock pulse with counter and ramp back at zero. Also: a long request
// saturates the counter at 4095, a short one ends early, a steep slope
// saturates the ramp, and reset pulses unlock.
module conversion_controller_tb;
  import graph_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  logic clk = 1'b0, rst = 1'b1, convert = 1'b0;
  logic [7:0] slope = 8'd16;
  data_t gray, count;
  ain_t  ramp;
  logic  active, unlock;
  int checks = 0, failures = 0;

  conversion_controller dut (.*);

  always #1ns clk = ~clk;   // 500 MHz

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Hold convert high for n clocks, then check the whole conversion.
  task automatic run(input int n, input int sl);
    int act, latency, c_exp, unl;
    slope = 8'(sl);
    @(negedge clk);
    #0.3ns convert = 1'b1;    // asynchronous to clk
    fork
      begin
        repeat (n) @(posedge clk);
        #0.3ns convert = 1'b0;
      end
    join_none
    latency = 0;
    while (!active) begin
      @(negedge clk);
      latency++;
    end
    check(latency >= 2 && latency <= 4, "start latency");
    act = 0;
    while (active) begin
      c_exp = (act > 4095) ? 4095 : act;
      check(count == data_t'(c_exp), "count value");
      check(gray == data_t'(c_exp ^ (c_exp >> 1)), "gray code");
      check(ramp == ain_t'((c_exp * sl > 65535) ? 65535 : c_exp * sl) || act > 4095, "ramp");
      check(!unlock, "no unlock while active");
      act++;
      @(negedge clk);
    end
    check(act == n, "active length equals request length");
    check(unlock && count == 0, "unlock pulse after conversion");
    @(negedge clk);
    check(!unlock && ramp == 0 && count == 0 && gray == 0, "idle after conversion");
    repeat (5) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    check(unlock && !active, "unlock during reset");
    rst = 1'b0;
    repeat (3) @(negedge clk);
    check(!active && !unlock && count == 0, "idle");
    run(4096, 16);
    run(5000, 16);
    run(100, 16);
    run(4096, 20);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
