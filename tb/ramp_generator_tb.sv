// ramp_generator_tb - checks the ramp model: zero while stopped, a rise of
// `slope` codes per clock while running, saturation at the top code, and a
// return to zero when stopped.
module ramp_generator_tb;
  import graph_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  logic clk = 1'b0, run = 1'b0;
  logic [7:0] slope;
  ain_t ramp;
  int checks = 0, failures = 0;

  ramp_generator dut (.*);
  always #1ns clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    int sl [3] = '{16, 3, 200};
    foreach (sl[k]) begin
      slope = 8'(sl[k]);
      run = 1'b0;
      repeat (2) @(negedge clk);
      check(ramp == 0, "zero when stopped");
      run = 1'b1;
      for (int i = 0; i < 4200; i++) begin
        @(negedge clk);
        check(ramp == ain_t'(((i + 1) * sl[k] > 65535) ? 65535 : (i + 1) * sl[k]), "ramp step");
      end
    end
    run = 1'b0;
    @(negedge clk);
    check(ramp == 0, "reset to zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
