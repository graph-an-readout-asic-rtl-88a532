// graph_pkg_tb - checks the shared package: the memory geometry constants
// and the Gray-code functions used between the conversion counters, the
// cell memories and the read decoder.
//
// For every 12-bit value the bench compares bin2gray with a bitwise
// reference (bit i of the Gray code is b[i] xor b[i+1], the top bit passes
// through), checks that gray2bin inverts it, and checks that codes of
// consecutive counts differ in exactly one bit, which is what makes a cell
// that locks during a counter step at most one count off.
module graph_pkg_tb;
  import graph_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  function automatic data_t ref_gray(input data_t b);
    data_t g;
    g[DATA_W-1] = b[DATA_W-1];
    for (int i = 0; i < DATA_W - 1; i++) g[i] = b[i] ^ b[i+1];
    return g;
  endfunction

  initial begin
    data_t b, g, g_prev;
    check(N_BANK * N_WIN_BANK * N_SMP == 2048, "2048 samples per channel");
    check(N_CH == 16 && DATA_W == 12, "16 channels, 12-bit words");
    g_prev = bin2gray('0);
    for (int v = 0; v < (1 << DATA_W); v++) begin
      b = data_t'(v);
      g = bin2gray(b);
      check(g == ref_gray(b), $sformatf("bin2gray(%0d)", v));
      check(gray2bin(g) == b, $sformatf("gray2bin(bin2gray(%0d))", v));
      if (v > 0) check($countones(g ^ g_prev) == 1, $sformatf("single-bit step to %0d", v));
      g_prev = g;
    end
    // the counter stops at its last code, so no wrap step is checked
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
