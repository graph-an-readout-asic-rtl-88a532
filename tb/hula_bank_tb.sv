// hula_bank_tb - checks one HULA bank at full size (16 channels x 16
// windows x 64 samples).
//
// The test walks the sample and window selects through all 1024 positions
// with a known input per channel and time, then plays a full conversion
// (counts 0..4095, Gray bus, ramp = 16 x count) into the bank and reads
// every cell back. A cell holding voltage code v must keep the first count
// c with 16c > v, i.e. min(v/16 + 1, 4095). It then samples new values and
// checks that the digitised data survive the sampling until the next
// conversion (after unlock) replaces them, and that a wider sample pulse
// leaves each cell holding the input of its last tracking clock.
module hula_bank_tb;
  import graph_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int NC = 16, NW = 16, NS = 64;

  logic clk_smp = 1'b0, clk_conv = 1'b0;
  logic [NS-1:0] smp_sel = '0;
  logic [NW-1:0] win_sel = '0;
  ain_t ain [NC];
  logic conv_active = 1'b0, unlock = 1'b0;
  data_t conv_gray = '0;
  ain_t ramp = '0;
  logic [3:0] rd_ch;
  logic [3:0] rd_win;
  logic [5:0] rd_smp;
  data_t rd_gray;
  int checks = 0, failures = 0;

  hula_bank dut (.*);

  always #4ns clk_smp = ~clk_smp;
  always #1ns clk_conv = ~clk_conv;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic int vin(input int seed, input int c, input int t);
    int v;
    v = (seed * 40503 + c * 7919 + t * 131 + (t * t) % 977) % 65536;
    if (t % 97 == 5) v = 65535;     // above the last ramp step
    if (t % 89 == 7) v = 0;
    return v;
  endfunction

  function automatic int expect_code(input int v);
    return (v / 16 + 1 > 4095) ? 4095 : v / 16 + 1;
  endfunction

  // Sample all positions; the pulse is `width` clocks wide.
  task automatic sample_all(input int seed, input int width);
    for (int t = 0; t < NW*NS + width - 1; t++) begin
      @(negedge clk_smp);
      smp_sel = '0;
      win_sel = '0;
      if (t < NW*NS) win_sel[t / NS] = 1'b1;
      for (int i = 0; i < width; i++)
        if (t - i >= 0 && (t - i) / NS == t / NS) smp_sel[(t - i) % NS] = 1'b1;
      for (int c = 0; c < NC; c++) ain[c] = ain_t'(vin(seed, c, t));
    end
    @(negedge clk_smp);
    smp_sel = '0;
    win_sel = '0;
  endtask

  task automatic convert(input int slope);
    @(negedge clk_conv);
    unlock = 1'b1;
    @(negedge clk_conv);
    unlock = 1'b0;
    conv_active = 1'b1;
    for (int c = 0; c < 4096; c++) begin
      conv_gray = data_t'(c ^ (c >> 1));
      ramp = ain_t'(c * slope);
      @(negedge clk_conv);
    end
    conv_active = 1'b0;
    conv_gray = '0;
    ramp = '0;
    @(negedge clk_conv);
  endtask

  // Read every cell; `lag` is the number of clocks the last tracking
  // instant lies after the sample's own position (pulse width - 1).
  task automatic read_all(input int seed, input int lag, input string what);
    int v, e, t;
    for (int c = 0; c < NC; c++)
      for (int w = 0; w < NW; w++)
        for (int s = 0; s < NS; s++) begin
          rd_ch = 4'(c); rd_win = 4'(w); rd_smp = 6'(s);
          #1ns;
          t = w*NS + s + lag;
          if (t >= (w + 1) * NS) t = (w + 1) * NS - 1;   // window ended first
          v = vin(seed, c, t);
          e = expect_code(v);
          check(rd_gray == data_t'(e ^ (e >> 1)), what);
        end
  endtask

  initial begin
    for (int c = 0; c < NC; c++) ain[c] = '0;
    sample_all(1, 1);
    convert(16);
    read_all(1, 0, "first conversion");
    sample_all(2, 1);
    read_all(1, 0, "data kept while sampling");
    convert(16);
    read_all(2, 0, "second conversion");
    sample_all(3, 3);
    convert(16);
    read_all(3, 2, "wide sample pulse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk_smp);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
