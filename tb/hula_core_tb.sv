// hula_core_tb - checks the double-buffered HULA core at full size
// (16 channels, 2 x 16 windows, 64 samples) with the chip's clock ratio,
// 125 MHz sampling and 500 MHz conversion.
//
// The test plays the Timebase's pattern: bank A samples while bank B
// converts, then bank B samples while bank A converts (each request lasts
// 1024 sampling clocks = 4096 conversion clocks), then bank A samples new
// data while bank B converts. Reading the whole memory at that point must
// give the previous revolution's data in bank A (the new samples are not
// yet converted) and in bank B, each digitised with its own bank's ramp
// slope: the stored code of a voltage v is the first count c with
// c x slope > v, or 4095. A final conversion of bank A must then give the
// new data.
module hula_core_tb;
  import graph_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int NC = 16, NWB = 16, NS = 64, BANKT = NWB*NS;
  localparam int SLOPE_A = 16, SLOPE_B = 15;

  logic clk_smp = 1'b0, clk_conv = 1'b0, conv_rst = 1'b1;
  logic [NS-1:0] smp_sel = '0;
  logic [2*NWB-1:0] win_sel = '0;
  ain_t ain [NC];
  logic convert_a = 1'b0, convert_b = 1'b0;
  logic [7:0] slope_a = 8'(SLOPE_A), slope_b = 8'(SLOPE_B);
  logic active_a, active_b;
  logic [3:0] rd_ch;
  logic [4:0] rd_win;
  logic [5:0] rd_smp;
  data_t rd_gray;
  int checks = 0, failures = 0;
  int n_active_a = 0, n_active_b = 0;

  hula_core dut (.*);

  always #4ns clk_smp = ~clk_smp;
  always #1ns clk_conv = ~clk_conv;
  always @(posedge clk_conv) begin
    if (active_a) n_active_a++;
    if (active_b) n_active_b++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic int vin(input int seed, input int c, input int t);
    return (seed * 20011 + c * 4099 + t * 977 + (t * c) % 313) % 65536;
  endfunction

  function automatic int code(input int v, input int slope);
    for (int c = 0; c < 4096; c++)
      if (((c * slope > 65535) ? 65535 : c * slope) > v) return c;
    return 4095;
  endfunction

  // Sample one bank (0 = A, 1 = B) while the other bank's request is high.
  task automatic sample_bank(input int bank, input int seed);
    for (int t = 0; t < BANKT; t++) begin
      @(negedge clk_smp);
      convert_a = (bank == 1);
      convert_b = (bank == 0);
      smp_sel = '0;
      win_sel = '0;
      smp_sel[t % NS] = 1'b1;
      win_sel[bank*NWB + t / NS] = 1'b1;
      for (int c = 0; c < NC; c++) ain[c] = ain_t'(vin(seed, c, bank*BANKT + t));
    end
  endtask

  task automatic read_bank(input int bank, input int seed, input int slope, input string what);
    int e;
    for (int c = 0; c < NC; c++)
      for (int w = 0; w < NWB; w++)
        for (int s = 0; s < NS; s++) begin
          rd_ch = 4'(c); rd_win = 5'(bank*NWB + w); rd_smp = 6'(s);
          #1ns;
          e = code(vin(seed, c, bank*BANKT + w*NS + s), slope);
          check(rd_gray == data_t'(e ^ (e >> 1)), what);
        end
  endtask

  initial begin
    for (int c = 0; c < NC; c++) ain[c] = '0;
    repeat (4) @(negedge clk_conv);
    conv_rst = 1'b0;
    sample_bank(0, 1);          // A samples, B converts (nothing yet)
    sample_bank(1, 1);          // B samples, A converts
    sample_bank(0, 2);          // A samples anew, B converts
    @(negedge clk_smp);
    convert_a = 1'b0;
    convert_b = 1'b0;
    smp_sel = '0;
    win_sel = '0;
    repeat (8) @(negedge clk_conv);
    check(n_active_a == BANKT*4, "bank A conversion lasts 4096 clocks");
    check(n_active_b == 2*BANKT*4, "bank B conversions last 4096 clocks each");
    read_bank(0, 1, SLOPE_A, "bank A holds the previous revolution");
    read_bank(1, 1, SLOPE_B, "bank B digitised with its own slope");
    @(negedge clk_smp);
    convert_a = 1'b1;
    repeat (BANKT) @(negedge clk_smp);
    convert_a = 1'b0;
    repeat (8) @(negedge clk_conv);
    check(n_active_a == 2*BANKT*4, "second bank A conversion lasts 4096 clocks");
    read_bank(0, 2, SLOPE_A, "bank A after its next conversion");
    read_bank(1, 1, SLOPE_B, "bank B untouched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk_smp);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
