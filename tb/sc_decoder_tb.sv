// sc_decoder_tb - checks the command decoder's register map: defaults
// after power-on reset, every register written through a frame strobe,
// untouched registers keeping their values, unknown addresses ignored,
// and the software-trigger toggle.
module sc_decoder_tb;
  import graph_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int NC = 16, NB = 8;
  logic sc_clk = 1'b0, por = 1'b1, frame_strobe = 1'b0;
  logic [63:0] frame = '0;
  tb_cfg_t tb_cfg;
  logic sw_trig_tgl;
  logic [7:0] slope_a, slope_b;
  trig_cfg_t trig_cfg [NC];
  fe_cfg_t fe_cfg [NC];
  logic [BIAS_W-1:0] bias [NB];
  int checks = 0, failures = 0;

  sc_decoder dut (.*);

  always #10ns sc_clk = ~sc_clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic write(input logic [15:0] a, input logic [31:0] v);
    @(negedge sc_clk);
    frame = {a, 16'hA5A5, v};
    frame_strobe = 1'b1;
    @(negedge sc_clk);
    frame_strobe = 1'b0;
    frame = {$urandom, $urandom};   // ignored without strobe
    @(negedge sc_clk);
  endtask

  initial begin
    logic t0;
    #25ns por = 1'b0;
    check(tb_cfg.loop_mode == 0 && tb_cfg.hw_trig_mask == 0 && tb_cfg.sw_trig_mask == 0 &&
          tb_cfg.smp_width == 1, "CTRL default");
    check(slope_a == 16 && slope_b == 16, "RAMP default");
    check(trig_cfg[3].thr == 16'h8000 && trig_cfg[3].rf_sel && trig_cfg[3].width == 19,
          "TRIG default");
    check(fe_cfg[9] == '0 && bias[2] == '0, "FE/BIAS default");
    repeat (3) @(negedge sc_clk);
    check(tb_cfg.smp_width == 1, "no write without strobe");

    write(16'h0000, 32'h0000_0507);
    check(tb_cfg.loop_mode && tb_cfg.hw_trig_mask && tb_cfg.sw_trig_mask &&
          tb_cfg.smp_width == 5, "CTRL write");
    write(16'h0002, 32'h0000_1122);
    check(slope_a == 8'h22 && slope_b == 8'h11, "RAMP write");
    for (int c = 0; c < NC; c++)
      write(16'h0010 + 16'(c), {8'(c + 1), 7'd0, 1'(c % 2), 16'(1000 * c + 7)});
    for (int c = 0; c < NC; c++)
      write(16'h0020 + 16'(c), {15'd0, 1'(c % 3 == 0), 16'(c * 4111)});
    for (int n = 0; n < NB; n++)
      write(16'h0030 + 16'(n), 32'(n * 301 + 5));
    for (int c = 0; c < NC; c++) begin
      check(trig_cfg[c].width == 8'(c + 1) && trig_cfg[c].rf_sel == 1'(c % 2) &&
            trig_cfg[c].thr == 16'(1000 * c + 7), "TRIG write");
      check(fe_cfg[c].bypass == 1'(c % 3 == 0) && fe_cfg[c].csa == 16'(c * 4111), "FE write");
    end
    for (int n = 0; n < NB; n++) check(bias[n] == 12'(n * 301 + 5), "BIAS write");
    write(16'h0040, 32'hFFFF_FFFF);   // unknown address
    write(16'h1000, 32'hFFFF_FFFF);
    check(tb_cfg.smp_width == 5 && slope_a == 8'h22 && bias[0] == 12'd5, "unknown ignored");
    t0 = sw_trig_tgl;
    write(16'h0001, 32'h0);
    check(sw_trig_tgl == !t0, "software trigger toggles");
    write(16'h0001, 32'h0);
    check(sw_trig_tgl == t0, "software trigger toggles again");
    check(tb_cfg.smp_width == 5, "SWTRIG leaves CTRL alone");
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
