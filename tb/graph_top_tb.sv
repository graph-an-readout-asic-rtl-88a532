// graph_top_tb - end-to-end test of the whole chip at its full size
// (16 channels, 2048 samples each), 125 MHz sampling, 500 MHz conversion,
// 62.5 MHz readout.
//
// The bench plays the FPGA. It configures the chip through the serial
// port, drives every channel with a known waveform (a baseline that varies
// per channel and sample, plus a photon-like pulse spread over channels
// 4..11, plus full-scale spikes on channel 15), watches the LVDS triggers
// with an 11-bit sample counter started with the chip, and reads data back
// through the serial-address readout. Every word read is compared with the
// Wilkinson code of the voltage the cell sampled: the first count c with
// 16c above it, or 4095 when the ramp never passes it.
//
// Runs:
//  1. Continuous mode. An event in the first revolution fires the triggers;
//     the chip keeps running. While bank A samples the second revolution,
//     the region of interest (6 samples x 8 channels around the latched
//     trigger time) and a 256-word stream are read from bank A, which must
//     still hold the first revolution. The 48 words of the event must come
//     out on 48 consecutive read clocks (the 1 M events/s target).
//  2. Loop mode with the hardware trigger: an event in bank B stops the
//     chip after the revolution and the last conversion; the whole memory
//     (32768 words) is read in one stream from address zero.
//  3. Loop mode with the hardware trigger masked and a software trigger:
//     the event does not stop the chip; the software trigger, sent in the
//     second revolution, does. Channels 0 and 15 are read back.
//
// Each mechanism is counted and must occur: bank switches (AnB), conversions
// of both banks, trigger pulses, reads while the bank is resampled,
// overlapped address loading, codes at 4095, loop stops by hardware and
// software trigger, a masked trigger ignored, and halts.
module graph_top_tb;
  import graph_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int NC = 16, NS = 64, NWIN = 32, REV = NWIN*NS, BANKT = REV/2;

  logic clk_smp = 1'b0, clk_conv = 1'b0, rd_clk = 1'b0;
  logic rst = 1'b1, por = 1'b1;
  ain_t ain [NC];
  logic anb, halted;
  logic rd_ser_ch = 1'b0, rd_ser_win = 1'b0, rd_ser_smp = 1'b0, rd_load = 1'b0;
  data_t dout;
  logic dout_valid;
  logic [NC/2-1:0] trig_lvds;
  logic sc_clk = 1'b0, sc_cs_n = 1'b1, sc_din = 1'b0, sc_dout;
  fe_cfg_t fe_cfg [NC];
  logic [BIAS_W-1:0] bias [N_BIAS];

  graph_top dut (.*);

  always #4ns clk_smp = ~clk_smp;   // 125 MHz
  always #1ns clk_conv = ~clk_conv; // 500 MHz
  always #8ns rd_clk = ~rd_clk;     // 62.5 MHz

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------- input waveforms ----------------
  int ev_t = -1000;          // sample index of the current event's start
  int run_id = 0;

  function automatic int vin(input int c, input int t);
    int v, d, amp, dt;
    v = 20000 + (c * 977 + t * 131 + run_id * 517) % 4001;
    d = (2*c > 15) ? 2*c - 15 : 15 - 2*c;              // 1 .. 15
    amp = 36000 - 4000*d;
    dt = t - ev_t;
    if (amp > 0 && dt >= 0 && dt <= 9)
      v += (dt <= 3) ? amp * dt / 3 : amp * (9 - dt) / 6;
    if (c == 15 && t % 251 == 7) v = 65535;            // beyond the ramp
    return v;
  endfunction

  function automatic int code(input int v);
    return (v / 16 + 1 > 4095) ? 4095 : v / 16 + 1;
  endfunction

  // t_cur: index of the sample taken in the current sampling clock
  logic hold_rst = 1'b1;
  int   t_cur = -2;
  always @(negedge clk_smp) begin
    if (hold_rst) begin
      rst <= 1'b1;
      t_cur = -2;
    end else begin
      rst <= 1'b0;
      t_cur++;
    end
    for (int c = 0; c < NC; c++) ain[c] <= ain_t'(vin(c, (t_cur < 0) ? 0 : t_cur));
  end

  // ---------------- mechanism counters ----------------
  int n_anb = 0, n_conv_a = 0, n_conv_b = 0, n_trig = 0, n_halt = 0;
  int n_read_resample = 0, n_overlap_load = 0, n_sat = 0;
  int n_loop_hw = 0, n_loop_sw = 0, n_masked = 0;
  int t_trig = -1;          // the FPGA's 11-bit counter latched on a trigger

  always @(anb) if (!rst) n_anb++;
  always @(posedge dut.u_core.active_a) n_conv_a++;
  always @(posedge dut.u_core.active_b) n_conv_b++;
  always @(posedge halted) n_halt++;
  always @(posedge (|trig_lvds)) begin
    n_trig++;
    if (t_trig < 0) t_trig = t_cur % 2048;
  end

  // ---------------- slow control ----------------
  task automatic sc_write(input logic [15:0] a, input logic [31:0] v);
    logic [63:0] f;
    f = {a, 16'h0000, v};
    sc_cs_n = 1'b0;
    #20ns;
    for (int i = 63; i >= 0; i--) begin
      sc_din = f[i];
      #20ns sc_clk = 1'b1;
      #20ns sc_clk = 1'b0;
    end
    #20ns sc_cs_n = 1'b1;
    #40ns;
  endtask

  // ---------------- readout (FPGA side) ----------------
  int  m_addr = 0;
  bit  m_loaded = 0, m_valid = 0;
  int  m_exp;
  int  known_rev_t0 = 0;      // cells hold samples t0 + (window*64 + sample)
  bit  only_bank_a = 0;
  int  n_words = 0;
  int  n_rdclk = 0;           // read clocks since the start
  int  ev_first_clk, ev_last_clk;

  function automatic int cell_expect(input int a);
    int ch, w, s;
    ch = a / 2048;
    w  = (a / 64) % 32;
    s  = a % 64;
    if (only_bank_a && w >= 16) return -1;
    return code(vin(ch, known_rev_t0 + w*64 + s));
  endfunction

  task automatic rd_cycle(input bit bc, input bit bw, input bit bs, input bit ld, input int base);
    rd_ser_ch = bc; rd_ser_win = bw; rd_ser_smp = bs; rd_load = ld;
    @(posedge rd_clk);
    n_rdclk++;
    m_exp   = m_loaded ? cell_expect(m_addr) : -1;
    m_valid = m_loaded;
    if (ld && m_loaded) n_overlap_load++;
    m_addr  = ld ? base : (m_addr + 1) % 32768;
    m_loaded = m_loaded | ld;
    @(negedge rd_clk);
    if (m_valid && m_exp >= 0) begin
      check(dout_valid, "dout_valid");
      check(dout == data_t'(m_exp), "read word");
      if (m_exp == 4095) n_sat++;
      n_words++;
      if (n_words == 1)  ev_first_clk = n_rdclk;
      if (n_words == 48) ev_last_clk  = n_rdclk;
      if (only_bank_a && anb == 1'b0 && !halted) n_read_resample++;
    end
  endtask

  // shift one address in (LOAD with its last bit)
  task automatic rd_address(input int ch, input int w, input int s);
    int base;
    base = ch*2048 + w*64 + s;
    for (int i = 5; i >= 0; i--) rd_cycle(ch[i], w[i], s[i], i == 0, base);
  endtask

  task automatic rd_stream(input int n);
    for (int k = 0; k < n; k++) rd_cycle(1'b0, 1'b0, 1'b0, 1'b0, 0);
  endtask

  task automatic wait_smp(input int t);
    while (t_cur < t) @(negedge clk_smp);
  endtask

  // ---------------- the runs ----------------
  initial begin
    int tt;
    for (int c = 0; c < NC; c++) ain[c] = '0;
    #30ns por = 1'b0;
    #100ns;
    // configuration: ramps, thresholds (rising), front-end and bias words
    sc_write(16'h0002, 32'h0000_1010);
    for (int c = 0; c < NC; c++) sc_write(16'h0010 + 16'(c), {8'd29, 7'd0, 1'b1, 16'd40000});
    sc_write(16'h001F, 32'h0);        // channel 15 (spikes): falling below 0, never fires
    for (int c = 0; c < NC; c++) sc_write(16'h0020 + 16'(c), {15'd0, 1'(c == 3), 16'(c + 100)});
    sc_write(16'h0031, 32'd1234);
    check(fe_cfg[3].bypass && !fe_cfg[4].bypass && fe_cfg[7].csa == 16'd107, "front-end settings");
    check(bias[1] == 12'd1234, "bias DAC code");

    // ===== run 1: continuous mode =====
    run_id = 1;
    ev_t = 600;                       // bank A, window 9
    sc_write(16'h0000, 32'h0000_0100); // continuous, width 1
    repeat (4) @(negedge clk_smp);
    hold_rst = 1'b0;
    wait_smp(1100);
    check(t_trig >= ev_t && t_trig <= ev_t + 3, "trigger time latched by the counter");
    wait_smp(2100);                   // bank A now samples revolution 2
    check(dut.running && anb == 1'b0, "continuous mode ignored the trigger");
    known_rev_t0 = 0;
    only_bank_a = 1;
    // region of interest: 6 samples x channels 4..11 from the trigger time
    tt = t_trig - 1;
    for (int c = 4; c <= 11; c++) rd_address(c, tt / 64, tt % 64);
    rd_stream(6);
    // 256 consecutive words of channel 3 from window 2, crossing windows
    rd_address(3, 2, 10);
    rd_stream(255);
    check(t_cur < 3072, "bank A read finished before its next conversion");
    $display("run 1: %0d words checked", n_words);
    // 8 x 6 region words, 6 more of the last region while the next address
    // is shifted in, then 255 streamed
    check(n_words == 48 + 6 + 255, "words read in run 1");
    // Event readout rate: the 48 words of one event (6 samples x 8
    // channels) arrive on 48 consecutive read clocks, 768 ns at 62.5 MHz,
    // i.e. 1.3 M events/s, above the required 1 M events/s.
    check(ev_last_clk - ev_first_clk == 47, "one event read in 48 read clocks");
    $display("event of 48 words read in %0d read clocks", ev_last_clk - ev_first_clk + 1);

    // ===== run 2: loop mode, hardware trigger =====
    @(negedge clk_smp);
    hold_rst = 1'b1;
    m_loaded = 0;
    t_trig = -1;
    run_id = 2;
    ev_t = 1500;                      // bank B, window 23
    sc_write(16'h0000, 32'h0000_0101); // loop mode
    repeat (4) @(negedge clk_smp);
    hold_rst = 1'b0;
    wait (halted);
    $display("loop stop (hardware trigger) seen at sample %0d", t_cur);
    check(t_cur >= REV + BANKT - 2 && t_cur <= REV + BANKT + 2, "loop stop after revolution and conversion");
    n_loop_hw++;
    check(t_trig >= ev_t && t_trig <= ev_t + 3, "trigger time, loop run");
    known_rev_t0 = 0;
    only_bank_a = 0;
    n_words = 0;
    rd_address(0, 0, 0);              // the whole memory from address zero
    rd_stream(32768);
    check(n_words == 32768, "whole memory read");

    // ===== run 3: loop mode, hardware trigger masked, software trigger =====
    @(negedge clk_smp);
    hold_rst = 1'b1;
    m_loaded = 0;
    t_trig = -1;
    run_id = 3;
    ev_t = 300;
    sc_write(16'h0000, 32'h0000_0103); // loop mode, hardware trigger masked
    repeat (4) @(negedge clk_smp);
    hold_rst = 1'b0;
    wait_smp(REV + 100);
    check(dut.running && !halted && t_trig >= 0, "masked trigger did not stop loop mode");
    if (dut.running && t_trig >= 0) n_masked++;
    ev_t = REV + 400;                 // an event in the second revolution
    wait_smp(REV + 600);
    sc_write(16'h0001, 32'h0);        // software trigger
    wait (halted);
    $display("loop stop (software trigger) seen at sample %0d", t_cur);
    check(t_cur >= 2*REV + BANKT - 2 && t_cur <= 2*REV + BANKT + 2, "software-triggered stop");
    n_loop_sw++;
    known_rev_t0 = REV;
    n_words = 0;
    rd_address(0, 0, 0);
    rd_stream(2048);
    rd_address(15, 0, 0);             // six words of channel 1 meanwhile
    rd_stream(2048);
    check(n_words == 2048 + 6 + 2048, "channels 0 and 15 read");

    // ===== mechanisms =====
    check(n_anb >= 4, "bank switches");
    check(n_conv_a >= 3 && n_conv_b >= 3, "conversions of both banks");
    check(n_trig >= 2, "trigger pulses");
    check(n_read_resample > 0, "read while the bank is resampled");
    check(n_overlap_load > 0, "address loaded while streaming");
    check(n_sat > 0, "codes at full scale");
    check(n_loop_hw == 1 && n_loop_sw == 1 && n_masked == 1, "loop stops and mask");
    check(n_halt == 2, "halts");
    $display("mechanisms: anb=%0d conv_a=%0d conv_b=%0d trig=%0d read_resample=%0d overlap_load=%0d sat=%0d loop_hw=%0d loop_sw=%0d masked=%0d halt=%0d",
             n_anb, n_conv_a, n_conv_b, n_trig, n_read_resample, n_overlap_load, n_sat,
             n_loop_hw, n_loop_sw, n_masked, n_halt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
