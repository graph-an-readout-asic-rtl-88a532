// readout_tb - checks the data readout at full address size.
//
// A model memory answers the read bus with the Gray code of a known 12-bit
// function of the cell address. The test shifts 6-bit channel, window and
// sample addresses in MSB first, pulses LOAD together with the sixth bit,
// and checks that dout streams the binary words of consecutive cells in
// {channel, window, sample} order starting one clock after LOAD, while the
// next address is shifted in: six words per six-bit address, as in the
// pulse-shape extraction use. Also covered: crossing window and channel
// boundaries, wrapping from the last cell to the first, ignored upper
// address bits, and dout_valid.
module readout_tb;
  import graph_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  logic clk = 1'b0, rst = 1'b1;
  logic ser_ch = 1'b0, ser_win = 1'b0, ser_smp = 1'b0, load = 1'b0;
  logic [3:0] rd_ch;
  logic [4:0] rd_win;
  logic [5:0] rd_smp;
  data_t rd_gray, dout;
  logic dout_valid;
  int checks = 0, failures = 0;

  readout dut (.*);

  always #8ns clk = ~clk;   // 62.5 MHz

  function automatic int cell_val(input int a);
    return (a * 2654435761) >>> 7 & 12'hFFF;
  endfunction

  logic [14:0] bus_addr;
  int bv;
  assign bus_addr = {rd_ch, rd_win, rd_smp};
  assign bv = cell_val(int'(bus_addr));
  assign rd_gray = data_t'(bv ^ (bv >> 1));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // reference: address of the cell being streamed, and the word expected
  int  m_addr = 0, m_exp = 0;
  bit  m_loaded = 0, m_valid = 0;

  // One read clock: drive bits (and load), then check the output.
  task automatic cycle(input bit bc, input bit bw, input bit bs, input bit ld, input int base);
    ser_ch = bc; ser_win = bw; ser_smp = bs; load = ld;
    @(posedge clk);
    m_exp   = cell_val(m_addr);
    m_valid = m_loaded;
    m_addr  = ld ? base : (m_addr + 1) % 32768;
    m_loaded = m_loaded | ld;
    @(negedge clk);
    check(dout_valid == m_valid, "dout_valid");
    if (m_valid) check(dout == data_t'(m_exp), "streamed word");
    if (m_loaded) check(int'(bus_addr) == m_addr, "cell address");
  endtask

  // Shift a 6/6/6-bit address (LOAD with the last bit), then stream
  // `extra` more words without loading.
  task automatic access(input int ch6, input int win6, input int smp6, input int extra);
    int base;
    base = (ch6 % 16) * 2048 + (win6 % 32) * 64 + (smp6 % 64);
    for (int i = 5; i >= 0; i--)
      cycle(ch6[i], win6[i], smp6[i], i == 0, base);
    for (int k = 0; k < extra; k++) cycle(1'b0, 1'b0, 1'b0, 1'b0, 0);
  endtask

  initial begin
    @(negedge clk);
    @(negedge clk);
    rst = 1'b0;
    @(negedge clk);
    check(!dout_valid, "not valid before the first load");
    access(0, 1, 1, 0);        // Ch0, Win1, Smp1
    access(0, 0, 0, 0);        // Ch0, Win0, Smp0, overlapping six words of the first
    access(0, 0, 0, 12);       // then twelve more
    access(2, 5, 60, 10);      // across a window boundary
    access(3, 31, 62, 10);     // across a channel boundary
    access(15, 31, 63, 4);     // wrap to the first cell
    access(6'h13, 6'h25, 7, 3);// upper address bits ignored
    for (int n = 0; n < 50; n++)
      access(int'($urandom_range(63)), int'($urandom_range(63)), int'($urandom_range(63)),
             int'($urandom_range(8)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
