// sc_receiver_tb - checks the slow-control receiver: complete 64-bit
// frames are delivered (MSB first) on the edge of their last bit, a
// partial frame is dropped when the select rises, two frames sent without
// releasing the select are both delivered, and sc_dout echoes the bits
// sent 64 clocks earlier. Before every clock edge the bench checks that
// frame_strobe is high only for the 64th bit of a frame.
module sc_receiver_tb;
  timeunit 1ns;
  timeprecision 1ps;

  logic sc_clk = 1'b0, sc_cs_n = 1'b1, sc_din = 1'b0, por = 1'b0;
  logic sc_dout, frame_strobe;
  logic [63:0] frame;
  logic [63:0] got [$];
  logic [63:0] sent [$];
  int checks = 0, failures = 0;

  sc_receiver dut (.*);

  always @(posedge sc_clk) if (frame_strobe) got.push_back(frame);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic send_bits(input logic [63:0] f, input int n);
    for (int i = 63; i > 63 - n; i--) begin
      sc_din = f[i];
      #10ns;
      // the strobe marks only the edge that carries the 64th bit
      check(frame_strobe == (i == 0), "strobe position");
      sc_clk = 1'b1;
      #10ns sc_clk = 1'b0;
    end
  endtask

  initial begin
    logic [63:0] f, g;
    logic [63:0] echo;
    #1ns por = 1'b1;
    #10ns por = 1'b0;
    #20ns;
    // single frames
    for (int k = 0; k < 50; k++) begin
      f = {$urandom, $urandom};
      sc_cs_n = 1'b0;
      #10ns;
      send_bits(f, 64);
      #10ns sc_cs_n = 1'b1;
      #20ns;
      check(got.size() == 1 && got[0] == f, "frame delivered");
      got.delete();
    end
    // partial frame dropped
    sc_cs_n = 1'b0;
    send_bits(64'hDEAD_BEEF_0123_4567, 40);
    sc_cs_n = 1'b1;
    #20ns;
    check(got.size() == 0, "partial frame dropped");
    f = 64'h0123_4567_89AB_CDEF;
    sc_cs_n = 1'b0;
    send_bits(f, 64);
    sc_cs_n = 1'b1;
    #20ns;
    check(got.size() == 1 && got[0] == f, "frame after a dropped one");
    got.delete();
    // back to back, with echo check
    f = {$urandom, $urandom};
    g = {$urandom, $urandom};
    sc_cs_n = 1'b0;
    send_bits(f, 64);
    echo = '0;
    for (int i = 63; i >= 0; i--) begin
      sc_din = g[i];
      #10ns;
      echo[i] = sc_dout;
      sc_clk = 1'b1;
      #10ns sc_clk = 1'b0;
    end
    sc_cs_n = 1'b1;
    #20ns;
    check(got.size() == 2 && got[0] == f && got[1] == g, "back-to-back frames");
    check(echo == f, "echo of the previous frame");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
