// readout - the independent memory read system.
//
// Three 6-bit serial receivers (channel, window, sample) shift in an address
// MSB first, one bit each per rising edge of the read clock. When LOAD is
// high at a rising edge, the address formed by the registers together with
// the bit arriving on that same edge is loaded as an offset and the read
// counter restarts at zero; otherwise the counter steps by one. The cell
// address is offset + counter, taken as a linear index
// {channel[3:0], window[4:0], sample[5:0]}, so after the last sample of a
// window comes sample 0 of the next window, and after the last window of a
// channel sample 0 of window 0 of the next channel. The addressed cell's
// Gray-coded word comes back on the read bus, is decoded to binary and
// registered on the next rising edge into dout, where the FPGA takes it on
// the falling edge.
//
// Timing: address shifting and data streaming overlap. With LOAD high on
// edge k, dout holds the first addressed sample after edge k+1 and the
// following ones after each later edge: six data words can be streamed
// while the next six-bit address is shifted in. dout_valid rises after the
// first load and stays high.
//
// From the paper: the three 6-bit serial inputs, read clock and load, the
// offset-plus-counter addressing and its order, Gray decoding and the
// 12-bit output latched by the FPGA on the opposite edge. This design's
// choices: MSB-first shifting, loading on the same edge as the sixth bit,
// the one-clock latency, the use of only the low 4/5 bits of the channel
// and window fields, the reset and dout_valid. The sixth (oldest) bit of
// each shift register is shifted out unused: the address is formed from
// the five bits held plus the bit arriving with LOAD.
module readout
  import graph_pkg::*;
#(
  parameter int unsigned CW = 4,   // channel address bits used
  parameter int unsigned WW = 5,   // window address bits used
  parameter int unsigned SW = 6    // sample address bits used
) (
  input  logic           clk,      // read clock
  input  logic           rst,      // synchronous, active high
  input  logic           ser_ch,   // serial channel address
  input  logic           ser_win,  // serial window address
  input  logic           ser_smp,  // serial sample address
  input  logic           load,     // load confirmation
  output logic [CW-1:0]  rd_ch,    // decoded cell address to the core
  output logic [WW-1:0]  rd_win,
  output logic [SW-1:0]  rd_smp,
  input  data_t          rd_gray,  // read bus from the core
  output data_t          dout,     // 12-bit parallel output (binary)
  output logic           dout_valid
);
  timeunit 1ns;
  timeprecision 1ps;
  localparam int unsigned AW = CW + WW + SW;

  logic [5:0]    sr_ch, sr_win, sr_smp;
  logic [5:0]    nx_ch, nx_win, nx_smp;
  logic [AW-1:0] offset, counter, addr;
  logic          loaded;

  assign nx_ch  = {sr_ch[4:0],  ser_ch};
  assign nx_win = {sr_win[4:0], ser_win};
  assign nx_smp = {sr_smp[4:0], ser_smp};

  always_ff @(posedge clk) begin
    sr_ch  <= nx_ch;
    sr_win <= nx_win;
    sr_smp <= nx_smp;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      offset     <= '0;
      counter    <= '0;
      dout       <= '0;
      dout_valid <= 1'b0;
      loaded     <= 1'b0;
    end else begin
      if (load) begin
        offset  <= {nx_ch[CW-1:0], nx_win[WW-1:0], nx_smp[SW-1:0]};
        counter <= '0;
      end else begin
        counter <= counter + 1'b1;
      end
      dout       <= gray2bin(rd_gray);
      loaded     <= loaded | load;
      dout_valid <= loaded;
    end
  end

  assign addr   = offset + counter;
  assign rd_ch  = addr[AW-1 -: CW];
  assign rd_win = addr[SW +: WW];
  assign rd_smp = addr[SW-1:0];

endmodule
