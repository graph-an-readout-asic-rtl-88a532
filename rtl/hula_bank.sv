// hula_bank - one bank of the HULA mixed-signal sampling memory.
//
// Each cell is one sample: a sampling capacitor behind a switch, a
// comparator against the bank's ramp, an overwrite-protection flip-flop and
// a 12-bit memory. Cells are organised as [channel][window][sample]; the
// bank holds N_CH channels of N_W windows of N_S samples.
//
//  * Sampling (clk_smp): a cell's switch is closed while its window bit
//    (win_sel) and its sample bit (smp_sel) are both high; it then tracks
//    its channel's input, and keeps the last value once either bit drops.
//    The capacitor is modelled as a register holding the input code.
//  * Conversion (clk_conv): while conv_active is high, every cell whose
//    lock flip-flop is clear copies the Gray bus into its memory. On the
//    first edge at which the ramp is above the held value the lock sets and
//    the memory keeps that count. Cells the ramp never passes keep the last
//    count (4095 for a full conversion). unlock clears all locks.
//  * Reading: an independent read bus returns the memory word of the cell
//    at (rd_ch, rd_win, rd_smp) combinationally, still Gray coded.
//
// The cell structure, the following-the-bus/lock scheme and the separate
// read bus are the paper's. Holding voltages as codes and comparing them
// digitally is this model's stand-in for the capacitor and the comparator;
// the comparator is ideal (no offset, no leakage). Memory and held values
// are not reset, as in the chip; the lock flip-flops are cleared by unlock.
module hula_bank
  import graph_pkg::*;
#(
  parameter int unsigned N_C = N_CH,        // channels
  parameter int unsigned N_W = N_WIN_BANK,  // windows in this bank
  parameter int unsigned N_S = N_SMP        // samples per window
) (
  // sampling
  input  logic                    clk_smp,
  input  logic [N_S-1:0]          smp_sel,
  input  logic [N_W-1:0]          win_sel,
  input  ain_t                    ain [N_C],
  // conversion
  input  logic                    clk_conv,
  input  logic                    conv_active,
  input  data_t                   conv_gray,
  input  ain_t                    ramp,
  input  logic                    unlock,
  // read bus
  input  logic [$clog2(N_C)-1:0]  rd_ch,
  input  logic [$clog2(N_W)-1:0]  rd_win,
  input  logic [$clog2(N_S)-1:0]  rd_smp,
  output data_t                   rd_gray
);
  timeunit 1ns;
  timeprecision 1ps;
  ain_t  held [N_C][N_W][N_S];   // sampling capacitors
  data_t mem  [N_C][N_W][N_S];   // 12-bit memories
  logic  lock [N_C][N_W][N_S];   // overwrite-protection flip-flops

  always_ff @(posedge clk_smp) begin
    for (int w = 0; w < N_W; w++)
      for (int s = 0; s < N_S; s++)
        if (win_sel[w] && smp_sel[s])
          for (int c = 0; c < N_C; c++)
            held[c][w][s] <= ain[c];
  end

  // Only a conversion or an unlock touches the cells.
  always_ff @(posedge clk_conv) begin
    if (unlock || conv_active) begin
      for (int c = 0; c < N_C; c++)
        for (int w = 0; w < N_W; w++)
          for (int s = 0; s < N_S; s++) begin
            if (unlock) begin
              lock[c][w][s] <= 1'b0;
            end else if (!lock[c][w][s]) begin
              mem[c][w][s] <= conv_gray;
              if (ramp > held[c][w][s]) lock[c][w][s] <= 1'b1;
            end
          end
    end
  end

  assign rd_gray = mem[rd_ch][rd_win][rd_smp];

endmodule
