// timebase: the chip's time stamp counter.
//
// A time bin is about 50 ps and the system clock runs at 312.5 MHz
// (3.2 ns), so one clock is 64 bins. The counter therefore keeps the
// upper 14 bits of the 20-bit time stamp and advances once per clock; the
// lower 6 bits are the fine time measured by each channel's TDC and are
// zero in now. sync_rst (from the fast broadcast reset shared by all
// chips) clears the counter so that all chips count alike; remaining
// skew is removed by time_corr. The 20-bit stamp and 50 ps bins follow
// the paper; the split into coarse and fine bits is derived from its clock
// and bin numbers.
module timebase
  import petat_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic sync_rst,
  output ts_t  now
);

  logic [TS_W-FINE_W-1:0] coarse;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)        coarse <= '0;
    else if (sync_rst) coarse <= '0;
    else               coarse <= coarse + 1'b1;

  assign now = {coarse, {FINE_W{1'b0}}};

endmodule
