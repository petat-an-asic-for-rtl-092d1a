// time_corr: time stamp correction of locally generated records.
//
// The chips' time counters are reset and clocked through cables of
// different lengths, so each chip's stamps are off by a fixed amount. This
// stage adds the chip's programmed offset (modulo 2^20) to the time stamp
// of every local record and writes the chip ID into it, before the record
// enters the readout flow. One clock of latency; a constant offset keeps
// the order of the stream. Correcting right after time stamping follows
// the paper; representing the correction as a single per-chip offset is
// this design's choice.
module time_corr
  import petat_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  hit_t              in,
  input  ts_t               offset,
  input  logic [CHIP_W-1:0] chip_id,
  output logic              out_valid,
  output hit_t              out
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out      <= in;
        out.chip <= chip_id;
        out.ts   <= in.ts + offset;
      end
    end
  end

endmodule
