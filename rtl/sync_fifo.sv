// sync_fifo: single-clock first-word-fall-through FIFO for hit records.
//
// rdata always shows the oldest entry while empty is low; rd_en removes it.
// A write into a full FIFO is dropped: the hit is lost, as in the paper's
// chip when a FIFO has no more space, and the sticky overflow flag is set
// (it is reported in the chip's timeout events) and drop_cnt counts the
// lost hits (saturating). A simultaneous read and write on a full FIFO
// is accepted. The depth is not given in the paper; DEPTH must be a power
// of two.
module sync_fifo #(
  parameter int WIDTH = 45,
  parameter int DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wdata,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rdata,
  output logic             empty,
  output logic             full,
  output logic             overflow,
  output logic [7:0]       drop_cnt
);

  localparam int AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;
  logic             do_wr, do_rd;

  assign empty = (wptr == rptr);
  assign full  = (wptr[AW] != rptr[AW]) && (wptr[AW-1:0] == rptr[AW-1:0]);
  assign do_rd = rd_en && !empty;
  assign do_wr = wr_en && (!full || do_rd);
  assign rdata = mem[rptr[AW-1:0]];

  always_ff @(posedge clk)
    if (do_wr) mem[wptr[AW-1:0]] <= wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr     <= '0;
      rptr     <= '0;
      overflow <= 1'b0;
      drop_cnt <= '0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
      if (wr_en && !do_wr) begin
        overflow <= 1'b1;
        if (drop_cnt != 8'hFF) drop_cnt <= drop_cnt + 1'b1;
      end
    end
  end

endmodule
