// petat_top: digital readout of one PETAT chip.
//
// The chip merges its own SiPM hits with the hit streams of up to NLINK
// upstream chips into one time-sorted output stream, so that chips can be
// chained or arranged in trees without FPGAs between them:
//
//   sin[i] -> link_rx -> link FIFO (LINK_DEPTH) ----------------+
//   ch_*   -> hit_select (age order, TEs) -> time_corr          |
//                  -> local FIFO (LOCAL_DEPTH) -> time_merge <--+
//                                                 -> link_tx -> sout
//
// Each input link carries time-sorted 8B10B packets; the receiver unpacks
// them into its FIFO. Local hits come from the analog front end (not part
// of this RTL: ch_valid, ch_ts, ch_amp are its digital outputs, stamped
// against now from the timebase). hit_select releases them oldest first
// once they are old enough, adds timeout events (TEs) when it is quiet,
// and time_corr adds the chip's time offset and ID. time_merge waits until
// all enabled FIFOs hold data and forwards the oldest head; link_tx sends
// it, 80 clocks per record. A full FIFO drops new records and sets a flag
// that is reported in the TEs (and on ovf); under heavy overload the
// merger also discards records that arrive out of order (see time_merge).
//
// Configuration (chip ID, enabled sources, time offset, release age, TE
// removal) is written through JTAG and taken over into the system clock
// domain through a two-stage synchroniser on the update toggle, and copied
// again after every system reset. sync_rst
// is the reset that the fast broadcast delivers to all chips; it restarts
// the time counter. The serial links run at one bit per system clock.
// NLINK = 2 (enough for a balanced binary tree) and the FIFO depths are
// this design's choices; NCH = 32 follows the paper.
module petat_top
  import petat_pkg::*;
#(
  parameter int NLINK       = 2,
  parameter int NCH         = 32,
  parameter int LINK_DEPTH  = 64,
  parameter int LOCAL_DEPTH = 16,
  parameter int TE_INTERVAL = (1 << 18) - 64,
  parameter int TE_DROP_WIN = 1 << 17
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             sync_rst,
  // serial links
  input  logic [NLINK-1:0] sin,
  output logic             sout,
  // front-end hits
  input  logic [NCH-1:0]   ch_valid,
  input  ts_t              ch_ts  [NCH],
  input  logic [AMP_W-1:0] ch_amp [NCH],
  output ts_t              now,
  // JTAG
  input  logic             tck,
  input  logic             trst_n,
  input  logic             tms,
  input  logic             tdi,
  output logic             tdo,
  // status
  output logic [NLINK:0]   ovf,         // bit 0 local FIFO, 1+i link i
  output logic             lost,        // a channel hit was overwritten
  output logic [NLINK-1:0] link_aligned,
  output logic [NLINK-1:0] link_err
);

  localparam int NSRC = NLINK + 1;

  // ---- configuration ------------------------------------------------------
  cfg_t cfg_tck, cfg;
  logic cfg_upd_tck;
  logic [2:0] upd_sync;

  jtag_cfg u_jtag (
    .tck(tck), .trst_n(trst_n), .tms(tms), .tdi(tdi), .tdo(tdo),
    .cfg(cfg_tck), .cfg_upd(cfg_upd_tck)
  );

  // cfg_tck is stable when the toggle arrives two clocks later. After a
  // system reset the JTAG register is copied once (boot), so the core
  // keeps the configuration it was given before the reset.
  logic [1:0] boot;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      upd_sync <= '0;
      boot     <= 2'd3;
      cfg      <= CFG_RESET;
    end else begin
      upd_sync <= {upd_sync[1:0], cfg_upd_tck};
      if (boot != 2'd0) boot <= boot - 1'b1;
      if (upd_sync[2] != upd_sync[1] || boot == 2'd1) cfg <= cfg_tck;
    end
  end

  // ---- local hits -----------------------------------------------------------
  logic             sel_valid, loc_valid;
  hit_t             sel_hit, loc_hit;
  logic [AMP_W-1:0] te_status;

  timebase u_tb (.clk(clk), .rst_n(rst_n), .sync_rst(sync_rst), .now(now));

  hit_select #(.NCH(NCH), .TE_INTERVAL(TE_INTERVAL)) u_sel (
    .clk(clk), .rst_n(rst_n),
    .ch_valid(ch_valid), .ch_ts(ch_ts), .ch_amp(ch_amp),
    .now(now), .age_min(cfg.age_min), .te_status(te_status),
    .out_valid(sel_valid), .out(sel_hit), .lost(lost)
  );

  time_corr u_corr (
    .clk(clk), .rst_n(rst_n), .in_valid(sel_valid), .in(sel_hit),
    .offset(cfg.ts_offset), .chip_id(cfg.chip_id),
    .out_valid(loc_valid), .out(loc_hit)
  );

  // ---- FIFOs ------------------------------------------------------------------
  logic [NSRC-1:0] f_wr, f_empty, f_pop;
  hit_t            f_wdata [NSRC];
  hit_t            f_head  [NSRC];
  logic [NSRC-1:0] f_full_unused;
  logic [7:0]      f_drops [NSRC];

  assign f_wr[0]    = loc_valid;
  assign f_wdata[0] = loc_hit;

  for (genvar i = 0; i < NSRC; i++) begin : g_fifo
    sync_fifo #(.WIDTH(HIT_W), .DEPTH(i == 0 ? LOCAL_DEPTH : LINK_DEPTH)) u_fifo (
      .clk(clk), .rst_n(rst_n),
      .wr_en(f_wr[i]), .wdata(f_wdata[i]),
      .rd_en(f_pop[i]), .rdata(f_head[i]),
      .empty(f_empty[i]), .full(f_full_unused[i]),
      .overflow(ovf[i]), .drop_cnt(f_drops[i])
    );
  end

  // ---- input links -------------------------------------------------------------
  logic [7:0] rx_err [NLINK];

  for (genvar i = 0; i < NLINK; i++) begin : g_rx
    link_rx u_rx (
      .clk(clk), .rst_n(rst_n), .sin(sin[i]),
      .hit_valid(f_wr[i+1]), .hit(f_wdata[i+1]),
      .aligned(link_aligned[i]), .err_cnt(rx_err[i])
    );
    assign link_err[i] = (rx_err[i] != 8'd0);
  end

  // TE status word: bit 0 channel hit lost, bit 1 local FIFO overflow,
  // bits 2.. link FIFO overflows, bit 8 any link protocol error.
  always_comb begin
    te_status    = '0;
    te_status[0] = lost;
    for (int i = 0; i < NSRC && i < 7; i++) te_status[1+i] = ovf[i];
    te_status[8] = |link_err;
  end

  // ---- merge and output link -------------------------------------------------
  logic m_valid, m_ready, m_stall, m_tie, m_te_drop, m_stale, tx_busy;
  hit_t m_hit;

  time_merge #(.NSRC(NSRC), .TE_DROP_WIN(TE_DROP_WIN)) u_merge (
    .clk(clk), .rst_n(rst_n),
    .src_en(cfg.src_en[NSRC-1:0]), .te_drop_en(cfg.te_drop_en),
    .head_valid(~f_empty), .head(f_head), .pop(f_pop),
    .out_valid(m_valid), .out_ready(m_ready), .out(m_hit),
    .stall(m_stall), .tie(m_tie), .te_drop(m_te_drop),
    .stale_drop(m_stale)
  );

  link_tx u_tx (
    .clk(clk), .rst_n(rst_n), .hit_valid(m_valid), .hit_ready(m_ready),
    .hit(m_hit), .sout(sout), .busy(tx_busy)
  );

endmodule
