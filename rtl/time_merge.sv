// time_merge: time-ordered merge of the chip's FIFO outputs.
//
// Every source (the local hit FIFO and the FIFOs of the input links) is
// already sorted by time, so the oldest record overall is the oldest of
// the FIFO heads. The merger waits until every enabled source holds a
// record - an empty FIFO might still receive an older one - then compares
// the heads' time stamps modulo 2^20, pops the oldest and loads it into
// the output register. Equal time stamps go to the lowest source index
// (the local FIFO is index 0). Disabled sources (unconnected links) are
// ignored. One record is merged per clock when the output is free.
//
// Timeout events (TEs) keep every source non-empty. When te_drop_en is
// set, a TE whose time stamp is less than TE_DROP_WIN bins after the last
// forwarded record is popped but not forwarded: that stream already
// carries a recent packet, so downstream chips do not need the TE.
//
// Stamps are compared by their distance after the last forwarded record,
// which is exact as long as all heads lie within one period after it. A
// head whose stamp lies up to half a period before the last forwarded
// record would break the order: it is popped and discarded before any
// comparison (stale_drop). This cannot happen while the stamps of all
// heads stay within half a period of each other, which the timeout events
// ensure in normal operation; under heavy overload records can wait in
// full FIFOs for longer, and the rule then keeps the output sorted.
//
// Output: out/out_valid held until out_ready. Status pulses: stall (some
// enabled source has data but another is empty), tie (the winning stamp
// equals another head's), te_drop (a TE was removed), stale_drop (a stale
// head was discarded). The assertion a_hold checks that a held output
// does not change; its reset condition makes lint tools report rst_n as
// used both asynchronously and synchronously, which is harmless here.
// Waiting for all FIFOs, oldest-first selection, TE removal and the
// half-period rule follow the paper; the tie rule, the per-source enable,
// the TE removal condition and the discarding of stale records are this
// design's choices.
module time_merge
  import petat_pkg::*;
#(
  parameter int NSRC        = 3,
  parameter int TE_DROP_WIN = 1 << 17
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [NSRC-1:0] src_en,
  input  logic            te_drop_en,
  input  logic [NSRC-1:0] head_valid,
  input  hit_t            head [NSRC],
  output logic [NSRC-1:0] pop,
  output logic            out_valid,
  input  logic            out_ready,
  output hit_t            out,
  output logic            stall,
  output logic            tie,
  output logic            te_drop,
  output logic            stale_drop
);

  logic                    all_ready, any_ready, load, drop;
  logic [NSRC-1:0]         stale, stale_pop;
  logic [$clog2(NSRC)-1:0] win;
  logic                    have_last;
  ts_t                     last_ts;
  hit_t                    wh;

  // Once a record has been forwarded, stamps are compared by their
  // distance after it, which is exact over a whole period; before that,
  // by the signed difference.
  function automatic logic older(ts_t a, ts_t b);
    if (have_last) return ts_t'(a - last_ts) < ts_t'(b - last_ts);
    else           return ts_older(a, b);
  endfunction

  always_comb begin
    logic found;
    found     = 1'b0;
    win       = '0;
    all_ready = |src_en;
    any_ready = 1'b0;
    for (int i = 0; i < NSRC; i++) begin
      if (src_en[i] && !head_valid[i]) all_ready = 1'b0;
      if (src_en[i] &&  head_valid[i]) any_ready = 1'b1;
      if (src_en[i] && (!found || older(head[i].ts, head[win].ts))) begin
        win   = $clog2(NSRC)'(i);
        found = 1'b1;
      end
    end
    wh  = head[win];
    tie = 1'b0;
    for (int i = 0; i < NSRC; i++)
      if (all_ready && src_en[i] && i != int'(win) && head[i].ts == wh.ts) tie = 1'b1;
  end

  // Stale heads: stamp before the last forwarded record (offset from it
  // negative). Popping them keeps the output sorted under any load.
  always_comb begin
    stale_pop = '0;
    for (int i = 0; i < NSRC; i++) begin
      ts_t off;
      off      = head[i].ts - last_ts;
      stale[i] = have_last && src_en[i] && head_valid[i] && off[TS_W-1];
    end
    for (int i = NSRC - 1; i >= 0; i--)
      if (stale[i]) stale_pop = NSRC'(1) << i;
  end
  assign stale_drop = |stale;

  assign load  = all_ready && !stale_drop && (!out_valid || out_ready);
  assign stall = any_ready && !all_ready;
  assign drop  = te_drop_en && wh.te && have_last &&
                 ((wh.ts - last_ts) < ts_t'(TE_DROP_WIN));
  assign te_drop = load && drop;

  always_comb begin
    pop = stale_pop;
    if (load) pop[win] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
      have_last <= 1'b0;
      last_ts   <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (load && !drop) begin
        out_valid <= 1'b1;
        out       <= wh;
        have_last <= 1'b1;
        last_ts   <= wh.ts;
      end
    end
  end

  // The output register holds its record until it is taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out));

endmodule
