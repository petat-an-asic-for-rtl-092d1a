// hit_select: age-ordered selection of local SiPM hits and injection of
// timeout events.
//
// Hits from the NCH front-end channels arrive at any time and not in time
// order (a channel's digitisation takes a while). Each channel has one
// pending-hit register. Every clock the oldest pending hit (wrap-aware
// compare, lowest channel on a tie) is released into the local FIFO once
// its age, now - ts, has reached age_min. If age_min exceeds the longest
// front-end latency, no older hit can still appear, so the local stream
// leaves in time order. A hit arriving on a channel whose register is
// still occupied is lost; this sets the sticky lost flag.
//
// Timeout events: when nothing has been released for TE_INTERVAL bins and
// no hit is ready, a TE with time stamp now - age_min is emitted instead.
// No hit released later can be older than that, so the stream stays
// sorted, and with TE_INTERVAL just below 2^18 bins there is a packet in
// every quarter of the 2^20-bin wrap period. The TE carries te_status in
// its amplitude field.
//
// Output: out/out_valid, one record per clock at most, registered. The
// record's chip field is left zero; time_corr fills it in.
// The selection "according to age" into a FIFO and TE injection at this
// point follow the paper; the age threshold rule, one register per
// channel, and the TE time stamp are this design's choices.
module hit_select
  import petat_pkg::*;
#(
  parameter int NCH         = 32,
  parameter int TE_INTERVAL = (1 << 18) - 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [NCH-1:0]   ch_valid,
  input  ts_t              ch_ts  [NCH],
  input  logic [AMP_W-1:0] ch_amp [NCH],
  input  ts_t              now,
  input  ts_t              age_min,
  input  logic [AMP_W-1:0] te_status,
  output logic             out_valid,
  output hit_t             out,
  output logic             lost
);

  logic [NCH-1:0]   pend_v;
  ts_t              pend_ts  [NCH];
  logic [AMP_W-1:0] pend_amp [NCH];
  logic [CHAN_W-1:0] best;
  logic             found, eligible, te_due;
  ts_t              age, te_ts, quiet;
  ts_t              last_ts;

  always_comb begin
    found = 1'b0;
    best  = '0;
    for (int i = 0; i < NCH; i++) begin
      if (pend_v[i] && (!found || ts_older(pend_ts[i], pend_ts[best]))) begin
        best  = CHAN_W'(i);
        found = 1'b1;
      end
    end
    age      = now - pend_ts[best];
    eligible = found && !age[TS_W-1] && (age >= age_min);
    te_ts    = now - age_min;
    quiet    = te_ts - last_ts;
    te_due   = !eligible && !quiet[TS_W-1] && (quiet >= ts_t'(TE_INTERVAL));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_v    <= '0;
      out_valid <= 1'b0;
      out       <= '0;
      last_ts   <= '0;
      lost      <= 1'b0;
      for (int i = 0; i < NCH; i++) begin
        pend_ts[i]  <= '0;
        pend_amp[i] <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      if (eligible) begin
        out_valid    <= 1'b1;
        out          <= '{te: 1'b0, chip: '0, chan: best,
                          amp: pend_amp[best], ts: pend_ts[best]};
        last_ts      <= pend_ts[best];
        pend_v[best] <= 1'b0;
      end else if (te_due) begin
        out_valid <= 1'b1;
        out       <= '{te: 1'b1, chip: '0, chan: '0, amp: te_status, ts: te_ts};
        last_ts   <= te_ts;
      end
      for (int i = 0; i < NCH; i++) begin
        if (ch_valid[i]) begin
          if (pend_v[i] && !(eligible && best == CHAN_W'(i))) begin
            lost <= 1'b1;
          end else begin
            pend_v[i]   <= 1'b1;
            pend_ts[i]  <= ch_ts[i];
            pend_amp[i] <= ch_amp[i];
          end
        end
      end
    end
  end

endmodule
