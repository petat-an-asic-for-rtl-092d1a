// tb_petat_top: end-to-end test of the readout with three chips at their
// default parameters. Chips A (ID 1) and B (ID 2) feed the two input
// links of chip C (ID 3), a two-level balanced tree; a link receiver in
// the testbench decodes C's output link.
//
// The chips are configured through JTAG. Their time counters are started
// by the broadcast reset, which reaches A and B a few clocks late (clock
// and reset skew); each chip's programmed time offset cancels its skew,
// so all records leave in true-time order. Front-end hits are generated
// at random on all channels with up to 30 clocks of digitisation latency.
//
// Phases:
//  1. tree, moderate rate, more than two time-stamp wrap-arounds, a few
//     hits on A and B with identical true time (ties at C): every hit must
//     arrive exactly once with its corrected stamp;
//  2. C reconfigured to use link 0 only (a linear chain A -> C): hits of
//     A and C must all arrive, B is ignored;
//  3. overload of the chain: the output link must run at its full rate
//     of one record per 80 clocks, FIFOs overflow, channel hits are lost,
//     and the output must stay sorted with only genuine records.
// Throughout, the output must be in time order (wrap-aware), consecutive
// records must be less than half a wrap period apart, and TEs must carry
// status. Each mechanism (merge stall on an empty FIFO, equal stamps, TE
// injection, TE removal at C, wrap-around, FIFO overflow, lost channel
// hit) is counted and must have happened; the disabled link is exercised
// by phase 2. Out-of-order records discarded at C are counted and printed
// (they only occur under far heavier overload than here).
module tb_petat_top;
  import petat_pkg::*;
  localparam int NCH = 32, NLINK = 2;
  localparam int SKEW_A = 3, SKEW_B = 5;  // broadcast reset delay, clocks

  logic clk = 0, rst_n = 0;
  logic sync_c = 0;
  logic [7:0] sync_dly = '0;
  logic tck = 0, trst_n = 0, tdi = 0;
  logic [2:0] tms = 3'b111;
  logic [2:0] tdo;
  logic [NCH-1:0] chv [3];
  ts_t chts [3][NCH];
  logic [AMP_W-1:0] champ [3][NCH];
  ts_t now [3];
  logic [2:0] sout;
  logic [NLINK:0] ovf [3];
  logic [2:0] lost;
  logic [NLINK-1:0] al [3];
  logic [NLINK-1:0] lerr [3];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  always #20 tck = ~tck;

  always_ff @(posedge clk) sync_dly <= {sync_dly[6:0], sync_c};

  petat_top u_A (.clk(clk), .rst_n(rst_n), .sync_rst(sync_dly[SKEW_A-1]), .sin(2'b00),
    .sout(sout[0]), .ch_valid(chv[0]), .ch_ts(chts[0]), .ch_amp(champ[0]), .now(now[0]),
    .tck(tck), .trst_n(trst_n), .tms(tms[0]), .tdi(tdi), .tdo(tdo[0]),
    .ovf(ovf[0]), .lost(lost[0]), .link_aligned(al[0]), .link_err(lerr[0]));
  petat_top u_B (.clk(clk), .rst_n(rst_n), .sync_rst(sync_dly[SKEW_B-1]), .sin(2'b00),
    .sout(sout[1]), .ch_valid(chv[1]), .ch_ts(chts[1]), .ch_amp(champ[1]), .now(now[1]),
    .tck(tck), .trst_n(trst_n), .tms(tms[1]), .tdi(tdi), .tdo(tdo[1]),
    .ovf(ovf[1]), .lost(lost[1]), .link_aligned(al[1]), .link_err(lerr[1]));
  petat_top u_C (.clk(clk), .rst_n(rst_n), .sync_rst(sync_c), .sin({sout[1], sout[0]}),
    .sout(sout[2]), .ch_valid(chv[2]), .ch_ts(chts[2]), .ch_amp(champ[2]), .now(now[2]),
    .tck(tck), .trst_n(trst_n), .tms(tms[2]), .tdi(tdi), .tdo(tdo[2]),
    .ovf(ovf[2]), .lost(lost[2]), .link_aligned(al[2]), .link_err(lerr[2]));

  logic rx_valid, rx_aligned;
  hit_t rx_hit;
  logic [7:0] rx_err;
  link_rx u_rx (.clk(clk), .rst_n(rst_n), .sin(sout[2]), .hit_valid(rx_valid), .hit(rx_hit),
                .aligned(rx_aligned), .err_cnt(rx_err));

  initial begin
    #20_000_000;  // 2 000 000 clocks
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---- JTAG master (one TAP per chip, shared tck and tdi) ----------------
  task automatic tclk(input int c, input logic t);
    @(negedge tck) tms[c] = t;
    @(posedge tck);
  endtask

  task automatic jshift(input int c, input bit ir, input int n, input logic [63:0] d);
    tclk(c, 1);
    if (ir) tclk(c, 1);
    tclk(c, 0);
    tclk(c, 0);
    for (int i = 0; i < n; i++) begin
      @(negedge tck);
      tdi = d[i];
      tms[c] = (i == n - 1);
      @(posedge tck);
    end
    tclk(c, 1);
    tclk(c, 0);
  endtask

  task automatic configure(input int c, input cfg_t v);
    tclk(c, 0);                  // Test-Logic-Reset -> Run-Test/Idle
    jshift(c, 1, 4, 64'b1000);   // CONFIG
    jshift(c, 0, CFG_W, 64'(v));
    tclk(c, 1); tclk(c, 1); tclk(c, 1);  // back to Test-Logic-Reset
    repeat (10) @(posedge clk);
  endtask

  // ---- expected records ----------------------------------------------------
  int expected [hit_t];      // hit record -> outstanding count
  bit optional_b = 0;        // records of B may or may not arrive
  int n_rx = 0, n_te = 0, n_hits_rx = 0, n_wrap = 0, n_unexp = 0;
  bit have_prev = 0;
  ts_t prev_ts;
  bit overload = 0;

  always @(posedge clk) if (rst_n && rx_valid) begin
    ts_t d;
    n_rx++;
    if (have_prev) begin
      d = rx_hit.ts - prev_ts;
      check($sformatf("output order %0d after %0d", rx_hit.ts, prev_ts), !d[TS_W-1]);
      if (rx_hit.ts < prev_ts) n_wrap++;
    end
    have_prev = 1;
    prev_ts = rx_hit.ts;
    if (rx_hit.te) begin
      n_te++;
      check("TE from a known chip", rx_hit.chip >= 1 && rx_hit.chip <= 3);
    end else begin
      n_hits_rx++;
      if (expected.exists(rx_hit)) begin
        expected[rx_hit]--;
        if (expected[rx_hit] == 0) expected.delete(rx_hit);
      end else begin
        n_unexp++;
        check($sformatf("received hit %h was sent", rx_hit), optional_b && rx_hit.chip == 2);
      end
    end
  end

  // ---- front-end hit generation --------------------------------------------
  int offs [3] = '{SKEW_A * 64, SKEW_B * 64, 0};
  int rate [3];              // per-clock hit probability, in 1/10000
  bit run_hits = 0;
  longint last_hit [3][NCH];
  longint cyc = 0;
  always @(posedge clk) cyc++;

  task automatic put_hit(input int c, input int ch, input ts_t raw, input logic [AMP_W-1:0] a);
    hit_t h;
    chv[c][ch] = 1;
    chts[c][ch] = raw;
    champ[c][ch] = a;
    last_hit[c][ch] = cyc;
    h = '{te: 0, chip: CHIP_W'(c + 1), chan: CHAN_W'(ch), amp: a, ts: ts_t'(int'(raw) + offs[c])};
    if (expected.exists(h)) expected[h]++;
    else expected[h] = 1;
  endtask

  bit tie_req = 0;
  always @(negedge clk) begin
    for (int c = 0; c < 3; c++) chv[c] = '0;
    if (tie_req) begin
      ts_t t;
      // same true time on A and B: equal stamps meet at C
      t = now[2] - ts_t'(640);
      put_hit(0, 31, t - ts_t'(offs[0]), 9'd100);
      put_hit(1, 31, t - ts_t'(offs[1]), 9'd200);
      last_hit[0][31] = cyc + 1000;
      last_hit[1][31] = cyc + 1000;
      tie_req = 0;
    end
    if (run_hits)
      for (int c = 0; c < 3; c++)
        if ($urandom_range(0, 9999) < rate[c]) begin
          int ch;
          ch = $urandom_range(0, NCH - 1);
          if (overload || (cyc - last_hit[c][ch] > 300 && !(ch == 31 && c < 2)))
            put_hit(c, ch, now[c] - ts_t'($urandom_range(0, 30 * 64 + 63)), AMP_W'($urandom));
        end
  end

  // ---- mechanism counters ---------------------------------------------------
  int n_stall = 0, n_tie = 0, n_te_drop = 0, n_te_inj = 0, n_stale = 0;
  always @(posedge clk) if (rst_n) begin
    if (u_C.u_merge.stall) n_stall++;
    if (u_C.u_merge.tie) n_tie++;
    if (u_C.u_merge.te_drop) n_te_drop++;
    if (u_C.u_merge.stale_drop) n_stale++;
    if (u_A.u_sel.out_valid && u_A.u_sel.out.te) n_te_inj++;
  end

  // ---- test sequence ------------------------------------------------------
  initial begin
    cfg_t ca, cb, cc;
    int win_start, rx0;
    foreach (chts[c, i]) begin chts[c][i] = '0; champ[c][i] = '0; end
    foreach (last_hit[c, i]) last_hit[c][i] = -1000;
    for (int c = 0; c < 3; c++) chv[c] = '0;
    rate = '{25, 25, 25};
    repeat (4) @(negedge clk);
    rst_n = 1;
    #50 trst_n = 1;
    ca = CFG_RESET; ca.chip_id = 1; ca.ts_offset = ts_t'(offs[0]);
    cb = CFG_RESET; cb.chip_id = 2; cb.ts_offset = ts_t'(offs[1]);
    cc = CFG_RESET; cc.chip_id = 3; cc.ts_offset = ts_t'(offs[2]);
    cc.src_en = 8'b111; cc.te_drop_en = 1;
    configure(0, ca);
    configure(1, cb);
    configure(2, cc);
    check("configuration reached chip C", u_C.cfg == cc);
    // broadcast reset starts all time counters
    @(negedge clk) sync_c = 1;
    @(negedge clk) sync_c = 0;
    repeat (20) @(negedge clk);
    check("time counters aligned by offsets",
          ts_t'(now[0] + ts_t'(offs[0])) == now[2] && ts_t'(now[1] + ts_t'(offs[1])) == now[2]);
    repeat (2000) @(negedge clk);
    check("links aligned", al[2] == 2'b11 && rx_aligned);

    // phase 1: tree
    run_hits = 1;
    for (int n = 0; n < 40; n++) begin
      repeat (900) @(negedge clk);
      #1 tie_req = 1;
    end
    run_hits = 0;
    repeat (8000) @(negedge clk);
    check($sformatf("tree: all hits arrived (%0d missing)", expected.size()), expected.size() == 0);
    check("tree: no overflow", ovf[0] == 0 && ovf[1] == 0 && ovf[2] == 0);
    check("tree: no link errors", lerr[2] == 0 && rx_err == 0);

    // phase 2: linear chain A -> C, B ignored
    optional_b = 1;
    cc.src_en = 8'b011;
    configure(2, cc);
    rate = '{40, 40, 40};
    run_hits = 1;
    repeat (15000) @(negedge clk);
    run_hits = 0;
    repeat (8000) @(negedge clk);
    begin
      int miss;
      miss = 0;
      foreach (expected[h]) if (h.chip != 2) miss++;
      check($sformatf("chain: all hits of A and C arrived (%0d missing)", miss), miss == 0);
    end

    // phase 3: overload of the chain
    overload = 1;
    rate = '{3000, 3000, 3000};
    run_hits = 1;
    repeat (3000) @(negedge clk);
    rx0 = n_rx;
    win_start = int'(cyc);
    repeat (8000) @(negedge clk);
    rx0 = n_rx - rx0;
    repeat (20000) @(negedge clk);
    check($sformatf("full link rate: %0d records in 8000 clocks", rx0), rx0 >= 99);
    run_hits = 0;
    repeat (6000) @(negedge clk);
    check("overflow of A's local FIFO", ovf[0][0]);
    check("overflow of C's local FIFO", ovf[2][0]);
    check("channel hits lost", lost[0] && lost[2]);

    // mechanisms
    check($sformatf("merge stalls %0d", n_stall), n_stall > 0);
    check($sformatf("equal stamps %0d", n_tie), n_tie > 0);
    check($sformatf("TEs injected at A %0d, received %0d", n_te_inj, n_te), n_te_inj > 0 && n_te > 0);
    check($sformatf("TEs removed at C %0d", n_te_drop), n_te_drop > 0);
    check($sformatf("wrap-arounds %0d", n_wrap), n_wrap >= 2);
    check($sformatf("hits received %0d", n_hits_rx), n_hits_rx > 500);
    $display("records %0d hits %0d TEs %0d stalls %0d ties %0d TE-drops %0d stale %0d wraps %0d",
             n_rx, n_hits_rx, n_te, n_stall, n_tie, n_te_drop, n_stale, n_wrap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
