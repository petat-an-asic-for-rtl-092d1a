// tb_hit_select: self-checking test of the local hit selection and the
// timeout-event injection, with 4 channels and a short TE interval.
// Channels receive hits whose stamps lie up to 15 clocks in the past
// (front-end latency below the release age), in random order across
// channels, while the time counter crosses the 2^20 wrap. Checks: every
// hit comes out exactly once; the output stream, TEs included, is in
// time order; no hit leaves before it is age_min old; TEs carry the
// status word and appear during quiet periods so that consecutive
// records are never more than TE_INTERVAL + one clock apart; a second
// hit on a channel that is still occupied is lost and flagged.
module tb_hit_select;
  import petat_pkg::*;
  localparam int NCH = 4, TEI = 3200;
  logic clk = 0, rst_n = 0;
  logic [NCH-1:0] ch_valid = '0;
  ts_t ch_ts [NCH];
  logic [AMP_W-1:0] ch_amp [NCH];
  ts_t now, age_min;
  logic [AMP_W-1:0] te_status;
  logic out_valid, lost;
  hit_t out;
  int checks = 0, failures = 0;
  int n_te = 0, n_hit = 0;
  logic busy [NCH];
  hit_t pend [NCH];
  bit have_prev = 0;
  ts_t prev_ts;

  hit_select #(.NCH(NCH), .TE_INTERVAL(TEI)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // time counter, starting shortly before the wrap
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) now <= ts_t'((1 << 20) - 64 * 3000);
    else        now <= now + 20'd64;

  always @(posedge clk) if (rst_n && out_valid) begin
    ts_t d;
    if (have_prev) begin
      d = out.ts - prev_ts;
      check($sformatf("time order %0d -> %0d", prev_ts, out.ts), !d[19]);
      check($sformatf("gap %0d", d), d <= TEI + 64);
    end
    have_prev = 1;
    prev_ts = out.ts;
    if (out.te) begin
      n_te++;
      check("TE status", out.amp == te_status);
    end else begin
      n_hit++;
      d = now - 20'd64 - out.ts;  // now when the hit was released
      check($sformatf("age %0d", d), !d[19] && d >= age_min);
      check("hit of a busy channel", busy[out.chan]);
      check($sformatf("hit content ch%0d", out.chan),
            out.ts == pend[out.chan].ts && out.amp == pend[out.chan].amp && out.chip == 0);
      busy[out.chan] = 0;
    end
  end

  initial begin
    age_min = 20'd1280;  // 20 clocks
    te_status = 9'h1A5;
    foreach (busy[i]) begin busy[i] = 0; ch_ts[i] = '0; ch_amp[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      ch_valid = '0;
      if ((n / 1000) % 2 == 1) continue;  // quiet periods: only TEs
      for (int c = 0; c < NCH; c++) begin
        if (!busy[c] && $urandom_range(0, 9) == 0) begin
          ch_valid[c] = 1;
          ch_ts[c] = now - ts_t'($urandom_range(0, 15 * 64 + 63));
          ch_amp[c] = AMP_W'($urandom);
          busy[c] = 1;
          pend[c] = '{te: 0, chip: 0, chan: CHAN_W'(c), amp: ch_amp[c], ts: ch_ts[c]};
        end
      end
    end
    @(negedge clk);
    ch_valid = '0;
    repeat (100) @(negedge clk);
    foreach (busy[i]) check("every hit released", !busy[i]);
    check("no hit lost so far", !lost);
    // two hits on one channel one clock apart: the second one is lost
    ch_valid[1] = 1; ch_ts[1] = now; ch_amp[1] = 9'd7; busy[1] = 1;
    pend[1] = '{te: 0, chip: 0, chan: 1, amp: 9'd7, ts: now};
    @(negedge clk);
    ch_ts[1] = now; ch_amp[1] = 9'd9;
    @(negedge clk);
    ch_valid = '0;
    repeat (100) @(negedge clk);
    check("overwritten hit flagged", lost);
    check("first hit released", !busy[1]);
    check($sformatf("hits %0d, TEs %0d", n_hit, n_te), n_hit > 500 && n_te > 20);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
