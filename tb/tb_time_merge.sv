// tb_time_merge: self-checking test of the time-ordered merger.
// Three sources hold time-sorted record lists whose stamps cross the
// 2^20 wrap-around and contain equal stamps and timeout events. The
// testbench plays the FIFOs: a source's head becomes available only after
// a random delay (one source starts late, so the merger must wait), and
// the output is back-pressured at random. The expected output is computed
// from the complete lists by a reference model: take the oldest head
// (lowest source on a tie) while all enabled sources still have records,
// and, with TE removal on, skip a TE closer than TE_DROP_WIN to the last
// forwarded record, and discard a head older than the last forwarded
// record. Four runs: all sources, TE removal, source 1 off, and one in
// which source 1 delivers some records out of order.
module tb_time_merge;
  import petat_pkg::*;
  localparam int NSRC = 3, N = 200, WIN = 3000;
  logic clk = 0, rst_n = 0;
  logic [NSRC-1:0] src_en, head_valid, pop;
  logic te_drop_en, out_valid, out_ready, stall, tie, te_drop, stale_drop;

  hit_t head [NSRC];
  hit_t out;
  int checks = 0, failures = 0;
  hit_t lists [NSRC][N];
  int idx [NSRC], avail [NSRC];
  hit_t expq[$];
  int n_stall = 0, n_tie = 0, n_drop = 0, n_out = 0, n_stale = 0;

  time_merge #(.NSRC(NSRC), .TE_DROP_WIN(WIN)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #20000000;
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

  function automatic bit older(int a, int b);
    int d;
    d = (a - b) & ((1 << 20) - 1);
    return d >= (1 << 19);
  endfunction

  task automatic make_lists();
    int base;
    base = (1 << 20) - 40000;
    for (int s = 0; s < NSRC; s++) begin
      int t;
      t = base + 64 * $urandom_range(0, 3);
      for (int i = 0; i < N; i++) begin
        t = t + 64 * $urandom_range(0, 8);  // steps of whole clocks: ties
        lists[s][i] = '{te: ($urandom_range(0, 4) == 0), chip: CHIP_W'(s), chan: CHAN_W'(i),
                        amp: AMP_W'($urandom), ts: ts_t'(t)};
      end
    end
  endtask

  // before the last forwarded record
  function automatic bit is_stale(hit_t h, int last, bit have);
    return have && older(int'(h.ts), last);
  endfunction

  task automatic reference(input logic [NSRC-1:0] en, input logic drop_en);
    int k[NSRC];
    int last;
    bit have;
    have = 0;
    expq.delete();
    foreach (k[s]) k[s] = 0;
    forever begin
      int w;
      w = -1;
      for (int s = 0; s < NSRC; s++) begin
        if (!en[s]) continue;
        while (k[s] < N && is_stale(lists[s][k[s]], last, have)) k[s]++;
        if (k[s] >= N) return;
        if (w < 0 || older(int'(lists[s][k[s]].ts), int'(lists[w][k[w]].ts))) w = s;
      end
      if (drop_en && lists[w][k[w]].te && have &&
          ((int'(lists[w][k[w]].ts) - last) & ((1 << 20) - 1)) < WIN) begin
        // removed
      end else begin
        expq.push_back(lists[w][k[w]]);
        last = int'(lists[w][k[w]].ts);
        have = 1;
      end
      k[w]++;
    end
  endtask

  always_comb
    for (int s = 0; s < NSRC; s++) begin
      head_valid[s] = idx[s] < avail[s] && idx[s] < N;
      head[s] = (idx[s] < N) ? lists[s][idx[s]] : '0;
    end

  always @(posedge clk) if (rst_n) begin
    if (stall) n_stall++;
    if (tie) n_tie++;
    if (te_drop) n_drop++;
    if (stale_drop) n_stale++;
    for (int s = 0; s < NSRC; s++) begin
      if (pop[s]) begin
        check("pop only of an available head", head_valid[s]);
        idx[s]++;
      end
      if ($urandom_range(0, 2) != 0) avail[s]++;
    end
    if (out_valid && out_ready) begin
      n_out++;
      check("output expected", expq.size() != 0);
      if (expq.size() != 0) begin
        check($sformatf("record %h exp %h", out, expq[0]), out == expq[0]);
        void'(expq.pop_front());
      end
    end
  end

  always @(negedge clk) out_ready <= ($urandom_range(0, 3) != 0);

  task automatic run(input logic [NSRC-1:0] en, input logic drop_en, input bit old);
    rst_n = 0;
    src_en = en;
    te_drop_en = drop_en;
    make_lists();
    // out-of-order records: source 1 gets some records older than the
    // records it sent before
    if (old)
      for (int i = 20; i < N; i += 20)
        lists[1][i].ts = lists[1][i-1].ts - ts_t'(64 * 200);
    reference(en, drop_en);
    foreach (idx[s]) begin
      idx[s] = 0;
      avail[s] = (s == 2) ? -300 : 0;  // source 2 starts late
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (4 * N * NSRC + 600) @(negedge clk);
    check($sformatf("all expected records out (%0d left)", expq.size()), expq.size() == 0);
  endtask

  initial begin
    out_ready = 1;
    foreach (idx[s]) begin idx[s] = 0; avail[s] = 0; end
    run(3'b111, 0, 0);
    run(3'b111, 1, 0);
    run(3'b101, 0, 0);
    check("no stale record so far", n_stale == 0);
    run(3'b111, 0, 1);
    check($sformatf("out-of-order records discarded (%0d)", n_stale), n_stale > 0 && n_stale <= 9);
    check($sformatf("merger stalled on an empty source (%0d)", n_stall), n_stall > 0);
    check($sformatf("equal stamps seen (%0d)", n_tie), n_tie > 0);
    check($sformatf("TEs removed (%0d)", n_drop), n_drop > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
