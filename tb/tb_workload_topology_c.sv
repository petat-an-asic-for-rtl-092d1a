// tb_workload_topology_c: 64 chips connected as groups of binary trees that
// are joined in a linear chain, with every chip at its default parameters.
//
// Eight groups ("modules") of eight chips. Inside group g, local chip j
// takes local chips 2j+1 and 2j+2 on its two input links, so local chip 0
// is the group's root. The root of group g-1 feeds input link 0 of local
// chip 7 of group g, a leaf whose inputs are otherwise unused; the root of
// group 7 drives the output. All chips remove redundant timeout events.
// Hits are spread uniformly over chips and channels, with a total rate
// given as a fraction of the output link capacity of one record per 80
// clocks.
//
//  load 0.9: at least 99 % of the hits of every group must reach the
//            output, in time order;
//  load 2.0: about half the hits must be lost, the output must stay in
//            time order, and no group of 16 chips may be starved (each
//            keeps more than 30 % of its hits).
// The amplitude field tags the phase a hit belongs to. The per-group
// efficiencies are printed for both loads.
module tb_workload_topology_c;
  import petat_pkg::*;
  localparam int NC = 64, NCH = 32, NLINK = 2;
  localparam int NSYS = 1;
  localparam int GS = 8;    // chips per group

  logic clk = 0, rst_n = 0, sync_rst = 0;
  logic tck = 0, trst_n = 0, tms = 1;
  logic [NC-1:0] tdi [NSYS];
  logic [NC-1:0] tdo [NSYS];
  logic [NC-1:0] sout [NSYS];
  logic [NCH-1:0] chv [NC];
  ts_t chts [NC][NCH];
  logic [AMP_W-1:0] champ [NC][NCH];
  ts_t now [NSYS][NC];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  always #20 tck = ~tck;

  initial begin
    #100_000_000;  // 10 000 000 clocks
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

  // ---- the two systems ------------------------------------------------------
  for (genvar s = 0; s < NSYS; s++) begin : g_sys
    for (genvar k = 0; k < NC; k++) begin : g_chip
      logic [NLINK-1:0] sin;
      logic [NLINK:0] ovf;
      logic lost;
      logic [NLINK-1:0] al, lerr;
      localparam int J = k % GS, G = k / GS;
      assign sin = {(2*J+2 < GS) ? sout[s][(G*GS + 2*J+2) % NC] : 1'b0,
                    (2*J+1 < GS) ? sout[s][(G*GS + 2*J+1) % NC]
                  : (J == GS-1 && G > 0) ? sout[s][((G-1)*GS) % NC] : 1'b0};
      petat_top u_chip (.clk(clk), .rst_n(rst_n), .sync_rst(sync_rst), .sin(sin),
        .sout(sout[s][k]), .ch_valid(chv[k]), .ch_ts(chts[k]), .ch_amp(champ[k]),
        .now(now[s][k]), .tck(tck), .trst_n(trst_n), .tms(tms), .tdi(tdi[s][k]),
        .tdo(tdo[s][k]), .ovf(ovf), .lost(lost), .link_aligned(al), .link_err(lerr));
    end
  end

  // configuration of chip k of system s
  function automatic cfg_t chip_cfg(int s, int k);
    cfg_t c;
    c = CFG_RESET;
    c.chip_id = CHIP_W'(k);
    c.te_drop_en = 1;
    c.src_en = {5'b0, (2*(k%GS)+2 < GS),
                (2*(k%GS)+1 < GS) || (k%GS == GS-1 && k >= GS), 1'b1};
    return c;
  endfunction

  // All TAPs walk the same states; each chip gets its own tdi.
  task automatic tclk(input logic t);
    @(negedge tck) tms = t;
    @(posedge tck);
  endtask

  task automatic configure_all();
    tclk(0);
    // IR <- CONFIG
    tclk(1); tclk(1); tclk(0); tclk(0);
    for (int i = 0; i < 4; i++) begin
      @(negedge tck);
      for (int s = 0; s < NSYS; s++) tdi[s] = {NC{(i == 3)}};
      tms = (i == 3);
      @(posedge tck);
    end
    tclk(1); tclk(0);
    // DR <- configuration
    tclk(1); tclk(0); tclk(0);
    for (int i = 0; i < CFG_W; i++) begin
      @(negedge tck);
      for (int s = 0; s < NSYS; s++)
        for (int k = 0; k < NC; k++) begin
          cfg_t c;
          c = chip_cfg(s, k);
          tdi[s][k] = c[i];
        end
      tms = (i == CFG_W - 1);
      @(posedge tck);
    end
    tclk(1); tclk(0);
    tclk(1); tclk(1); tclk(1);
  endtask

  // ---- output receivers and accounting ---------------------------------------
  int sent [3][NC];           // [phase][chip]
  int rcvd [NSYS][3][NC];
  int n_te [NSYS];
  logic rx_v [NSYS];
  hit_t rx_h [NSYS];
  logic rx_al [NSYS];
  logic [7:0] rx_err [NSYS];
  bit have_prev [NSYS];
  ts_t prev_ts [NSYS];

  for (genvar s = 0; s < NSYS; s++) begin : g_rx
    link_rx u_rx (.clk(clk), .rst_n(rst_n), .sin(sout[s][NC-GS]),
                  .hit_valid(rx_v[s]), .hit(rx_h[s]), .aligned(rx_al[s]), .err_cnt(rx_err[s]));
    always @(posedge clk) if (rst_n && rx_v[s]) begin
      ts_t d;
      if (have_prev[s]) begin
        d = rx_h[s].ts - prev_ts[s];
        check($sformatf("system %0d output order", s), !d[TS_W-1]);
      end
      have_prev[s] = 1;
      prev_ts[s] = rx_h[s].ts;
      if (rx_h[s].te) n_te[s]++;
      else if (rx_h[s].amp < 3) rcvd[s][rx_h[s].amp][rx_h[s].chip]++;
    end
  end

  // ---- hit generation ---------------------------------------------------------
  int phase = 0;
  int p_per_chip = 0;         // per chip per clock, in 1/1_000_000
  longint cyc = 0;
  longint last_hit [NC][NCH];
  always @(posedge clk) cyc++;

  always @(negedge clk) begin
    for (int k = 0; k < NC; k++) begin
      chv[k] = '0;
      if (phase != 0 && $urandom_range(0, 999_999) < p_per_chip) begin
        int ch;
        ch = $urandom_range(0, NCH - 1);
        if (cyc - last_hit[k][ch] > 200) begin
          chv[k][ch] = 1;
          chts[k][ch] = now[0][k] - ts_t'($urandom_range(0, 30 * 64 + 63));
          champ[k][ch] = AMP_W'(phase);
          last_hit[k][ch] = cyc;
          sent[phase][k]++;
        end
      end
    end
  end

  function automatic real eff(int s, int ph, int k0, int k1);
    int a, b;
    a = 0; b = 0;
    for (int k = k0; k <= k1; k++) begin
      a += rcvd[s][ph][k];
      b += sent[ph][k];
    end
    return (b == 0) ? 0.0 : real'(a) / real'(b);
  endfunction

  task automatic report(int ph);
    for (int s = 0; s < NSYS; s++) begin
      string line;
      line = "";
      for (int g = 0; g < 8; g++) line = {line, $sformatf(" %5.1f", 100.0 * eff(s, ph, 8*g, 8*g+7))};
      $display("topology C load %0.1f: total %5.1f %%, per group of 8 chips:%s",
               ph == 1 ? 0.9 : 2.0, 100.0 * eff(s, ph, 0, NC-1), line);
    end
  endtask

  initial begin
    foreach (chts[k, i]) begin chts[k][i] = '0; champ[k][i] = '0; end
    foreach (last_hit[k, i]) last_hit[k][i] = -1000;
    foreach (chv[k]) chv[k] = '0;
    for (int s = 0; s < NSYS; s++) tdi[s] = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    #50 trst_n = 1;
    configure_all();
    repeat (10) @(negedge clk);
    check("chip 15 configured", g_sys[0].g_chip[15].u_chip.cfg == chip_cfg(0, 15));
    check("chip 40 configured", g_sys[0].g_chip[40].u_chip.cfg == chip_cfg(0, 40));
    @(negedge clk) sync_rst = 1;
    @(negedge clk) sync_rst = 0;
    repeat (20000) @(negedge clk);
    check("output aligned", rx_al[0]);

    // load 0.9 of the link capacity: 0.9 / 80 per clock over 64 chips
    p_per_chip = 176;
    phase = 1;
    repeat (120000) @(negedge clk);
    phase = 0;
    repeat (30000) @(negedge clk);
    report(1);
    for (int s = 0; s < NSYS; s++) begin
      for (int g = 0; g < NC / GS; g++)
        check($sformatf("group %0d below capacity: %0.3f", g, eff(s, 1, GS*g, GS*g+GS-1)),
              eff(s, 1, GS*g, GS*g+GS-1) >= 0.99);
      check($sformatf("system %0d TEs reach the output", s), n_te[s] > 0);
    end

    // load 2.0
    p_per_chip = 391;
    phase = 2;
    repeat (120000) @(negedge clk);
    phase = 0;
    repeat (30000) @(negedge clk);
    report(2);
    for (int s = 0; s < NSYS; s++) begin
      check($sformatf("system %0d overloaded: %0.3f", s, eff(s, 2, 0, NC-1)),
            eff(s, 2, 0, NC-1) > 0.35 && eff(s, 2, 0, NC-1) < 0.65);
      for (int g = 0; g < 4; g++)
        check($sformatf("system %0d chips %0d-%0d not starved: %0.3f", s, 16*g, 16*g+15,
                        eff(s, 2, 16*g, 16*g+15)), eff(s, 2, 16*g, 16*g+15) > 0.3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
