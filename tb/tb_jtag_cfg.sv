// tb_jtag_cfg: self-checking test of the JTAG slow-control port.
// Drives tck/tms/tdi as a JTAG master would (tms and tdi change on the
// falling edge, tdo is sampled before the rising edge). Checks the reset
// configuration, the IR capture pattern, the 32-bit IDCODE selected after
// reset, writing random configurations through CONFIG and reading them
// back, the update toggle, the one-bit delay of BYPASS, and that
// Test-Logic-Reset (five tms=1 clocks) restores IDCODE.
module tb_jtag_cfg;
  import petat_pkg::*;
  localparam logic [31:0] ID = 32'h1000_50A1;
  logic tck = 0, trst_n = 0, tms = 1, tdi = 0, tdo, cfg_upd;
  cfg_t cfg;
  int checks = 0, failures = 0;

  jtag_cfg #(.IDCODE(ID)) dut (.*);
  always #10 tck = ~tck;

  initial begin
    #10000000;
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

  task automatic clk_tms(input logic t);
    @(negedge tck) tms = t;
    @(posedge tck);
  endtask

  // Shift n bits from RTI through DR (ir = 0) or IR (ir = 1), back to RTI.
  task automatic shift(input bit ir, input int n, input logic [127:0] din,
                       output logic [127:0] dout);
    clk_tms(1);             // SEL_DR
    if (ir) clk_tms(1);     // SEL_IR
    clk_tms(0);             // CAP
    clk_tms(0);             // SHIFT
    dout = '0;
    for (int i = 0; i < n; i++) begin
      @(negedge tck);
      tdi = din[i];
      tms = (i == n - 1);
      #5;
      dout[i] = tdo;
      @(posedge tck);
    end
    clk_tms(1);             // UPDATE
    clk_tms(0);             // RTI
    #1;                     // let the update settle
  endtask

  initial begin
    logic [127:0] q;
    cfg_t v;
    logic u0;
    #25 trst_n = 1;
    check("reset configuration", cfg == CFG_RESET);
    clk_tms(0);  // RTI
    shift(0, 32, '0, q);
    check($sformatf("IDCODE %h", q[31:0]), q[31:0] == ID);
    shift(1, 4, 128'b1000, q);
    check("IR capture 0001", q[3:0] == 4'b0001);
    for (int n = 0; n < 5; n++) begin
      v = cfg_t'({27'($urandom), 32'($urandom)});
      u0 = cfg_upd;
      shift(0, CFG_W, 128'(v), q);
      check($sformatf("config written %h exp %h", cfg, v), cfg == v);
      check("update toggled", cfg_upd != u0);
      shift(0, CFG_W, '0, q);
      check("config read back", cfg_t'(q[CFG_W-1:0]) == v);
      check("config after read-back write", cfg == '0);
      shift(0, CFG_W, 128'(v), q);
    end
    shift(1, 4, 128'b1111, q);  // BYPASS
    shift(0, 16, 128'hA5C3, q);
    check($sformatf("bypass delay %h", q[15:0]), q[15:0] == 16'h4B86);
    for (int n = 0; n < 5; n++) clk_tms(1);  // Test-Logic-Reset
    clk_tms(0);
    shift(0, 32, '0, q);
    check("IDCODE after TLR", q[31:0] == ID);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
