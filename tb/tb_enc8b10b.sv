// tb_enc8b10b: self-checking test of the 8B10B encoder.
// Checks a set of symbols taken from the standard code tables (including
// both running disparities and the alternate D.x.7 form), then encodes a
// long random byte/control stream and checks the code's line properties
// independently of the tables: every symbol has disparity 0 or +-2 in the
// direction allowed by the running disparity, the running disparity
// reported by the encoder matches the one counted from the bits, and no
// run of equal bits on the line is longer than five.
module tb_enc8b10b;
  import petat_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, k = 0;
  logic [7:0] din = 0;
  logic [9:0] dout;
  logic rd_out;
  int checks = 0, failures = 0;

  enc8b10b dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // Encode one symbol and compare with the expected code.
  task automatic sym(input logic kk, input logic [7:0] d, input logic [9:0] exp);
    k = kk; din = d; en = 1;
    #1;
    check($sformatf("k=%0d d=%02h got %b exp %b", kk, d, dout, exp), dout == exp);
    @(posedge clk); #1;
    en = 0;
  endtask

  int rd, run, last_bit, disp;
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // running disparity starts negative
    sym(1, 8'hBC, 10'b0011111010);  // K28.5 RD-  -> RD+
    sym(1, 8'hBC, 10'b1100000101);  // K28.5 RD+  -> RD-
    sym(0, 8'hB5, 10'b1010101010);  // D21.5 neutral
    sym(0, 8'h00, 10'b1001110100);  // D0.0 RD-   -> RD-
    sym(0, 8'hF1, 10'b1000110111);  // D17.7 RD-: alternate A7 -> RD+
    sym(0, 8'h03, 10'b1100010100);  // D3.0 RD+   -> RD-
    sym(0, 8'hF1, 10'b1000110111);  // D17.7 RD-: A7 -> RD+
    sym(0, 8'hF1, 10'b1000110001);  // D17.7 RD+: primary P7 -> RD-
    sym(0, 8'h4A, 10'b0101010101);  // D10.2
    sym(1, 8'h3C, 10'b0011111001);  // K28.1 RD-  -> RD+
    sym(1, 8'h3C, 10'b1100000110);  // K28.1 RD+  -> RD-
    // random stream with property checks
    rd = -1;  // after the last symbol: RD-
    run = 0; last_bit = 2;
    for (int n = 0; n < 4000; n++) begin
      k = ($urandom_range(0, 9) == 0);
      din = k ? (($urandom_range(0, 1) != 0) ? 8'hBC : 8'h3C) : 8'($urandom);
      en = 1;
      #1;
      disp = 2 * $countones(dout) - 10;
      check("symbol disparity", (rd < 0) ? (disp == 0 || disp == 2) : (disp == 0 || disp == -2));
      if (disp != 0) rd = -rd;
      check("reported disparity", rd_out == (rd > 0));
      for (int b = 9; b >= 0; b--) begin
        if (int'(dout[b]) == last_bit) run++;
        else run = 1;
        last_bit = int'(dout[b]);
        if (run > 5) begin
          check($sformatf("run length at symbol %0d", n), 1'b0);
          run = 0;
        end
      end
      @(posedge clk); #1;
    end
    en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
