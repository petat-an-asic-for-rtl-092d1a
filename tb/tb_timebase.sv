// tb_timebase: checks that the time counter advances by 64 bins (one
// 3.2 ns clock of 50 ps bins) per clock, wraps after 2^20 bins, i.e.
// 16384 clocks, and is cleared by the broadcast reset.
module tb_timebase;
  import petat_pkg::*;
  logic clk = 0, rst_n = 0, sync_rst = 0;
  ts_t now;
  int checks = 0, failures = 0;
  timebase dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s now=%0d", what, now);
    end
  endtask

  initial begin
    int wraps;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check("reset value", now == 0);
    wraps = 0;
    for (int n = 1; n <= 40000; n++) begin
      ts_t prev;
      prev = now;
      @(posedge clk); #1;
      check("step", now == ts_t'(prev + 64));
      check("fine bits zero", now[FINE_W-1:0] == 0);
      if (now == 0) begin
        wraps++;
        check("wrap period", n == 16384 * wraps);
      end
    end
    check("wrapped twice", wraps == 2);
    @(negedge clk) sync_rst = 1;
    @(negedge clk) sync_rst = 0;
    check("broadcast reset", now == 0);
    @(posedge clk); #1;
    check("counting after reset", now == 64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
