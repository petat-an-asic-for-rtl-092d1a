// tb_time_corr: random records through the correction stage; checks the
// added offset modulo 2^20, the inserted chip ID, the untouched fields and
// the one-clock latency.
module tb_time_corr;
  import petat_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  hit_t in, out;
  ts_t offset;
  logic [CHIP_W-1:0] chip_id;
  int checks = 0, failures = 0;
  time_corr dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hit_t h;
    in = '0; offset = '0; chip_id = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      logic v;
      @(negedge clk);
      v = ($urandom_range(0, 3) != 0);
      h = hit_t'({13'($urandom), 32'($urandom)});
      in = h; in_valid = v;
      offset = ts_t'($urandom);
      chip_id = CHIP_W'($urandom);
      @(negedge clk);
      checks++;
      if (out_valid != v) begin failures++; $display("FAIL valid"); end
      if (v) begin
        checks++;
        if (out.ts != ts_t'((int'(h.ts) + int'(offset)) % (1 << TS_W)) || out.chip != chip_id ||
            out.te != h.te || out.chan != h.chan || out.amp != h.amp) begin
          failures++;
          $display("FAIL data %h", out);
        end
      end
      in_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
