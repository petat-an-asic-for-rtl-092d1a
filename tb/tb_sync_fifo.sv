// tb_sync_fifo: self-checking test of the hit FIFO against a queue model.
// Random pushes and pops at different rates fill and empty the FIFO; the
// head, empty and full flags, the sticky overflow flag and the count of
// dropped writes are compared with the model every clock.
module tb_sync_fifo;
  localparam int W = 45, D = 8;
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0;
  logic [W-1:0] wdata = 0, rdata;
  logic empty, full, overflow;
  logic [7:0] drop_cnt;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];
  int drops = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
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

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 6000; n++) begin
      int pw;
      pw = (n / 1000) % 2 == 0 ? 70 : 30;  // phases that fill and drain
      @(negedge clk);
      check("empty", empty == (q.size() == 0));
      check("full", full == (q.size() == D));
      if (q.size() != 0) check("head", rdata == q[0]);
      check("overflow", overflow == (drops != 0));
      check("drop count", drop_cnt == 8'(drops > 255 ? 255 : drops));
      wr_en = ($urandom_range(0, 99) < pw);
      rd_en = ($urandom_range(0, 99) < 50);
      wdata = {13'($urandom), 32'($urandom)};
      @(posedge clk);
      if (rd_en && q.size() != 0) begin
        void'(q.pop_front());
        if (wr_en) q.push_back(wdata);
      end else if (wr_en) begin
        if (q.size() < D) q.push_back(wdata);
        else drops++;
      end
    end
    check("saw overflow", drops > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
