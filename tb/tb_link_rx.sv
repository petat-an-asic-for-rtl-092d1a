// tb_link_rx: self-checking test of the input link deserialiser.
// A transmitter (link_tx) produces the serial stream, which reaches the
// receiver through a random number of extra delay bits so that the
// receiver has to find the symbol boundary itself. Hits sent are compared
// with hits received, in order. Then the line is damaged
// inside packets: the receiver must count errors and must not deliver a
// corrupted hit (each delivered hit must equal one that was sent, and the
// damaged packets must be missing), and it must go on receiving
// correctly afterwards. The damage is a 12-bit dropout of the line (held
// low), which always breaks the 8B10B code; a single flipped bit can turn
// one valid data code into another and is not detectable by code checks.
module tb_link_rx;
  import petat_pkg::*;
  logic clk = 0, rst_n = 0;
  logic tx_valid = 0, tx_ready, sout, busy;
  hit_t tx_hit = '0;
  logic sin, hit_valid, aligned;
  hit_t hit;
  logic [7:0] err_cnt;
  logic [63:0] dly = '0;
  int delay;
  logic flip = 0;
  int checks = 0, failures = 0;
  hit_t sent[$];
  int rcvd = 0, corrupt_rcvd = 0;

  link_tx u_tx (.clk(clk), .rst_n(rst_n), .hit_valid(tx_valid), .hit_ready(tx_ready),
                .hit(tx_hit), .sout(sout), .busy(busy));
  link_rx dut (.*);
  always #5 clk = ~clk;

  always_ff @(posedge clk) dly <= {dly[62:0], sout};
  assign sin = dly[delay] & ~flip;

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

  logic errmode = 0;
  always @(posedge clk) if (rst_n && hit_valid) begin
    rcvd++;
    if (!errmode) begin
      check("hit expected", sent.size() != 0);
      if (sent.size() != 0) begin
        check($sformatf("hit %h vs %h", hit, sent[0]), hit == sent[0]);
        void'(sent.pop_front());
      end
    end else begin
      // with errors: the hit must be one of those sent, in order
      while (sent.size() != 0 && sent[0] != hit) void'(sent.pop_front());
      check("received hit was sent", sent.size() != 0);
      if (sent.size() != 0) void'(sent.pop_front());
    end
  end

  task automatic send(input int n, input int maxgap);
    for (int i = 0; i < n; i++) begin
      tx_hit = hit_t'({13'($urandom), 32'($urandom)});
      tx_valid = 1;
      do @(posedge clk); while (!tx_ready);
      sent.push_back(tx_hit);
      @(negedge clk);
      tx_valid = 0;
      repeat ($urandom_range(0, maxgap)) @(negedge clk);
    end
  endtask

  initial begin
    delay = $urandom_range(0, 40);
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (100) @(negedge clk);
    check("aligned on idles", aligned);
    send(40, 100);
    send(40, 0);
    repeat (200) @(negedge clk);
    check($sformatf("all received (%0d)", rcvd), rcvd == 80 && sent.size() == 0);
    check("no errors on a clean line", err_cnt == 0);
    // a short line dropout inside each of a few packets
    errmode = 1;
    rcvd = 0;
    for (int i = 0; i < 10; i++) begin
      fork
        send(1, 0);
        begin
          repeat (delay + 30 + $urandom_range(0, 20)) @(negedge clk);
          flip = 1;
          repeat (12) @(negedge clk);
          flip = 0;
        end
      join
      repeat (200) @(negedge clk);
    end
    check($sformatf("errors counted (%0d)", err_cnt), err_cnt != 0);
    check($sformatf("corrupt packets dropped (%0d of 10 delivered)", rcvd), rcvd == 0);
    errmode = 0;
    sent.delete();
    rcvd = 0;
    repeat (100) @(negedge clk);
    send(20, 10);
    repeat (200) @(negedge clk);
    check("receives after errors", rcvd == 20 && sent.size() == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
