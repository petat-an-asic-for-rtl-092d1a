// tb_link_tx: self-checking test of the output link serialiser.
// Hits are offered with random gaps and then back to back. The testbench
// captures the serial line, finds the symbol boundaries on its own from
// the K28.5 comma, decodes each symbol and checks that between packets
// only K28.5 idles appear, that each packet is K28.1 followed by 7 data
// bytes holding the hit record (LSB first, zero padded), that the hits
// come out in order, and that back-to-back hits are accepted every 80
// clocks (8 symbols of 10 bits, one bit per clock).
module tb_link_tx;
  import petat_pkg::*;
  logic clk = 0, rst_n = 0, hit_valid = 0, hit_ready, sout, busy;
  hit_t hit = '0;
  int checks = 0, failures = 0;
  hit_t sent[$];
  int rcvd = 0, idles = 0;
  logic [9:0] win = '0, sym;
  logic [7:0] d;
  logic dk, derr;

  link_tx dut (.*);
  dec8b10b u_dec (.din(sym), .dout(d), .k(dk), .code_err(derr));
  always #5 clk = ~clk;

  initial begin
    #3000000;
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

  // Line monitor: align on the comma, then decode every 10 bits.
  int phase = -1, left = 0;
  logic [PAYLOAD_W-1:0] pl;
  always @(posedge clk) if (rst_n) begin
    win = {win[8:0], sout};
    if (phase < 0 && (win == K28_5_NEG || win == K28_5_POS)) phase = 0;
    else if (phase >= 0) phase++;
    if (phase == 10) phase = 0;
    if (phase == 0) begin
      sym = win;
      #0;
      #1;
      check("valid code", !derr);
      if (left > 0) begin
        check("data byte in packet", !dk);
        pl = {d, pl[PAYLOAD_W-1:8]};
        left--;
        if (left == 0) begin
          check("packet present", sent.size() != 0);
          if (sent.size() != 0) begin
            check($sformatf("payload %h vs %h", pl, sent[0]), pl == PAYLOAD_W'(sent[0]));
            void'(sent.pop_front());
          end
          rcvd++;
        end
      end else begin
        check("control between packets", dk && (d == K28_5 || d == K28_1));
        if (d == K28_1) left = DATA_BYTES;
        else idles++;
      end
    end
  end

  int t_last, gaps_ok;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (50) @(negedge clk);
    // sparse hits
    for (int n = 0; n < 20; n++) begin
      hit = hit_t'({13'($urandom), 32'($urandom)});
      hit_valid = 1;
      do @(posedge clk); while (!hit_ready);
      sent.push_back(hit);
      @(negedge clk);
      hit_valid = 0;
      repeat ($urandom_range(0, 200)) @(negedge clk);
    end
    // back to back
    gaps_ok = 0;
    for (int n = 0; n < 30; n++) begin
      hit = hit_t'({13'($urandom), 32'($urandom)});
      hit_valid = 1;
      do @(posedge clk); while (!hit_ready);
      sent.push_back(hit);
      if (n > 0) check($sformatf("80 clocks per hit, got %0d", $time / 10 - t_last), $time / 10 - t_last == 80);
      t_last = int'($time / 10);
      @(negedge clk);
    end
    hit_valid = 0;
    repeat (300) @(negedge clk);
    check("all hits received", rcvd == 50 && sent.size() == 0);
    check("idles seen", idles > 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
