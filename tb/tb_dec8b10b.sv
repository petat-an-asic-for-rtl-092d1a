// tb_dec8b10b: self-checking test of the 8B10B decoder.
// Decodes symbols from the standard tables, then every data byte and the
// K28.1/K28.5/K28.7 control characters in both running disparities, as
// produced by the encoder, and checks byte, k flag and that no error is
// flagged. Symbols outside the code (all zeros, all ones, 6-bit
// sub-blocks with the wrong weight) must raise code_err.
module tb_dec8b10b;
  logic clk = 0, rst_n = 0, en = 0, k = 0;
  logic [7:0] din = 0;
  logic [9:0] sym;
  logic rd_out;
  logic [9:0] ddin;
  logic [7:0] dout;
  logic dk, derr;
  int checks = 0, failures = 0;

  enc8b10b u_enc (.clk(clk), .rst_n(rst_n), .en(en), .k(k), .din(din), .dout(sym), .rd_out(rd_out));
  dec8b10b dut (.din(ddin), .dout(dout), .k(dk), .code_err(derr));
  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
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

  task automatic known(input logic [9:0] s, input logic kk, input logic [7:0] d);
    ddin = s;
    #1;
    check($sformatf("decode %b -> %02h k%0d err%0d", s, dout, dk, derr),
          dout == d && dk == kk && !derr);
  endtask

  initial begin
    known(10'b0011111010, 1, 8'hBC);
    known(10'b1100000101, 1, 8'hBC);
    known(10'b0011111001, 1, 8'h3C);
    known(10'b1100000110, 1, 8'h3C);
    known(10'b1010101010, 0, 8'hB5);
    known(10'b1001110100, 0, 8'h00);
    known(10'b0110001011, 0, 8'h00);
    known(10'b1000110111, 0, 8'hF1);
    known(10'b1100010110, 0, 8'hC3);  // D3.6
    known(10'b0011101001, 0, 8'h3C);  // D28.1 (not K28.1)
    ddin = 10'b0000000000; #1; check("invalid 0", derr);
    ddin = 10'b1111111111; #1; check("invalid 1", derr);
    ddin = 10'b1110110101; #1; check("invalid 6b weight", derr);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // two passes so each code is seen under both disparities
    for (int pass = 0; pass < 2; pass++) begin
      for (int v = 0; v < 259; v++) begin
        k   = (v >= 256);
        din = (v == 256) ? 8'h3C : (v == 257) ? 8'hBC : (v == 258) ? 8'hFC : 8'(v);
        en  = 1;
        #1;
        ddin = sym;
        #1;
        check($sformatf("round trip %02h k%0d sym %b got %02h", din, k, sym, dout),
              dout == din && dk == k && !derr);
        @(posedge clk); #1;
        // insert a neutral-changing symbol to vary the disparity
        if (v % 3 == 0) begin
          k = 0; din = 8'h00; #1;
          @(posedge clk); #1;
        end
      end
    end
    en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
