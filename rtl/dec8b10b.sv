// dec8b10b: 8B10B decoder (combinational).
//
// Decodes a ten-bit symbol (bit 9 = "a", first on the line) into a byte
// and a control flag. The 6-bit sub-block is looked up against both
// running-disparity columns of the standard 5B/6B table; 001111/110000 mark
// a K28.y control character, whose 4-bit sub-block is looked up in the
// control table, otherwise the data 3B/4B table is used. A symbol matching
// no table entry raises code_err. Running-disparity errors are not
// checked. The paper names 8B10B only; the tables are the standard ones,
// and restricting control characters to K28.y is this design's choice.
module dec8b10b (
  input  logic [9:0] din,
  output logic [7:0] dout,
  output logic       k,
  output logic       code_err
);

  function automatic logic [5:0] tab6(input logic [4:0] x);
    case (x)
      5'd0:  return 6'b100111;  5'd1:  return 6'b011101;
      5'd2:  return 6'b101101;  5'd3:  return 6'b110001;
      5'd4:  return 6'b110101;  5'd5:  return 6'b101001;
      5'd6:  return 6'b011001;  5'd7:  return 6'b111000;
      5'd8:  return 6'b111001;  5'd9:  return 6'b100101;
      5'd10: return 6'b010101;  5'd11: return 6'b110100;
      5'd12: return 6'b001101;  5'd13: return 6'b101100;
      5'd14: return 6'b011100;  5'd15: return 6'b010111;
      5'd16: return 6'b011011;  5'd17: return 6'b100011;
      5'd18: return 6'b010011;  5'd19: return 6'b110010;
      5'd20: return 6'b001011;  5'd21: return 6'b101010;
      5'd22: return 6'b011010;  5'd23: return 6'b111010;
      5'd24: return 6'b110011;  5'd25: return 6'b100110;
      5'd26: return 6'b010110;  5'd27: return 6'b110110;
      5'd28: return 6'b001110;  5'd29: return 6'b101110;
      5'd30: return 6'b011110;  default: return 6'b101011;
    endcase
  endfunction

  function automatic logic [3:0] tab4d(input logic [2:0] y);
    case (y)
      3'd0: return 4'b1011;  3'd1: return 4'b1001;
      3'd2: return 4'b0101;  3'd3: return 4'b1100;
      3'd4: return 4'b1101;  3'd5: return 4'b1010;
      3'd6: return 4'b0110;  default: return 4'b1110;
    endcase
  endfunction

  function automatic logic [3:0] tab4k(input logic [2:0] y);
    case (y)
      3'd0: return 4'b1011;  3'd1: return 4'b0110;
      3'd2: return 4'b1010;  3'd3: return 4'b1100;
      3'd4: return 4'b1101;  3'd5: return 4'b0101;
      3'd6: return 4'b1001;  default: return 4'b0111;
    endcase
  endfunction

  // Sub-blocks that exist in an RD- and an RD+ (complemented) version.
  function automatic logic two6(input logic [5:0] c);
    return ($countones(c) != 3) || (c == 6'b111000);
  endfunction
  function automatic logic two4(input logic [3:0] c);
    return ($countones(c) != 2) || (c == 4'b1100);
  endfunction

  logic [5:0] c6;
  logic [3:0] c4;
  assign c6 = din[9:4];
  assign c4 = din[3:0];

  always_comb begin
    logic hit6, hit4;
    logic [4:0] x;
    logic [2:0] y;
    x = '0;
    y = '0;
    hit6 = 1'b0;
    hit4 = 1'b0;
    k = (c6 == 6'b001111) || (c6 == 6'b110000);
    if (k) begin
      x = 5'd28;
      hit6 = 1'b1;
    end else begin
      for (int i = 0; i < 32; i++) begin
        if (c6 == tab6(5'(i)) || (two6(tab6(5'(i))) && c6 == ~tab6(5'(i)))) begin
          x = 5'(i);
          hit6 = 1'b1;
        end
      end
    end
    for (int j = 0; j < 8; j++) begin
      if (k) begin
        // After 001111 the disparity is positive: RD+ column (complement).
        if (c4 == ((c6 == 6'b001111) ? ~tab4k(3'(j)) : tab4k(3'(j)))) begin
          y = 3'(j);
          hit4 = 1'b1;
        end
      end else begin
        if (c4 == tab4d(3'(j)) || (two4(tab4d(3'(j))) && c4 == ~tab4d(3'(j)))) begin
          y = 3'(j);
          hit4 = 1'b1;
        end
      end
    end
    // Alternate form of D.x.7.
    if (!k && (c4 == 4'b0111 || c4 == 4'b1000)) begin
      y = 3'd7;
      hit4 = 1'b1;
    end
    dout = {y, x};
    code_err = !(hit6 && hit4);
  end

endmodule
