// enc8b10b: 8B10B encoder with running disparity.
//
// Encodes one byte (data, or a control character when k is high) into a
// ten-bit symbol using the standard 5B/6B and 3B/4B tables. The symbol is
// combinational in din, k and the current running disparity; the running
// disparity register is updated on the clock edge when en is high, so en
// must be high exactly once per transmitted symbol. Output bit 9 is bit
// "a", the first bit sent on the line; bit 0 is "j".
// The paper only says the links use the well-known 8B10B protocol; the
// tables are the standard ones. Only the K28.y control characters are
// supported, which is all the link protocol uses. Running disparity resets
// to negative.
module enc8b10b (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic       k,
  input  logic [7:0] din,
  output logic [9:0] dout,
  output logic       rd_out   // running disparity after this symbol (1 = +)
);

  logic rd;  // current running disparity, 1 = positive

  // 5B/6B table, RD- column, abcdei with a in bit 5.
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

  // 3B/4B table for data, RD- column, fghj with f in bit 3.
  function automatic logic [3:0] tab4d(input logic [2:0] y);
    case (y)
      3'd0: return 4'b1011;  3'd1: return 4'b1001;
      3'd2: return 4'b0101;  3'd3: return 4'b1100;
      3'd4: return 4'b1101;  3'd5: return 4'b1010;
      3'd6: return 4'b0110;  default: return 4'b1110;
    endcase
  endfunction

  // 3B/4B table for K28.y, RD- column.
  function automatic logic [3:0] tab4k(input logic [2:0] y);
    case (y)
      3'd0: return 4'b1011;  3'd1: return 4'b0110;
      3'd2: return 4'b1010;  3'd3: return 4'b1100;
      3'd4: return 4'b1101;  3'd5: return 4'b0101;
      3'd6: return 4'b1001;  default: return 4'b0111;
    endcase
  endfunction

  function automatic logic unbalanced6(input logic [5:0] c);
    return $countones(c) != 3;
  endfunction
  function automatic logic unbalanced4(input logic [3:0] c);
    return $countones(c) != 2;
  endfunction

  logic [4:0] x;
  logic [2:0] y;
  logic [5:0] c6;
  logic [3:0] c4;
  logic       rd_mid;

  assign x = din[4:0];
  assign y = din[7:5];

  always_comb begin
    logic [5:0] t6;
    logic [3:0] t4;
    logic       alt7;
    t6 = k ? 6'b001111 : tab6(x);
    // Sub-blocks that exist in two versions are given here as RD-, and the
    // RD+ version is the complement.
    c6 = (rd && (unbalanced6(t6) || t6 == 6'b111000)) ? ~t6 : t6;
    rd_mid = unbalanced6(c6) ? ~rd : rd;
    // D.x.7 uses the alternate A7 form where P7 would give a run of five.
    alt7 = (!rd_mid && (x == 5'd17 || x == 5'd18 || x == 5'd20)) ||
           ( rd_mid && (x == 5'd11 || x == 5'd13 || x == 5'd14));
    if (k)                      t4 = tab4k(y);
    else if (y == 3'd7 && alt7) t4 = 4'b0111;
    else                        t4 = tab4d(y);
    c4 = (rd_mid && (k || unbalanced4(t4) || t4 == 4'b1100)) ? ~t4 : t4;
    rd_out = unbalanced4(c4) ? ~rd_mid : rd_mid;
  end

  assign dout = {c6, c4};

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)  rd <= 1'b0;
    else if (en) rd <= rd_out;

endmodule
