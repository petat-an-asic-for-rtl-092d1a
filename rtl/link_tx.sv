// link_tx: serialiser of a PETAT output link (the "Par/Ser" block).
//
// The link sends one bit per clock, bit "a" of each 8B10B symbol first, so
// a symbol takes 10 clocks. With nothing to send it repeats the K28.5 idle
// character. A hit is sent as a packet of 8 symbols: a K28.1 start
// character and 7 data bytes holding the 45-bit hit record, least
// significant byte first, padded with zeros to 56 bits. A packet thus takes
// 80 clocks; at the paper's 312.5 MHz that is the 3.9 million hits per
// second it quotes per link. Packets can follow each other without gaps.
//
// Interface: hit_valid/hit_ready handshake; a hit is taken in the cycle
// both are high, which is the last bit of a symbol when no packet is in
// progress. The 8-word packet length and 8B10B follow the paper; the
// choice of K28.5/K28.1, byte order and padding are this design's own.
module link_tx
  import petat_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic hit_valid,
  output logic hit_ready,
  input  hit_t hit,
  output logic sout,
  output logic busy        // a packet is being sent
);

  logic [3:0]           bit_cnt;   // position within the current symbol
  logic [2:0]           left;      // data bytes still to send
  logic [PAYLOAD_W-1:0] payload;
  logic [9:0]           shreg;
  logic                 enc_en, enc_k;
  logic [7:0]           enc_d;
  logic [9:0]           enc_q;
  logic                 rd_unused;

  enc8b10b u_enc (
    .clk(clk), .rst_n(rst_n), .en(enc_en), .k(enc_k), .din(enc_d),
    .dout(enc_q), .rd_out(rd_unused)
  );

  wire boundary = (bit_cnt == 4'd9);
  assign hit_ready = boundary && (left == 3'd0);
  assign enc_en    = boundary;
  assign sout      = shreg[9];
  assign busy      = (left != 3'd0);

  always_comb begin
    if (left != 3'd0) begin
      enc_k = 1'b0;
      enc_d = payload[7:0];
    end else if (hit_valid) begin
      enc_k = 1'b1;
      enc_d = K28_1;
    end else begin
      enc_k = 1'b1;
      enc_d = K28_5;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bit_cnt <= 4'd9;
      left    <= '0;
      payload <= '0;
      shreg   <= '0;
    end else if (boundary) begin
      bit_cnt <= 4'd0;
      shreg   <= enc_q;
      if (left != 3'd0) begin
        left    <= left - 1'b1;
        payload <= payload >> 8;
      end else if (hit_valid) begin
        left    <= 3'(DATA_BYTES);
        payload <= PAYLOAD_W'(hit);
      end
    end else begin
      bit_cnt <= bit_cnt + 1'b1;
      shreg   <= {shreg[8:0], 1'b0};
    end
  end

endmodule
