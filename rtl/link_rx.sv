// link_rx: deserialiser of a PETAT input link (the "Ser/Par" block).
//
// Shifts the serial input, one bit per clock, into a ten-bit window. The
// receiver aligns itself on the K28.5 idle character: whenever the window
// holds K28.5 (either disparity) a symbol boundary is set there, and from
// then on every tenth bit completes a symbol, which is decoded. Idle
// characters are discarded. A K28.1 start character opens a packet; the 7
// data bytes that follow are collected and the hit record is presented on
// hit/hit_valid for one clock after the last byte (about 10 clocks after
// that byte's last bit arrived, one clock of latency in the window).
// Protocol errors - an invalid code, a control character inside a packet,
// data outside a packet, or a comma at an unexpected position - abort the
// current packet and are counted in err_cnt (saturating).
// The paper describes the idle/start/fixed-length packet scheme; link
// initialisation is not described there, so comma alignment and the error
// handling are this design's choice. The input is sampled with the system
// clock: all chips share one clock.
module link_rx
  import petat_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       sin,
  output logic       hit_valid,
  output hit_t       hit,
  output logic       aligned,
  output logic [7:0] err_cnt
);

  logic [9:0]           win;
  logic [3:0]           cnt;
  logic [2:0]           left;      // data bytes still expected
  logic [PAYLOAD_W-1:0] payload;
  logic [7:0]           d;
  logic                 k, cerr;
  logic                 comma, sym;

  dec8b10b u_dec (.din(win), .dout(d), .k(k), .code_err(cerr));

  assign comma = (win == K28_5_NEG) || (win == K28_5_POS);
  assign sym   = comma || (aligned && cnt == 4'd9);
  assign hit   = hit_t'(payload[HIT_W-1:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win       <= '0;
      cnt       <= '0;
      aligned   <= 1'b0;
      left      <= '0;
      payload   <= '0;
      hit_valid <= 1'b0;
      err_cnt   <= '0;
    end else begin
      logic err;
      err       = 1'b0;
      win       <= {win[8:0], sin};
      hit_valid <= 1'b0;
      if (sym) begin
        cnt     <= 4'd0;
        aligned <= 1'b1;
        if (comma && aligned && cnt != 4'd9) err = 1'b1;
        if (cerr) begin
          err  = 1'b1;
          left <= '0;
        end else if (k) begin
          if (left != 3'd0) err = 1'b1;  // packet cut short
          left <= (d == K28_1) ? 3'(DATA_BYTES) : 3'd0;
        end else if (left != 3'd0) begin
          payload <= {d, payload[PAYLOAD_W-1:8]};
          left    <= left - 1'b1;
          if (left == 3'd1) hit_valid <= 1'b1;
        end else begin
          err = 1'b1;                    // data outside a packet
        end
      end else if (cnt != 4'd9) begin
        cnt <= cnt + 1'b1;
      end
      if (err && err_cnt != 8'hFF) err_cnt <= err_cnt + 1'b1;
    end
  end

endmodule
