// petat_pkg: types and constants shared by the PETAT readout logic.
//
// A hit record travels unchanged through the whole readout tree. It holds
// the chip that made the hit, the SiPM channel, the 9-bit amplitude and a
// 20-bit time stamp in 50 ps bins, which wraps around every 2^20 bins
// (about 52 us). A timeout event (TE) is a record with the te bit set; it
// carries a valid time stamp but no hit, and its amp field holds status
// flags instead of an amplitude. The 20-bit stamp, the 9-bit amplitude,
// 32 channels and the TE flag follow the paper; the field order and the
// 10-bit chip ID (enough for 1024 chips) are this design's choice.
//
// Time stamps are compared modulo 2^20: a is older than b when a - b,
// taken as a signed 20-bit number, is negative. This is correct as long as
// any two stamps being compared are less than half a period apart, which
// the regular timeout events guarantee.
package petat_pkg;

  localparam int TS_W     = 20;  // time stamp bits (50 ps bins)
  localparam int FINE_W   = 6;   // bins per 3.2 ns clock period: 64
  localparam int CHIP_W   = 10;  // chip ID bits
  localparam int CHAN_W   = 5;   // SiPM channel bits (32 channels)
  localparam int AMP_W    = 9;   // ADC amplitude bits

  typedef logic [TS_W-1:0] ts_t;

  typedef struct packed {
    logic              te;    // 1: timeout event, not a hit
    logic [CHIP_W-1:0] chip;  // chip that generated the hit
    logic [CHAN_W-1:0] chan;  // SiPM channel within that chip
    logic [AMP_W-1:0]  amp;   // amplitude, or status flags for a TE
    ts_t               ts;    // time stamp
  } hit_t;

  localparam int HIT_W = $bits(hit_t);  // 45

  // Link packet: one start character followed by DATA_BYTES data bytes.
  localparam int WORDS_PER_HIT = 8;
  localparam int DATA_BYTES    = WORDS_PER_HIT - 1;  // 56 payload bits
  localparam int PAYLOAD_W     = 8 * DATA_BYTES;

  // 8B10B control characters used on the links (byte values of K28.y).
  localparam logic [7:0] K28_5 = 8'hBC;  // idle / comma
  localparam logic [7:0] K28_1 = 8'h3C;  // start of a hit packet
  // K28.5 in both running disparities, bit a at position 9.
  localparam logic [9:0] K28_5_NEG = 10'b0011111010;
  localparam logic [9:0] K28_5_POS = 10'b1100000101;

  // Timeout events: at least one packet every quarter of the wrap period.
  localparam int TS_PERIOD = 1 << TS_W;

  // Chip configuration, written through JTAG. src_en bit 0 is the local
  // hit FIFO, bit 1+i input link i.
  localparam int MAX_SRC = 8;
  typedef struct packed {
    logic [CHIP_W-1:0]  chip_id;
    logic [MAX_SRC-1:0] src_en;
    logic               te_drop_en;
    ts_t                ts_offset;
    ts_t                age_min;
  } cfg_t;

  localparam int CFG_W = $bits(cfg_t);  // 59

  // Reset configuration: only the local hits take part, hits are released
  // after 4096 bins (64 clocks, about 205 ns).
  localparam cfg_t CFG_RESET = '{chip_id: '0, src_en: 8'h01, te_drop_en: 1'b0,
                                 ts_offset: '0, age_min: 20'd4096};

  // a strictly older than b, wrap-aware.
  function automatic logic ts_older(ts_t a, ts_t b);
    ts_t d;
    d = a - b;
    return d[TS_W-1];
  endfunction

endpackage
