// dd_pkg: types and per-protocol constants shared by the double-decker tag
// and the single-receiver chip decoder.
//
// A data chip is a pilot part followed by one or more data parts of the same
// length. The tag leaves the pilot part alone and modulates one tag bit on
// each data part; the receiver uses the pilot part as the reference.
// The numbers below (data chip size lambda, symbol durations, preamble
// lengths, decoding window) follow the paper where it gives them; the
// ZigBee and BLE preamble lengths and the BLE window are this design's
// choices (taken from the PHY standards, not from the paper).
package dd_pkg;

  // Excitation protocol the tag rides on.
  typedef enum logic [1:0] {
    PROTO_11B    = 2'd0,   // 802.11b 1 Mbps DSSS, 1 us per bit
    PROTO_11G    = 2'd1,   // 802.11g OFDM, 4 us per symbol (24 bits)
    PROTO_ZIGBEE = 2'd2,   // 802.15.4 O-QPSK, 16 us per 4-bit symbol
    PROTO_BLE    = 2'd3    // BLE GFSK 1 Mbps, 1 us per bit
  } proto_e;

  // Data chip modes (paper Fig. 7): data parts per pilot part.
  typedef enum logic [1:0] {
    MODE_I   = 2'd0,       // pilot + 1 data part  (1 tag bit per chip)
    MODE_II  = 2'd1,       // pilot + 3 data parts (3 tag bits per chip)
    MODE_III = 2'd2        // one pilot, then data parts to the end of the packet
  } chip_mode_e;

  // Phase of the tag's framing state machine.
  typedef enum logic [1:0] {
    PH_IDLE     = 2'd0,
    PH_PREAMBLE = 2'd1,
    PH_PILOT    = 2'd2,
    PH_DATA     = 2'd3
  } tag_phase_e;

  // Tag-side timing of one protocol.
  typedef struct packed {
    logic [9:0] preamble_us;   // preamble + PHY header the tag never touches
    logic [4:0] symbol_us;     // duration of one excitation symbol
    logic [7:0] part_symbols;  // symbols in a pilot (or data) part = lambda/2
    logic       psk;           // 1: 180 degree phase flip, 0: 500 kHz frequency shift
  } tag_cfg_t;

  // Receiver-side framing of one protocol, in units of the received stream.
  // A unit is one bit, or one 4-bit symbol for ZigBee.
  typedef struct packed {
    logic [7:0] part_len;      // units in a pilot (or data) part
    logic [7:0] win_start;     // first unit of the decoding window in a part
    logic [7:0] win_len;       // units in the decoding window
    logic       wide;          // 1: units are 4-bit symbols, 0: single bits
  } dec_cfg_t;

  // Data parts per chip; 0 means "until the packet ends" (mode III).
  function automatic logic [1:0] segs_of_mode(chip_mode_e m);
    case (m)
      MODE_I:  return 2'd1;
      MODE_II: return 2'd3;
      default: return 2'd0;
    endcase
  endfunction

  function automatic tag_cfg_t tag_cfg_of(proto_e p);
    tag_cfg_t c;
    case (p)
      // lambda = 16 bits of 1 us, 192 us preamble + header (paper Sec. III)
      PROTO_11B:    c = '{preamble_us: 10'd192, symbol_us: 5'd1,  part_symbols: 8'd8,  psk: 1'b1};
      // lambda = 4 OFDM symbols of 4 us, 5-symbol (20 us) preamble (paper Sec. III)
      PROTO_11G:    c = '{preamble_us: 10'd20,  symbol_us: 5'd4,  part_symbols: 8'd2,  psk: 1'b1};
      // lambda = 6 symbols of 16 us; SHR + PHR = 6 bytes = 192 us (assumed, 802.15.4)
      PROTO_ZIGBEE: c = '{preamble_us: 10'd192, symbol_us: 5'd16, part_symbols: 8'd3,  psk: 1'b1};
      // lambda = 24 bits of 1 us; preamble + access address + header = 56 us (assumed)
      default:      c = '{preamble_us: 10'd56,  symbol_us: 5'd1,  part_symbols: 8'd12, psk: 1'b0};
    endcase
    return c;
  endfunction

  function automatic dec_cfg_t dec_cfg_of(proto_e p);
    dec_cfg_t c;
    case (p)
      // 8-bit parts, whole part decoded (Fig. 4)
      PROTO_11B:    c = '{part_len: 8'd8,  win_start: 8'd0,  win_len: 8'd8,  wide: 1'b0};
      // 48-bit parts (2 OFDM symbols), 20-bit window starting 4 hex digits in (Fig. 5)
      PROTO_11G:    c = '{part_len: 8'd48, win_start: 8'd16, win_len: 8'd20, wide: 1'b0};
      // 3 ZigBee symbols per part, whole part decoded (Fig. 6)
      PROTO_ZIGBEE: c = '{part_len: 8'd3,  win_start: 8'd0,  win_len: 8'd3,  wide: 1'b1};
      // 12-bit parts, whole part decoded (assumed)
      default:      c = '{part_len: 8'd12, win_start: 8'd0,  win_len: 8'd12, wide: 1'b0};
    endcase
    return c;
  endfunction

endpackage
