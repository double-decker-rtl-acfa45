// codeword_translator: drives the tag's RF switch so that the reflected
// packet lands on a shifted channel and, while a tag bit 1 is sent, turns
// each excitation codeword into another valid one.
//
// The switch is toggled by a square wave at the channel-shift frequency,
// taken straight from the FPGA clock manager. Toggling at that rate moves
// the reflection to an adjacent channel, so the receiver does not see the
// excitation itself. A tag bit 1 then switches the drive to a second clock:
//  * PSK carriers (802.11b, 802.11g, ZigBee): clk_shift_180, the same clock
//    with 180 degrees of phase, which maps codeword 0 to codeword 1 and back.
//  * BLE (GFSK): clk_shift_alt, a clock 500 kHz away from clk_shift, which
//    moves the reflected f0 onto f1 and back.
//
// The switch-over uses the usual glitch-free clock multiplexer: each clock's
// select is a two-flop chain on that clock's falling edge, and a select can
// only be set after the other clock's select has been cleared. The switch
// therefore never sees a pulse shorter than half a shift period; during a
// switch-over it rests low for up to about one period. en (reflect the
// packet) is resynchronised on the falling edge of clk_shift and gates the
// drive. mod and en come from the system clock domain; psk is static.
//
// sw_ctrl is a gated clock by nature (it drives the switch, not any flop),
// so the clocks are used as data on purpose here.
//
// From the paper: 180 degree and 500 kHz codeword translation, and driving
// the switch with clock-manager clocks of the desired frequency and phase.
// This design's choice: the synchroniser and glitch-free switching scheme.
module codeword_translator (
  input  logic clk_shift,      // channel-shift clock, 0 degrees
  input  logic clk_shift_180,  // same clock, 180 degrees (PSK carriers)
  input  logic clk_shift_alt,  // channel-shift clock + 500 kHz (BLE)
  input  logic rst_n,
  input  logic en,             // reflect the packet (asynchronous)
  input  logic mod,            // tag bit 1 being modulated (asynchronous)
  input  logic psk,            // 1: phase flip, 0: frequency shift (static)
  output logic sw_ctrl
);

  logic clk_b;
  assign clk_b = psk ? clk_shift_180 : clk_shift_alt;

  logic en_m, en_s;
  logic sel0_a, sel0_b, sel1_a, sel1_b;

  always_ff @(negedge clk_shift or negedge rst_n) begin
    if (!rst_n) begin
      en_m   <= 1'b0;
      en_s   <= 1'b0;
      sel0_a <= 1'b0;
      sel0_b <= 1'b0;
    end else begin
      en_m   <= en;
      en_s   <= en_m;
      sel0_a <= !mod && !sel1_b;
      sel0_b <= sel0_a;
    end
  end

  always_ff @(negedge clk_b or negedge rst_n) begin
    if (!rst_n) begin
      sel1_a <= 1'b0;
      sel1_b <= 1'b0;
    end else begin
      sel1_a <= mod && !sel0_b;
      sel1_b <= sel1_a;
    end
  end

  always_comb sw_ctrl = en_s & ((clk_shift & sel0_b) | (clk_b & sel1_b));

endmodule
