// double_decker: top level of the double-decker system logic: the
// transmit-side spreader, the tag and the single-receiver decoder side by
// side.
//
// The spreader (chip_spreader) prepares the payload handed to the commodity
// transmitter, repeating each productive symbol over a data chip.
// The tag half (double_decker_tag) reads the envelope comparator and drives
// the RF switch. The receiver half (chip_decoder) takes the bit or symbol
// stream that an unmodified commodity receiver demodulates from the
// backscattered packet and splits it into the carrier's productive data and
// the tag's data, using the unmodulated pilot parts as the reference that
// earlier systems had to get from a second receiver. Between the two halves
// lies the radio path (RF switch, air, commodity radio), which is outside
// this logic; its ends are the ports tx_*, sw_ctrl and rx_*.
//
// All three parts are configured with the same protocol and data chip mode.
module double_decker
  import dd_pkg::*;
#(
  parameter int unsigned CLK_PER_US = 100,
  parameter int unsigned DET_CYCLES = 50,
  parameter int unsigned END_CYCLES = 400
) (
  input  logic       clk,
  input  logic       rst_n,
  input  proto_e     proto,
  input  chip_mode_e mode,
  // tag side
  input  logic       clk_shift,
  input  logic       clk_shift_180,
  input  logic       clk_shift_alt,
  input  logic       comp_in,
  input  logic       tag_valid,
  input  logic       tag_bit,
  output logic       tag_ready,
  output logic       tag_underflow,
  output logic       sw_ctrl,
  output logic       pkt_active,
  output logic       pkt_end,
  output logic       mod,
  output tag_phase_e phase,
  output logic       chip_start,
  output logic       chip_abort,
  // transmitter side (payload preparation for the commodity transmitter)
  input  logic       tx_prod_valid,
  input  logic [3:0] tx_prod_sym,
  output logic       tx_prod_ready,
  output logic       tx_prod_underflow,
  input  logic       tx_start,
  input  logic       tx_ready,
  output logic       tx_valid,
  output logic [3:0] tx_sym,
  // receiver side
  input  logic       rx_start,
  input  logic       rx_valid,
  input  logic [3:0] rx_sym,
  input  logic       rx_end,
  output logic       prod_valid,
  output logic [3:0] prod_sym,
  output logic       rx_tag_valid,
  output logic       rx_tag_bit
);

  double_decker_tag #(.CLK_PER_US(CLK_PER_US), .DET_CYCLES(DET_CYCLES), .END_CYCLES(END_CYCLES)) u_tag (
    .clk, .rst_n, .clk_shift, .clk_shift_180, .clk_shift_alt, .comp_in, .proto, .mode,
    .tag_valid, .tag_bit, .tag_ready, .tag_underflow, .sw_ctrl,
    .pkt_active, .pkt_end, .mod, .phase, .chip_start, .chip_abort
  );

  chip_spreader u_spr (
    .clk, .rst_n, .cfg(dec_cfg_of(proto)), .mode,
    .prod_valid(tx_prod_valid), .prod_sym(tx_prod_sym), .prod_ready(tx_prod_ready),
    .prod_underflow(tx_prod_underflow), .tx_start, .tx_ready, .tx_valid, .tx_sym
  );

  chip_decoder u_dec (
    .clk, .rst_n, .cfg(dec_cfg_of(proto)), .mode,
    .rx_start, .rx_valid, .rx_sym, .rx_end,
    .prod_valid, .prod_sym, .tag_valid(rx_tag_valid), .tag_bit(rx_tag_bit)
  );

endmodule
