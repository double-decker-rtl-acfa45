// double_decker_tag: the FPGA logic of a double-decker backscatter tag.
//
// The envelope comparator output (comp_in) feeds the packet detector; the
// chip controller frames each detected packet into pilot and data parts and
// raises mod for data parts that carry a tag bit 1; the codeword translator
// turns that into the RF switch drive (sw_ctrl), reflecting the whole packet
// onto the shifted channel and flipping the phase (PSK carriers) or shifting
// the frequency by 500 kHz (BLE) while mod is high.
//
// proto and mode are static configuration; tag bits arrive on a valid/ready
// stream in the clk domain. clk is the system clock (CLK_PER_US cycles per
// microsecond); clk_shift, clk_shift_180 and clk_shift_alt are the clock
// manager's shift clocks (0 degrees, 180 degrees, +500 kHz). The detector's latency is handed to the controller so that the
// first pilot symbol starts exactly one preamble after the packet began.
module double_decker_tag
  import dd_pkg::*;
#(
  parameter int unsigned CLK_PER_US = 100,
  parameter int unsigned DET_CYCLES = 50,
  parameter int unsigned END_CYCLES = 400
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clk_shift,
  input  logic       clk_shift_180,
  input  logic       clk_shift_alt,
  input  logic       comp_in,
  input  proto_e     proto,
  input  chip_mode_e mode,
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
  output logic       chip_abort
);

  localparam int unsigned START_LAT = DET_CYCLES + 2;

  tag_cfg_t cfg;
  logic     pkt_start;

  assign cfg = tag_cfg_of(proto);

  packet_detector #(.DET_CYCLES(DET_CYCLES), .END_CYCLES(END_CYCLES)) u_det (
    .clk, .rst_n, .comp_in, .pkt_start, .pkt_end, .pkt_active
  );

  chip_controller #(.CLK_PER_US(CLK_PER_US), .START_LAT(START_LAT)) u_ctrl (
    .clk, .rst_n, .cfg, .mode, .pkt_start, .pkt_active,
    .tag_valid, .tag_bit, .tag_ready, .tag_underflow,
    .mod, .phase, .chip_start, .chip_abort
  );

  codeword_translator u_cwt (
    .clk_shift, .clk_shift_180, .clk_shift_alt, .rst_n,
    .en(pkt_active), .mod, .psk(cfg.psk), .sw_ctrl
  );

endmodule
