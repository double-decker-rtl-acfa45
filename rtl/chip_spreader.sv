// chip_spreader: prepares the excitation payload so that every data chip
// carries one productive symbol, which is what lets the tag's pilot parts
// serve as the receiver's reference.
//
// Each productive symbol is repeated over a whole data chip: part_len units
// for the pilot part plus part_len units for every data part (1 in mode I,
// 3 in mode II). In mode III the whole payload is one chip, so the symbol
// taken at the start of the packet is repeated until the next packet. A
// unit is one bit, or one 4-bit symbol for ZigBee, exactly as in
// chip_decoder. The transmitter sends the units in order, one per
// excitation bit/symbol, after its own preamble.
//
// Interface: prod_valid/prod_sym/prod_ready is the productive data stream
// (a symbol is taken on the cycle prod_ready is high); tx_start (pulse)
// starts a new payload; the transmitter takes one unit per cycle in which
// tx_ready is high and tx_valid is high. tx_valid is high from tx_start on;
// if no productive symbol waits at a chip start, the chip is filled with
// zeros and prod_underflow pulses.
//
// From the paper: the repetition of each original symbol over a data chip.
// This design's choice: the stream interface and underflow handling.
module chip_spreader
  import dd_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  dec_cfg_t   cfg,
  input  chip_mode_e mode,
  input  logic       prod_valid,
  input  logic [3:0] prod_sym,
  output logic       prod_ready,
  output logic       prod_underflow,
  input  logic       tx_start,
  input  logic       tx_ready,
  output logic       tx_valid,
  output logic [3:0] tx_sym
);

  logic [9:0] pos;          // unit index within the chip
  logic [9:0] chip_len;     // units per chip (0 = unbounded, mode III)
  logic [3:0] cur;
  logic       take;         // a unit is sent this cycle
  logic       chip_first;   // the unit being sent is the first of its chip

  always_comb begin
    case (mode)
      MODE_I:  chip_len = 10'(cfg.part_len) * 10'd2;
      MODE_II: chip_len = 10'(cfg.part_len) * 10'd4;
      default: chip_len = '0;
    endcase
    take       = tx_valid && tx_ready;
    chip_first = (pos == '0);
    prod_ready = take && chip_first && prod_valid;
  end

  // The unit sent at a chip start is the freshly taken productive symbol.
  logic [3:0] mask;
  assign mask   = cfg.wide ? 4'hF : 4'h1;
  assign tx_sym = chip_first ? (prod_valid ? (prod_sym & mask) : 4'h0) : cur;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_valid       <= 1'b0;
      pos            <= '0;
      cur            <= '0;
      prod_underflow <= 1'b0;
    end else begin
      prod_underflow <= 1'b0;
      if (tx_start) begin
        tx_valid <= 1'b1;
        pos      <= '0;
      end else if (take) begin
        if (chip_first) begin
          cur            <= prod_valid ? (prod_sym & mask) : 4'h0;
          prod_underflow <= !prod_valid;
        end
        if (chip_len != '0 && pos == chip_len - 10'd1) pos <= '0;
        else if (chip_len != '0 || pos == '0)           pos <= pos + 10'd1;
      end
    end
  end

endmodule
