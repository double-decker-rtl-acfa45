// chip_decoder: recovers both the carrier's productive data and the tag's
// bits from the single stream a commodity receiver demodulates from the
// backscattered packet.
//
// The stream is framed exactly as the tag framed it: a pilot part of
// part_len units, then data parts of the same length (1 per chip in mode I,
// 3 in mode II, all the rest of the packet in mode III). A unit is one bit
// (802.11b, 802.11g, BLE) or one 4-bit symbol (ZigBee). Only the units
// inside the decoding window [win_start, win_start + win_len) of each part
// are used; for 802.11g the window is 20 bits in the middle of the
// two-OFDM-symbol part, because BCC coding smears bits near the part's edges.
//
// Pilot part: a per-bit majority vote over the window gives the reference
// unit, which is also the productive data of the chip (prod_valid/prod_sym).
// Data part: every window unit that differs from the reference is counted;
// tag bit = 1 when more than half of the window differs. This is the
// "pilot XOR data" rule with redundancy against bursty bit errors.
//
// Interface: rx_start (pulse) marks the first unit of the payload, each
// rx_valid delivers one unit in rx_sym (bit 0 only when wide = 0), rx_end
// (pulse) ends the packet and drops a chip left unfinished. prod_valid and
// tag_valid pulse one cycle after the last unit of a part was delivered.
//
// From the paper: pilot-as-reference XOR decoding, the window position and
// length for 802.11g, the part sizes. This design's choice: majority voting
// as the combining rule and the streaming interface.
module chip_decoder
  import dd_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  dec_cfg_t   cfg,
  input  chip_mode_e mode,
  input  logic       rx_start,
  input  logic       rx_valid,
  input  logic [3:0] rx_sym,
  input  logic       rx_end,
  output logic       prod_valid,
  output logic [3:0] prod_sym,
  output logic       tag_valid,
  output logic       tag_bit
);

  logic       active, in_data;
  logic [7:0] pos;
  logic [1:0] seg;
  logic [7:0] ones [4];
  logic [7:0] mism;
  logic [3:0] ref_sym;

  logic [3:0] mask, sym_m;
  logic       in_win, part_last;
  logic [7:0] ones_nx [4];
  logic [7:0] mism_nx;
  logic [3:0] ref_nx;
  logic [1:0] segs;

  always_comb begin
    mask      = cfg.wide ? 4'hF : 4'h1;
    sym_m     = rx_sym & mask;
    in_win    = (pos >= cfg.win_start) && ({1'b0, pos} < {1'b0, cfg.win_start} + {1'b0, cfg.win_len});
    part_last = (pos == cfg.part_len - 8'd1);
    segs      = segs_of_mode(mode);
    for (int b = 0; b < 4; b++) begin
      ones_nx[b] = ones[b] + 8'((in_win && sym_m[b]) ? 1 : 0);
      ref_nx[b]  = ({ones_nx[b], 1'b0} > {1'b0, cfg.win_len});
    end
    mism_nx = mism + 8'((in_win && (sym_m != ref_sym)) ? 1 : 0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active     <= 1'b0;
      in_data    <= 1'b0;
      pos        <= '0;
      seg        <= '0;
      mism       <= '0;
      ref_sym    <= '0;
      prod_valid <= 1'b0;
      prod_sym   <= '0;
      tag_valid  <= 1'b0;
      tag_bit    <= 1'b0;
      for (int b = 0; b < 4; b++) ones[b] <= '0;
    end else begin
      prod_valid <= 1'b0;
      tag_valid  <= 1'b0;
      if (rx_start) begin
        active  <= 1'b1;
        in_data <= 1'b0;
        pos     <= '0;
        seg     <= '0;
        mism    <= '0;
        for (int b = 0; b < 4; b++) ones[b] <= '0;
      end else if (rx_end) begin
        active <= 1'b0;
      end else if (active && rx_valid) begin
        if (!in_data) begin
          for (int b = 0; b < 4; b++) ones[b] <= ones_nx[b];
        end else begin
          mism <= mism_nx;
        end
        if (!part_last) begin
          pos <= pos + 8'd1;
        end else begin
          pos <= '0;
          if (!in_data) begin
            ref_sym    <= ref_nx & mask;
            prod_sym   <= ref_nx & mask;
            prod_valid <= 1'b1;
            in_data    <= 1'b1;
            seg        <= '0;
            for (int b = 0; b < 4; b++) ones[b] <= '0;
          end else begin
            tag_bit   <= ({mism_nx, 1'b0} > {1'b0, cfg.win_len});
            tag_valid <= 1'b1;
            mism      <= '0;
            if (segs == 2'd0 || seg != segs - 2'd1) begin
              seg <= seg + 2'd1;
            end else begin
              in_data <= 1'b0;
            end
          end
        end
      end
    end
  end

endmodule
