// chip_controller: frames an excitation packet into double-decker data chips
// and decides, symbol by symbol, whether the tag modulates.
//
// After a packet is detected the controller waits out the preamble and PHY
// header (never modulated, so the receiver still locks on the packet). The
// payload is then cut into parts of part_symbols excitation symbols. Each
// data chip starts with a pilot part, which the tag leaves untouched, and
// continues with data parts, each carrying one tag bit: the tag modulates
// (flips the phase, or shifts the frequency for BLE) for the whole part when
// the bit is 1 and stays idle when it is 0. The mode sets the data parts per
// chip: 1 (mode I), 3 (mode II) or all remaining parts of the packet
// (mode III, a single pilot part at the start of the payload).
//
// Tag bits come in on a valid/ready stream: a bit is taken (tag_ready pulses)
// on the clock edge where its data part starts. If no bit is waiting, the
// part is left unmodulated and tag_underflow pulses. A packet that ends mid
// chip aborts the chip; the controller then waits for the next packet.
//
// Timing is counted in clock cycles, CLK_PER_US per microsecond. START_LAT is
// the number of clock edges already gone when pkt_start arrives (the
// detector's latency); the first pilot symbol then begins exactly
// preamble_us * CLK_PER_US edges after the packet was first sampled.
//
// From the paper: pilot-then-data chips, lambda per protocol, preamble
// lengths of 802.11b/g, modes I-III. This design's choice: the clock rate,
// mode III parts having the pilot's length, underflow handling, and the
// ZigBee/BLE preamble lengths in dd_pkg.
module chip_controller
  import dd_pkg::*;
#(
  parameter int unsigned CLK_PER_US = 100,
  parameter int unsigned START_LAT  = 52
) (
  input  logic       clk,
  input  logic       rst_n,
  input  tag_cfg_t   cfg,
  input  chip_mode_e mode,
  input  logic       pkt_start,
  input  logic       pkt_active,
  input  logic       tag_valid,
  input  logic       tag_bit,
  output logic       tag_ready,      // one-cycle pulse: tag_bit consumed
  output logic       tag_underflow,  // one-cycle pulse: data part with no tag bit
  output logic       mod,            // 1 while the tag modulates
  output tag_phase_e phase,
  output logic       chip_start,     // one-cycle pulse at each pilot part
  output logic       chip_abort      // one-cycle pulse: packet ended mid payload
);

  localparam int unsigned SYM_W = $clog2(32 * CLK_PER_US);
  localparam int unsigned PRE_W = $clog2(1024 * CLK_PER_US);

  logic [PRE_W-1:0] pre_cnt;
  logic [SYM_W-1:0] cyc_cnt;
  logic [7:0]       sym_cnt;
  logic [1:0]       seg_cnt;

  logic [PRE_W-1:0] pre_cycles;
  logic [SYM_W-1:0] sym_cycles;
  logic [1:0]       segs;

  always_comb begin
    pre_cycles = PRE_W'(cfg.preamble_us * CLK_PER_US - START_LAT - 1);
    sym_cycles = SYM_W'(cfg.symbol_us * CLK_PER_US - 1);
    segs       = segs_of_mode(mode);
  end

  wire sym_last  = (cyc_cnt == '0);
  wire part_last = sym_last && (sym_cnt == cfg.part_symbols - 8'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase         <= PH_IDLE;
      pre_cnt       <= '0;
      cyc_cnt       <= '0;
      sym_cnt       <= '0;
      seg_cnt       <= '0;
      mod           <= 1'b0;
      tag_ready     <= 1'b0;
      tag_underflow <= 1'b0;
      chip_start    <= 1'b0;
      chip_abort    <= 1'b0;
    end else begin
      tag_ready     <= 1'b0;
      tag_underflow <= 1'b0;
      chip_start    <= 1'b0;
      chip_abort    <= 1'b0;
      if (phase != PH_IDLE && !pkt_active) begin
        chip_abort <= (phase != PH_PREAMBLE);
        phase      <= PH_IDLE;
        mod        <= 1'b0;
      end else begin
        case (phase)
          PH_IDLE: begin
            mod <= 1'b0;
            if (pkt_start) begin
              phase   <= PH_PREAMBLE;
              pre_cnt <= pre_cycles;
            end
          end
          PH_PREAMBLE: begin
            if (pre_cnt == '0) begin
              phase      <= PH_PILOT;
              chip_start <= 1'b1;
              cyc_cnt    <= sym_cycles;
              sym_cnt    <= '0;
            end else begin
              pre_cnt <= pre_cnt - 1'b1;
            end
          end
          default: begin  // PH_PILOT, PH_DATA
            if (!sym_last) begin
              cyc_cnt <= cyc_cnt - 1'b1;
            end else begin
              cyc_cnt <= sym_cycles;
              if (!part_last) begin
                sym_cnt <= sym_cnt + 8'd1;
              end else begin
                sym_cnt <= '0;
                if (phase == PH_PILOT || segs == 2'd0 || seg_cnt != segs - 2'd1) begin
                  // next part is a data part: take one tag bit
                  seg_cnt       <= (phase == PH_PILOT) ? 2'd0 : seg_cnt + 2'd1;
                  phase         <= PH_DATA;
                  mod           <= tag_valid & tag_bit;
                  tag_ready     <= tag_valid;
                  tag_underflow <= !tag_valid;
                end else begin
                  phase      <= PH_PILOT;
                  chip_start <= 1'b1;
                  mod        <= 1'b0;
                end
              end
            end
          end
        endcase
      end
    end
  end

  a_no_mod_outside_data: assert property (@(posedge clk) disable iff (!rst_n)
                                          (phase != PH_DATA) |-> !mod);

endmodule
