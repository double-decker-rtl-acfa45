`timescale 1ns/1ps
// tb_double_decker_tag: self-checking test of the tag logic on its own.
// An 802.11b packet is played on the comparator input. The test checks
// that the switch stays idle before the packet, that the first pilot
// symbol starts exactly 192 us after the comparator rose (detector latency
// compensated), that chips and tag bits follow the mode I layout at the
// right cycle, that the switch follows the 180 degree clock only in data
// parts carrying a 1, and that everything stops after the packet.
module tb_double_decker_tag;
  import dd_pkg::*;
  localparam int CPU = 100;

  logic clk = 0, rst_n = 1;
  logic clk_shift = 0, clk_shift_180 = 1, clk_shift_alt = 0;
  logic comp_in = 0, tag_valid = 1, tag_bit;
  proto_e proto = PROTO_11B;
  chip_mode_e mode = MODE_I;
  logic tag_ready, tag_underflow, sw_ctrl, pkt_active, pkt_end, mod, chip_start, chip_abort;
  tag_phase_e phase;

  double_decker_tag dut (.*);

  always #5 clk = ~clk;
  always #25 clk_shift = ~clk_shift;
  always #25 clk_shift_180 = ~clk_shift_180;
  always #15 clk_shift_alt = ~clk_shift_alt;

  int checks = 0, failures = 0, cyc = 0, sw_rises = 0, chips = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge sw_ctrl) sw_rises++;
  always @(posedge clk) if (chip_start) chips++;

  logic [63:0] bits;
  int idx = 0;
  assign tag_bit = bits[idx % 64];
  always @(posedge clk) if (tag_ready) idx <= idx + 1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  // reset pulse: an edge at time 1 so every flop is reset
  initial #1 rst_n = 0;

  initial begin
    int k, hi;
    bits = {$urandom, $urandom};
    repeat (5) @(negedge clk);
    rst_n = 1;
    sw_rises = 0;
    chips = 0;
    repeat (100) @(negedge clk);
    check(sw_rises == 0, "switch idle before the packet");
    comp_in = 1;
    k = cyc + 1;
    while (cyc < k + 192 * CPU - 1) @(negedge clk);
    check(phase == PH_PREAMBLE && !mod, "preamble untouched up to 192 us");
    check(sw_rises > 0, "packet reflected (shifted) during the preamble");
    @(negedge clk);
    check(phase == PH_PILOT, "first pilot symbol at 192 us");
    for (int c = 0; c < 4; c++) begin
      // pilot part of 8 us, then data part of 8 us carrying bits[c]
      while (cyc < k + 192 * CPU + c * 16 * CPU + 4 * CPU) @(negedge clk);
      hi = 0;
      repeat (8) begin @(posedge clk_shift); #12; hi += sw_ctrl; end
      check(phase == PH_PILOT && hi == 8, $sformatf("chip %0d pilot on the 0 degree clock", c));
      while (cyc < k + 192 * CPU + c * 16 * CPU + 12 * CPU) @(negedge clk);
      hi = 0;
      repeat (8) begin @(posedge clk_shift); #12; hi += sw_ctrl; end
      check(phase == PH_DATA && mod == bits[c], $sformatf("chip %0d data part carries bit %0b", c, bits[c]));
      check(hi == (bits[c] ? 0 : 8), $sformatf("chip %0d switch phase", c));
    end
    while (cyc < k + 192 * CPU + 64 * CPU) @(negedge clk);
    comp_in = 0;
    repeat (1000) @(negedge clk);
    check(!pkt_active && phase == PH_IDLE, "idle after the packet");
    check(chips == 5 && idx == 4, $sformatf("chip count %0d, bits taken %0d", chips, idx));
    hi = sw_rises;
    repeat (200) @(negedge clk);
    check(sw_rises == hi, "switch idle after the packet");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
