`timescale 1ns/1ps
// tb_codeword_translator: self-checking test of the RF switch drive.
// Three free-running shift clocks drive the translator: clk_shift at
// 20 MHz, its 180 degree copy, and a slightly faster clock standing in for
// the +500 kHz clock (scaled so the difference shows in a short run). The
// test checks that the switch is idle while no packet is reflected, follows
// clk_shift for a tag bit 0, follows the 180 degree clock for a tag bit 1
// on PSK carriers, follows the second clock for a tag bit 1 on BLE, and
// never emits a pulse shorter than half a period of the faster clock.
module tb_codeword_translator;
  logic clk_shift = 0, clk_shift_180 = 1, clk_shift_alt = 0, rst_n = 1;
  logic en = 0, mod = 0, psk = 1;
  logic sw_ctrl;

  codeword_translator dut (.*);

  always #25 clk_shift = ~clk_shift;            // 50 ns period
  always #25 clk_shift_180 = ~clk_shift_180;    // same, 180 degrees
  always #23 clk_shift_alt = ~clk_shift_alt;    // 46 ns period

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // shortest pulse seen on the switch
  realtime last_edge = 0, min_pulse = 1e9;
  always @(sw_ctrl) begin
    if ($realtime - last_edge < min_pulse && last_edge > 0) min_pulse = $realtime - last_edge;
    last_edge = $realtime;
  end
  int sw_rises = 0;
  always @(posedge sw_ctrl) sw_rises++;

  // compare sw_ctrl with a reference 12 ns after every edge of 'which' clock
  task automatic expect_follow(input bit alt, input bit invert, input int n, input string what);
    for (int i = 0; i < n; i++) begin
      if (alt) @(clk_shift_alt); else @(clk_shift);
      #12;
      check(sw_ctrl == ((alt ? clk_shift_alt : clk_shift) ^ invert), what);
    end
  endtask

  // reset pulse: an edge at time 1 so every flop is reset
  initial #1 rst_n = 0;

  initial begin
    int r0;
    #100 rst_n = 1;
    // no packet: switch idle
    r0 = sw_rises;
    repeat (20) @(posedge clk_shift);
    check(sw_rises == r0 && sw_ctrl == 0, "idle without packet");
    // packet, PSK, tag bit 0
    en = 1;
    repeat (6) @(posedge clk_shift);
    expect_follow(0, 0, 40, "PSK bit 0 follows clk_shift");
    // tag bit 1: phase flipped
    mod = 1;
    repeat (6) @(posedge clk_shift);
    expect_follow(0, 1, 40, "PSK bit 1 follows the 180 degree clock");
    mod = 0;
    repeat (6) @(posedge clk_shift);
    expect_follow(0, 0, 20, "PSK back to bit 0");
    // BLE: frequency shift
    psk = 0;
    repeat (6) @(posedge clk_shift);
    expect_follow(0, 0, 20, "FSK bit 0 follows clk_shift");
    mod = 1;
    repeat (6) @(posedge clk_shift);
    expect_follow(1, 0, 40, "FSK bit 1 follows clk_shift_alt");
    r0 = sw_rises;
    repeat (100) @(posedge clk_shift_alt);
    check(sw_rises - r0 >= 99 && sw_rises - r0 <= 101, "FSK bit 1 rate is the alt clock's");
    mod = 0;
    repeat (6) @(posedge clk_shift);
    expect_follow(0, 0, 40, "FSK back to clk_shift");
    // end of packet
    en = 0;
    repeat (6) @(posedge clk_shift);
    r0 = sw_rises;
    repeat (20) @(posedge clk_shift);
    check(sw_rises == r0 && sw_ctrl == 0, "idle after packet");
    check(min_pulse >= 22.9, $sformatf("no glitch: shortest pulse %0.1f ns", min_pulse));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
