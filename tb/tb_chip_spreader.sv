`timescale 1ns/1ps
// tb_chip_spreader: self-checking test of the transmit-side spreading.
// For every protocol and mode it offers random productive symbols, pulls
// payload units with random back-pressure and checks that unit i equals the
// productive symbol of chip i / chip_len (2 parts per chip in mode I, 4 in
// mode II, the whole payload in mode III), that exactly one symbol is taken
// per chip, and that an empty productive stream gives zero chips and an
// underflow pulse.
module tb_chip_spreader;
  import dd_pkg::*;

  logic clk = 0, rst_n = 1;
  dec_cfg_t cfg;
  chip_mode_e mode;
  logic prod_valid = 0, prod_ready, prod_underflow, tx_start = 0, tx_ready = 0, tx_valid;
  logic [3:0] prod_sym = 0, tx_sym;

  chip_spreader dut (.*);

  int checks = 0, failures = 0, taken = 0, underflows = 0;
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  logic [3:0] syms [64];
  int sidx = 0, navail = 64;
  always_comb begin
    prod_valid = (sidx < navail);
    prod_sym   = syms[sidx % 64];
  end
  always @(posedge clk) begin
    if (prod_ready) begin sidx <= sidx + 1; taken++; end
    if (prod_underflow) underflows++;
  end

  task automatic run(input proto_e pr, input chip_mode_e m, input int nunits, input int avail);
    int clen, t0, got, nchips;
    logic [3:0] mask, exp;
    cfg  = dec_cfg_of(pr);
    mode = m;
    mask = cfg.wide ? 4'hF : 4'h1;
    clen = (m == MODE_I) ? 2 * int'(cfg.part_len) : (m == MODE_II) ? 4 * int'(cfg.part_len) : 1 << 30;
    for (int i = 0; i < 64; i++) syms[i] = 4'($urandom);
    @(negedge clk) sidx = 0; navail = avail; tx_start = 1;
    t0 = taken;
    @(negedge clk) tx_start = 0;
    got = 0;
    while (got < nunits) begin
      tx_ready = 1'($urandom);
      #1;
      if (tx_ready && tx_valid) begin
        exp = ((got / clen) < avail) ? (syms[got / clen] & mask) : 4'h0;
        check(tx_sym == exp, $sformatf("proto %0d mode %0d unit %0d: %h expected %h", pr, m, got, tx_sym, exp));
        got++;
      end
      @(negedge clk);
    end
    tx_ready = 0;
    nchips = (nunits + clen - 1) / clen;
    check(taken - t0 == ((nchips < avail) ? nchips : avail), $sformatf("symbols taken %0d", taken - t0));
  endtask

  initial #1 rst_n = 0;

  initial begin
    int u0;
    cfg = dec_cfg_of(PROTO_11B);
    mode = MODE_I;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int pr = 0; pr < 4; pr++)
      for (int m = 0; m < 3; m++)
        run(proto_e'(pr), chip_mode_e'(m), 300, 64);
    u0 = underflows;
    run(PROTO_11B, MODE_I, 64, 2);
    check(underflows == u0 + 2, $sformatf("underflows %0d", underflows - u0));
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
