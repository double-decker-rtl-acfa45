`timescale 1ns/1ps
// tb_workloads: the double-decker logic at its default parameters on full
// excitation packets of the sizes used to evaluate the scheme.
//
//  * BLE broadcast packet with a 37-byte (296 us) modulatable part, mode I:
//    12 complete chips, so 12 tag bits per packet (at 70 packets/s this is
//    the 0.84 kbit/s ceiling).
//  * 802.11g, 1500-byte payload at 24 data bits per OFDM symbol (500
//    symbols, 2 ms), in modes I, II and III: the decoded tag bits and
//    productive symbols per packet give the tag/productive trade-off, and the
//    mode II to mode I ratios must come out near 1.5 and 0.5.
//  * 802.11b, 1500-byte payload at 1 Mbit/s (12,000 symbols), mode I.
//  * ZigBee, 127-byte frame (254 symbols), mode I.
// The payload sizes other than BLE's are this testbench's choice. Each
// packet goes through the same path as in tb_double_decker: spread payload,
// tag framing judged from the switch drive, receiver corruption, decoding,
// exact comparison of every decoded symbol and bit.
module tb_workloads;
  import dd_pkg::*;

  localparam int CPU = 100;     // must match the top's default CLK_PER_US
  localparam int DETC = 50;     // and DET_CYCLES

  logic clk = 0, rst_n = 1;
  logic clk_shift = 0, clk_shift_180 = 1, clk_shift_alt = 0;
  proto_e proto;
  chip_mode_e mode;
  logic comp_in = 0, tag_valid, tag_bit;
  logic tag_ready, tag_underflow, sw_ctrl, pkt_active, pkt_end, mod, chip_start, chip_abort;
  tag_phase_e phase;
  logic tx_prod_valid, tx_prod_ready, tx_prod_underflow, tx_start = 0, tx_ready = 0, tx_valid;
  logic [3:0] tx_prod_sym, tx_sym;
  logic rx_start = 0, rx_valid = 0, rx_end = 0;
  logic [3:0] rx_sym = 0;
  logic prod_valid, rx_tag_valid, rx_tag_bit;
  logic [3:0] prod_sym;

  double_decker dut (.*);

  always #5 clk = ~clk;                        // 100 MHz system clock
  always #25 clk_shift = ~clk_shift;           // 20 MHz shift clock
  always #25 clk_shift_180 = ~clk_shift_180;   // same, 180 degrees
  always #15 clk_shift_alt = ~clk_shift_alt;   // stand-in for the BLE shift clock

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 30) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  // mechanism counters
  int n_proto[4], n_mode[3], n_flip = 0, n_fshift = 0, n_underflow = 0, n_abort = 0, n_garbage = 0;
  always @(posedge clk) begin
    if (tag_underflow) n_underflow++;
    if (chip_abort) n_abort++;
  end

  // tag bit source
  logic [1023:0] src;
  int idx = 0, navail = 1 << 30;
  assign tag_valid = (idx < navail);
  assign tag_bit   = src[idx % 1024];
  always @(posedge clk) if (tag_ready) idx <= idx + 1;

  // productive data source for the transmitter
  logic [3:0] psyms [256];
  int pidx = 0;
  assign tx_prod_valid = 1'b1;
  assign tx_prod_sym   = psyms[pidx % 256];
  always @(posedge clk) if (tx_prod_ready) pidx <= pidx + 1;

  // decoder output checking
  logic [3:0] exp_prod[$];
  logic       exp_tag[$];
  int got_prod = 0, got_tag = 0;
  always @(posedge clk) begin
    if (prod_valid) begin
      got_prod++;
      if (exp_prod.size() == 0) check(0, "unexpected productive output");
      else check(prod_sym == exp_prod.pop_front(), "decoded productive symbol");
    end
    if (rx_tag_valid) begin
      got_tag++;
      if (exp_tag.size() == 0) check(0, "unexpected tag output");
      else check(rx_tag_bit == exp_tag.pop_front(), "decoded tag bit");
    end
  end

  function automatic int data_index(input chip_mode_e m, input int p);
    case (m)
      MODE_I:  return (p % 2 == 0) ? -1 : p / 2;
      MODE_II: return (p % 4 == 0) ? -1 : (p / 4) * 3 + (p % 4) - 1;
      default: return (p == 0) ? -1 : p - 1;
    endcase
  endfunction

  // What the switch does in the middle of the current symbol:
  // 0 = follows clk_shift, 1 = modulated (180 degrees or shifted frequency).
  task automatic observe(input bit psk, output bit modulated);
    int hi = 0, lo = 0, rises = 0;
    if (psk) begin
      repeat (10) begin
        @(posedge clk_shift);
        #12;
        if (sw_ctrl) hi++; else lo++;
      end
      check(hi == 10 || lo == 10, "switch follows one clock through the symbol");
      modulated = (lo == 10);
    end else begin
      // count switch rising edges over 500 ns: 10 at 20 MHz, about 16 at the alternative clock
      fork
        begin : cnt
          forever begin @(posedge sw_ctrl); rises++; end
        end
        #500;
      join_any
      disable cnt;
      check((rises >= 9 && rises <= 11) || (rises >= 15 && rises <= 18),
            $sformatf("switch rate is one of the two clocks (%0d)", rises));
      modulated = (rises > 13);
    end
  endtask

  // One packet: nsym payload symbols, 'avail' tag bits on offer.
  task automatic run_packet(input proto_e pr, input chip_mode_e m, input int nsym, input int avail);
    tag_cfg_t tc;
    dec_cfg_t dc;
    int k, p_cyc, s_cyc, ps, p, d, b0, upart, nunits, ws, wl, i;
    bit modulated, exp_m;
    bit flips[$];
    logic [3:0] carrier[$];
    logic [3:0] u, mask;
    proto = pr;
    mode  = m;
    tc = tag_cfg_of(pr);
    dc = dec_cfg_of(pr);
    n_proto[pr]++;
    n_mode[m]++;
    b0 = idx;
    navail = b0 + avail;
    ps = int'(tc.part_symbols);
    p_cyc = int'(tc.preamble_us) * CPU;
    s_cyc = int'(tc.symbol_us) * CPU;
    repeat (20) @(negedge clk);
    comp_in = 1;
    k = cyc + 1;   // first edge that samples the comparator high
    for (int j = 0; j < nsym; j++) begin
      while (cyc < k + p_cyc + j * s_cyc + s_cyc / 2 - 25) @(negedge clk);
      observe(tc.psk, modulated);
      p = j / ps;
      d = data_index(m, p);
      exp_m = (d >= 0) && (d < avail) && src[(b0 + d) % 1024];
      check(modulated == exp_m, $sformatf("proto %0d mode %0d symbol %0d: modulated=%0b expected %0b",
                                          pr, m, j, modulated, exp_m));
      if (modulated && tc.psk) n_flip++;
      if (modulated && !tc.psk) n_fshift++;
      flips.push_back(modulated);
    end
    while (cyc < k + p_cyc + nsym * s_cyc) @(negedge clk);
    comp_in = 0;
    wait (pkt_active == 0);
    repeat (5) @(negedge clk);
    check(phase == PH_IDLE, "tag idle after the packet");

    // Receiver: rebuild the demodulated payload and feed the decoder.
    mask = dc.wide ? 4'hF : 4'h1;
    upart  = int'(dc.part_len);
    ws = int'(dc.win_start);
    wl = int'(dc.win_len);
    nunits = (pr == PROTO_11G) ? 24 : 1;    // stream units per excitation symbol
    // carrier content: the transmitter's payload, spread by the design
    for (int i = 0; i < 256; i++) psyms[i] = 4'($urandom);
    @(negedge clk) pidx = 0; tx_start = 1;
    @(negedge clk) tx_start = 0; tx_ready = 1;
    for (int i = 0; i < nsym * nunits; i++) begin
      #1;
      check(tx_valid, "spreader delivers a unit");
      carrier.push_back(tx_sym);
      @(negedge clk);
    end
    tx_ready = 0;
    // what the decoder must return: one productive symbol per complete pilot
    // part, one tag bit per complete data part
    d = 0;
    for (int j = 0; j < nsym; j += ps) begin
      p = j / ps;
      if (data_index(m, p) < 0) begin
        if (nsym - j >= ps) exp_prod.push_back(psyms[d % 256] & mask);
        d++;
      end else if (nsym - j >= ps) begin
        exp_tag.push_back(src[(b0 + data_index(m, p)) % 1024] && (data_index(m, p) < avail));
      end
    end
    @(negedge clk) rx_start = 1;
    @(negedge clk) rx_start = 0;
    for (int j = 0; j < nsym; j++) begin
      for (int b = 0; b < nunits; b++) begin
        int upos;
        upos = ((j % ps) * nunits + b);     // unit position in its part
        i = j * nunits + b;
        if (dc.wide) begin
          // ZigBee: a flipped symbol is heard as some other symbol, or unchanged (first one)
          u = flips[j] ? ((j % ps == 0) ? carrier[i] : carrier[i] ^ 4'($urandom_range(1, 15))) : carrier[i];
        end else begin
          u = carrier[i] ^ {3'b0, flips[j]};
        end
        if (upos < ws || upos >= ws + wl) begin
          u = 4'($urandom) & mask;    // outside the window anything may arrive
          n_garbage++;
        end
        rx_valid = 1;
        rx_sym   = u & mask;
        @(negedge clk);
        rx_valid = 0;
      end
    end
    @(negedge clk) rx_end = 1;
    @(negedge clk) rx_end = 0;
    repeat (3) @(negedge clk);
    check(exp_prod.size() == 0 && exp_tag.size() == 0, "every complete chip decoded");
    exp_prod.delete();
    exp_tag.delete();
    navail = 1 << 30;
  endtask

  // reset pulse: an edge at time 1 so every flop is reset
  initial #1 rst_n = 0;

  int tag_per_pkt[string], prod_per_pkt[string];
  task automatic workload(input string name, input proto_e pr, input chip_mode_e m, input int nsym);
    int t0, p0;
    t0 = got_tag;
    p0 = got_prod;
    run_packet(pr, m, nsym, 1 << 20);
    tag_per_pkt[name]  = got_tag - t0;
    prod_per_pkt[name] = got_prod - p0;
    $display("%-12s %6d payload symbols: %5d tag bits, %4d productive symbols", name, nsym,
             tag_per_pkt[name], prod_per_pkt[name]);
  endtask

  initial begin
    real rt, rp;
    for (int i = 0; i < 32; i++) src[i*32 +: 32] = $urandom;
    proto = PROTO_11B;
    mode  = MODE_I;
    repeat (5) @(negedge clk);
    rst_n = 1;
    workload("ble",      PROTO_BLE,    MODE_I,   296);
    check(tag_per_pkt["ble"] == 12, "BLE: 12 tag bits per 37-byte packet");
    workload("11g-mode1", PROTO_11G,   MODE_I,   500);
    workload("11g-mode2", PROTO_11G,   MODE_II,  500);
    workload("11g-mode3", PROTO_11G,   MODE_III, 500);
    check(tag_per_pkt["11g-mode1"] == 125 && prod_per_pkt["11g-mode1"] == 125, "11g mode I: one tag bit and one productive symbol per 16 us chip");
    check(tag_per_pkt["11g-mode3"] == 249 && prod_per_pkt["11g-mode3"] == 1, "11g mode III: one productive symbol per packet");
    rt = real'(tag_per_pkt["11g-mode2"]) / real'(tag_per_pkt["11g-mode1"]);
    rp = real'(prod_per_pkt["11g-mode2"]) / real'(prod_per_pkt["11g-mode1"]);
    $display("mode II / mode I: tag %0.3f, productive %0.3f", rt, rp);
    check(rt > 1.45 && rt < 1.55 && rp > 0.45 && rp < 0.55, "mode II trade-off");
    workload("11b",      PROTO_11B,    MODE_I,   12000);
    check(tag_per_pkt["11b"] == 750, "11b: 750 chips in 12 ms");
    workload("zigbee",   PROTO_ZIGBEE, MODE_I,   254);
    check(tag_per_pkt["zigbee"] == 42, "ZigBee: 42 chips in a 127-byte frame");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
