`timescale 1ns/1ps
// tb_double_decker: end-to-end test of the double-decker logic at its
// default parameters (100 MHz system clock).
//
// For every protocol and data chip mode, the testbench plays one excitation
// packet: it raises the envelope comparator, lets the tag frame the packet,
// and watches the RF switch drive. In the middle of every payload symbol it
// decides from sw_ctrl alone whether the tag reflected with the 0 degree
// clock, the 180 degree clock (PSK) or the +shift clock (BLE), and compares
// that with the chip layout and the tag bits the tag consumed. It then
// builds what a commodity receiver would demodulate: the carrier's own
// payload as the design's spreader produced it (each productive symbol
// repeated over a data chip), changed where
// the tag modulated, with bits outside the decoding window corrupted
// (802.11g) and, for ZigBee, phase-flipped symbols demodulated as arbitrary
// other symbols. That stream goes through the decoder, and the productive
// symbols and tag bits must come out unchanged.
//
// Mechanisms counted (each must occur): every protocol, every mode, phase
// flip, frequency shift, tag-data underflow, chip aborted by packet end,
// corrupted units outside the window.
module tb_double_decker;
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

  initial begin
    for (int i = 0; i < 32; i++) src[i*32 +: 32] = $urandom;
    proto = PROTO_11B;
    mode  = MODE_I;
    repeat (5) @(negedge clk);
    rst_n = 1;
    // every protocol in every mode; the payload ends part way through a chip
    for (int pr = 0; pr < 4; pr++)
      for (int m = 0; m < 3; m++)
        run_packet(proto_e'(pr), chip_mode_e'(m), (pr == 2) ? 20 : (pr == 1) ? 27 : 53, 1000);
    // tag data runs out mid packet
    run_packet(PROTO_11B, MODE_II, 53, 3);
    $display("protocols %0d %0d %0d %0d, modes %0d %0d %0d", n_proto[0], n_proto[1], n_proto[2],
             n_proto[3], n_mode[0], n_mode[1], n_mode[2]);
    $display("phase flips %0d, frequency shifts %0d, underflows %0d, aborts %0d, corrupted units %0d",
             n_flip, n_fshift, n_underflow, n_abort, n_garbage);
    $display("decoded %0d productive symbols, %0d tag bits", got_prod, got_tag);
    for (int i = 0; i < 4; i++) check(n_proto[i] > 0, "every protocol exercised");
    for (int i = 0; i < 3; i++) check(n_mode[i] > 0, "every mode exercised");
    check(n_flip > 0, "phase flip happened");
    check(n_fshift > 0, "frequency shift happened");
    check(n_underflow > 0, "underflow happened");
    check(n_abort > 0, "abort happened");
    check(n_garbage > 0, "corrupted units outside the window happened");
    check(got_tag > 0 && got_prod > 0, "decoder produced output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
