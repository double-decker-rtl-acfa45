`timescale 1ns/1ps
// tb_chip_decoder: self-checking test of the single-receiver decoder.
// For every protocol and mode it builds a received payload the way a
// backscattered packet looks after a commodity receiver: each chip's pilot
// part repeats the productive symbol, each data part repeats it flipped
// (bit carriers) or replaced by other symbols (ZigBee) when the tag bit is 1.
// Units outside the decoding window are garbage and fewer than half of the
// window units are corrupted. The decoded productive symbols and tag bits
// must match the ones used to build the stream. Units arrive with random
// gaps; a packet cut short mid chip must not emit the unfinished chip.
module tb_chip_decoder;
  import dd_pkg::*;

  logic clk = 0, rst_n = 1;
  dec_cfg_t   cfg;
  chip_mode_e mode;
  logic rx_start = 0, rx_valid = 0, rx_end = 0;
  logic [3:0] rx_sym = 0;
  logic prod_valid, tag_valid, tag_bit;
  logic [3:0] prod_sym;

  chip_decoder dut (.*);

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  logic [3:0] exp_prod[$];
  logic       exp_tag[$];
  int n_prod = 0, n_tag = 0;

  always @(posedge clk) begin
    if (prod_valid) begin
      n_prod++;
      if (exp_prod.size() == 0) check(0, "unexpected productive output");
      else check(prod_sym == exp_prod.pop_front(), $sformatf("productive symbol %0d", n_prod));
    end
    if (tag_valid) begin
      n_tag++;
      if (exp_tag.size() == 0) check(0, "unexpected tag output");
      else check(tag_bit == exp_tag.pop_front(), $sformatf("tag bit %0d", n_tag));
    end
  end

  task automatic send(input logic [3:0] s);
    while ($urandom_range(3) == 0) @(negedge clk);   // random idle gaps
    rx_valid = 1;
    rx_sym   = s;
    @(negedge clk);
    rx_valid = 0;
  endtask

  // Send one part of 'len' units that should read as 'val' inside the window;
  // 'nbad' window units are corrupted, units outside the window are random.
  task automatic send_part(input logic [3:0] val, input bit flip, input int nbad);
    logic [3:0] mask, good, u;
    int bad_left, wl, ws;
    mask = cfg.wide ? 4'hF : 4'h1;
    ws = int'(cfg.win_start);
    wl = int'(cfg.win_len);
    bad_left = nbad;
    for (int i = 0; i < int'(cfg.part_len); i++) begin
      if (cfg.wide) good = flip ? (val ^ 4'($urandom_range(1, 15))) : val;
      else          good = val ^ {3'b0, flip};
      if (i < ws || i >= ws + wl) begin
        u = 4'($urandom) & mask;
      end else if (bad_left > 0 && $urandom_range(1) == 1) begin
        // corrupted unit: the reference value when it should differ, otherwise a different value
        u = flip ? val : (val ^ (cfg.wide ? 4'($urandom_range(1, 15)) : 4'h1));
        bad_left--;
      end else begin
        u = good & mask;
      end
      send(u);
    end
  endtask

  task automatic run_packet(input proto_e pr, input chip_mode_e m, input int nchips,
                            input bit cut);
    logic [3:0] pv, mask;
    logic tb_bit;
    int segs, maxbad;
    cfg  = dec_cfg_of(pr);
    mode = m;
    mask = cfg.wide ? 4'hF : 4'h1;
    segs = (m == MODE_I) ? 1 : (m == MODE_II) ? 3 : 12;
    maxbad = (int'(cfg.win_len) - 1) / 2;
    @(negedge clk) rx_start = 1;
    @(negedge clk) rx_start = 0;
    for (int c = 0; c < nchips; c++) begin
      pv = 4'($urandom) & mask;
      exp_prod.push_back(pv);
      send_part(pv, 1'b0, $urandom_range(maxbad));
      for (int s = 0; s < segs; s++) begin
        tb_bit = 1'($urandom);
        if (cut && c == nchips - 1 && s == segs - 1) begin
          // packet ends half way through this data part
          for (int i = 0; i < int'(cfg.part_len) / 2; i++) send(4'($urandom) & mask);
        end else begin
          exp_tag.push_back(tb_bit);
          send_part(pv, tb_bit, $urandom_range(maxbad));
        end
      end
      if (m == MODE_III) break;
    end
    @(negedge clk) rx_end = 1;
    @(negedge clk) rx_end = 0;
    repeat (3) @(negedge clk);
    check(exp_prod.size() == 0 && exp_tag.size() == 0,
          $sformatf("all outputs seen (proto %0d mode %0d)", pr, m));
    exp_prod.delete();
    exp_tag.delete();
  endtask

  // reset pulse: an edge at time 1 so every flop is reset
  initial #1 rst_n = 0;

  initial begin
    cfg = dec_cfg_of(PROTO_11B);
    mode = MODE_I;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int pr = 0; pr < 4; pr++)
      for (int m = 0; m < 3; m++) begin
        run_packet(proto_e'(pr), chip_mode_e'(m), 6, 1'b0);
        run_packet(proto_e'(pr), chip_mode_e'(m), 3, 1'b1);
      end
    check(n_prod > 0 && n_tag > 0, "outputs produced");
    $display("decoded %0d productive symbols and %0d tag bits", n_prod, n_tag);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
