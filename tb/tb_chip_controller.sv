`timescale 1ns/1ps
// tb_chip_controller: self-checking test of the data chip framing.
// For every protocol and mode it starts a packet, then samples phase and
// mod in the middle of every payload symbol and compares them with a
// reference computed here from the chip layout (pilot part, then 1, 3 or
// all-remaining data parts). It also checks the exact cycle on which the
// first pilot symbol begins, tag bit consumption, underflow and abort.
module tb_chip_controller;
  import dd_pkg::*;
  localparam int CPU = 4;   // clock cycles per microsecond in this test

  logic clk = 0, rst_n = 1;
  tag_cfg_t   cfg;
  chip_mode_e mode;
  logic pkt_start = 0, pkt_active = 0, tag_valid, tag_bit;
  logic tag_ready, tag_underflow, mod, chip_start, chip_abort;
  tag_phase_e phase;

  chip_controller #(.CLK_PER_US(CPU), .START_LAT(0)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  // tag bit source
  logic [255:0] bits;
  int bit_idx = 0, navail = 256;
  int underflows = 0, aborts = 0, readies = 0;
  assign tag_valid = (bit_idx < navail);
  assign tag_bit   = bits[bit_idx[7:0]];
  always @(posedge clk) begin
    if (tag_ready) begin bit_idx <= bit_idx + 1; readies++; end
    if (tag_underflow) underflows++;
    if (chip_abort) aborts++;
  end

  function automatic int data_index(input chip_mode_e m, input int p);
    // -1 for a pilot part, else the running index of the data part
    case (m)
      MODE_I:  return (p % 2 == 0) ? -1 : p / 2;
      MODE_II: return (p % 4 == 0) ? -1 : (p / 4) * 3 + (p % 4) - 1;
      default: return (p == 0) ? -1 : p - 1;
    endcase
  endfunction

  task automatic run_packet(input proto_e pr, input chip_mode_e m, input int nsym,
                            input int avail);
    int e, p_cyc, s_cyc, ps, p, d, b0;
    bit exp_mod;
    cfg  = tag_cfg_of(pr);
    mode = m;
    b0 = bit_idx;
    navail = b0 + avail;
    ps    = int'(cfg.part_symbols);
    p_cyc = int'(cfg.preamble_us) * CPU;
    s_cyc = int'(cfg.symbol_us) * CPU;
    @(negedge clk);
    pkt_active = 1;
    pkt_start  = 1;
    e = cyc + 1;
    @(negedge clk);
    pkt_start = 0;
    // last preamble cycle and first pilot cycle
    while (cyc < e + p_cyc - 1) @(negedge clk);
    check(phase == PH_PREAMBLE, "still preamble one cycle before payload");
    @(negedge clk);
    check(phase == PH_PILOT, $sformatf("pilot starts after exactly one preamble (proto %0d)", pr));
    for (int j = 0; j < nsym; j++) begin
      while (cyc < e + p_cyc + j * s_cyc + s_cyc / 2) @(negedge clk);
      p = j / ps;
      d = data_index(m, p);
      if (d < 0) begin
        check(phase == PH_PILOT && !mod, $sformatf("pilot symbol %0d", j));
      end else begin
        exp_mod = (d < avail) ? bits[(b0 + d) % 256] : 1'b0;
        check(phase == PH_DATA && mod == exp_mod,
              $sformatf("data symbol %0d part %0d: mod=%0b exp=%0b", j, p, mod, exp_mod));
      end
    end
    @(negedge clk);
    pkt_active = 0;
    @(negedge clk);
    @(negedge clk);
    check(phase == PH_IDLE && !mod, "idle after packet end");
  endtask

  // reset pulse: an edge at time 1 so every flop is reset
  initial #1 rst_n = 0;

  initial begin
    int a0, u0, ab0;
    bits = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    cfg = tag_cfg_of(PROTO_11B);
    mode = MODE_I;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pr = 0; pr < 4; pr++) begin
      for (int m = 0; m < 3; m++) begin
        a0 = readies;
        ab0 = aborts;
        run_packet(proto_e'(pr), chip_mode_e'(m), (pr == 2) ? 30 : 60, 1000);
        check(aborts == ab0 + 1, "abort counted when packet ends mid payload");
      end
    end
    // underflow: only two tag bits available for a mode III packet
    u0 = underflows;
    run_packet(PROTO_11G, MODE_III, 20, 2);
    check(underflows > u0, "underflow flagged when tag data runs out");
    // packet lost during the preamble: no abort pulse, back to idle
    ab0 = aborts;
    @(negedge clk) pkt_active = 1; pkt_start = 1;
    @(negedge clk) pkt_start = 0;
    repeat (10) @(negedge clk);
    pkt_active = 0;
    repeat (3) @(negedge clk);
    check(phase == PH_IDLE && aborts == ab0, "preamble loss returns to idle silently");
    $display("ran %0d tag bits, %0d underflows, %0d aborts", readies, underflows, aborts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
