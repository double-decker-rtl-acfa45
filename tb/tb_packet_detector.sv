`timescale 1ns/1ps
// tb_packet_detector: self-checking test of the packet detector.
// Drives comparator pulses shorter and longer than DET_CYCLES and gaps
// shorter and longer than END_CYCLES, and checks the exact cycle of
// pkt_start / pkt_end against a count kept by the testbench.
module tb_packet_detector;
  localparam int DET = 5;
  localparam int ENDC = 8;

  logic clk = 0, rst_n = 1, comp_in = 0;
  logic pkt_start, pkt_end, pkt_active;
  int checks = 0, failures = 0;
  int cyc = 0;

  packet_detector #(.DET_CYCLES(DET), .END_CYCLES(ENDC)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  // Drive comp_in high for 'len' cycles starting right after a negedge;
  // the first sampling edge is then the next posedge.
  task automatic pulse(input int len);
    @(negedge clk) comp_in = 1;
    repeat (len) @(negedge clk);
    comp_in = 0;
  endtask

  int starts = 0, ends = 0, k;
  always @(posedge clk) begin
    if (pkt_start) starts++;
    if (pkt_end) ends++;
  end

  // reset pulse: an edge at time 1 so every flop is reset
  initial #1 rst_n = 0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // spike shorter than the detection hold: ignored

    repeat (20) @(negedge clk);
    starts = 0;
    pulse(DET - 1);
    repeat (20) @(negedge clk);
    check(starts == 0 && !pkt_active, "short spike rejected");

    // long packet: pkt_start rises DET+1 edges after the first sample (the controller sees it one edge later)
    @(negedge clk) comp_in = 1;
    k = cyc + 1;                       // cycle count at the first sampling edge
    wait (pkt_start == 1);
    @(negedge clk);
    // pkt_start became 1 after edge k+1+DET
    check(cyc == k + DET + 1, $sformatf("start latency (cyc=%0d k=%0d)", cyc, k));
    check(pkt_active, "active after start");
    // a gap shorter than END_CYCLES must not end the packet
    comp_in = 0;
    repeat (ENDC - 2) @(negedge clk);
    comp_in = 1;
    repeat (20) @(negedge clk);
    check(pkt_active && ends == 0, "short gap bridged");
    // real end
    comp_in = 0;
    k = cyc + 1;
    wait (pkt_end == 1);
    @(negedge clk);
    check(cyc == k + ENDC + 1, $sformatf("end latency (cyc=%0d k=%0d)", cyc, k));
    check(!pkt_active, "inactive after end");
    @(negedge clk);
    check(starts == 1 && ends == 1, $sformatf("one start, one end (%0d %0d)", starts, ends));
    // second packet detected again
    pulse(DET + 10);
    repeat (ENDC + 10) @(negedge clk);
    check(starts == 2 && ends == 2, "second packet");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
