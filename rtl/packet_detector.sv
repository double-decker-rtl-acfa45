// packet_detector: turns the tag's envelope-comparator output into packet
// start/end events for the tag controller.
//
// The comparator (an RF log detector followed by a fast comparator on the
// tag board) is high while an excitation packet is on air. Its output is
// asynchronous, so it is first passed through a two-flop synchroniser. A
// packet is declared present once the synchronised level has been high for
// DET_CYCLES consecutive clocks (rejecting short spikes), and absent once it
// has been low for END_CYCLES consecutive clocks (bridging the envelope dips
// of OFDM and of the tag's own switching).
//
// Interface and timing: if comp_in is first sampled high at clock edge k and
// stays high, pkt_start pulses for one cycle and pkt_active rises after edge
// k + 1 + DET_CYCLES, i.e. LATENCY = DET_CYCLES + 2 edges are already gone
// when the controller first sees pkt_start (it counts the preamble from
// there). pkt_end pulses when pkt_active falls.
//
// The paper only names the detector hardware; the debouncing scheme and both
// hold times are this design's choice.
module packet_detector #(
  parameter int unsigned DET_CYCLES = 50,   // 0.5 us at 100 MHz
  parameter int unsigned END_CYCLES = 400   // 4 us at 100 MHz
) (
  input  logic clk,
  input  logic rst_n,
  input  logic comp_in,      // asynchronous comparator output
  output logic pkt_start,    // one-cycle pulse
  output logic pkt_end,      // one-cycle pulse
  output logic pkt_active    // level, high during a packet
);

  localparam int unsigned CW = $clog2(((DET_CYCLES > END_CYCLES) ? DET_CYCLES : END_CYCLES) + 1);

  logic          s1, s2;
  logic [CW-1:0] run_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= 1'b0;
      s2 <= 1'b0;
    end else begin
      s1 <= comp_in;
      s2 <= s1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_cnt    <= '0;
      pkt_active <= 1'b0;
      pkt_start  <= 1'b0;
      pkt_end    <= 1'b0;
    end else begin
      pkt_start <= 1'b0;
      pkt_end   <= 1'b0;
      if (!pkt_active) begin
        if (s2) begin
          if (run_cnt == CW'(DET_CYCLES - 1)) begin
            pkt_active <= 1'b1;
            pkt_start  <= 1'b1;
            run_cnt    <= '0;
          end else begin
            run_cnt <= run_cnt + 1'b1;
          end
        end else begin
          run_cnt <= '0;
        end
      end else begin
        if (!s2) begin
          if (run_cnt == CW'(END_CYCLES - 1)) begin
            pkt_active <= 1'b0;
            pkt_end    <= 1'b1;
            run_cnt    <= '0;
          end else begin
            run_cnt <= run_cnt + 1'b1;
          end
        end else begin
          run_cnt <= '0;
        end
      end
    end
  end

  a_start_end_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(pkt_start && pkt_end));

endmodule
