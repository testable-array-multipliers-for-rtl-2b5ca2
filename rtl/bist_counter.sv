// Vector counter and sequencer of the BIST.
//
// A 3-bit counter steps through the five test vectors, one per clock. A
// start pulse in idle (busy = 0) clears the counter and raises busy; while
// busy the counter value selects the vector applied to the multiplier and
// the ORA samples the response at each rising edge; the edge that samples
// vector 4 drops busy and raises done, which stays high until the next start.
// From the edge that takes start to the edge that raises done there are six
// clock edges, the test time of six clocks the paper reports; how start and
// done are signalled is this design's choice. start is ignored while busy.
// Synchronous logic with an active-low asynchronous reset to idle.
module bist_counter
  import mult_bist_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic [CNT_W-1:0] cnt,
  output logic             busy,
  output logic             done
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else if (!busy) begin
      if (start) begin
        cnt  <= '0;
        busy <= 1'b1;
        done <= 1'b0;
      end
    end else if (cnt == CNT_W'(NUM_VECTORS - 1)) begin
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b1;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

  a_cnt_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> cnt < CNT_W'(NUM_VECTORS))
    else $error("bist_counter: vector index out of range");
  a_busy_done_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
    !(busy && done))
    else $error("bist_counter: busy and done both high");
endmodule
