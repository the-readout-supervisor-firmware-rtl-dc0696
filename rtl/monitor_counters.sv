// monitor_counters: free-running and latched monitoring counters.
//
// N_CNT counters of CNT_W bits, each counting the cycles in which its event
// input is high. The free-running values are always visible; on a latch
// request from the control system every counter is copied into its latched
// register on the same clock edge, so that ratios between counters read
// later (calibration triggers per orbit, for instance) are exact. The two
// sets and the common latch follow the text; the clear input, which zeroes
// all free-running counters at once, is this design's addition.
//
// Timing: a counter includes an event one cycle after it occurs. The latched
// copy taken on a latch edge includes every event up to the cycle before
// the latch pulse.
module monitor_counters #(
  parameter int unsigned N_CNT = 16,
  parameter int unsigned CNT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_CNT-1:0] event_in,
  input  logic             latch,
  input  logic             clear,
  output logic [CNT_W-1:0] free_cnt    [N_CNT],
  output logic [CNT_W-1:0] latched_cnt [N_CNT]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_CNT; i++) begin
        free_cnt[i]    <= '0;
        latched_cnt[i] <= '0;
      end
    end else begin
      for (int i = 0; i < N_CNT; i++) begin
        if (clear)            free_cnt[i] <= '0;
        else if (event_in[i]) free_cnt[i] <= free_cnt[i] + 1'b1;
        if (latch) latched_cnt[i] <= free_cnt[i];
      end
    end
  end

endmodule
