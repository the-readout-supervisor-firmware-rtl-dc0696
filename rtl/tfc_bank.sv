// tfc_bank: builds the central event data bank sent to the farm.
//
// Only the readout supervisor knows why an event was kept, so for every
// accepted event (word_in.trigger) it emits one rs_pkg::tfc_bank_t record
// with the fields the text lists: BXID, crossing type, trigger origin, a
// mask of the commands sent with the event, the scan step, the orbit number
// and a timestamp, both counted from the start of the run, plus the MEP
// destination and a word of other run information from the control system.
//
// Run start is taken from the word stream itself: a word carrying be_reset
// (sent only by the start-of-run sequence) clears the orbit count and loads
// the timestamp with cfg_init_ts, so both counters are aligned with the
// words whatever the pipeline latencies. The orbit count then advances on
// every word carrying bxid_reset and the timestamp on every clock cycle.
// Using be_reset as run marker and the trg_mask bit order (see below) are
// this design's choices.
//
// trg_mask bits: 0 calib, 1 nzs, 2 snapshot, 3 tae, 4 tae_central,
//                5 header_only, 6 synch, 7 mep_accept.
// Timing: bank/bank_valid are registered, one cycle after the word; the
// counters in a record are those of the word's own cycle (the run-start
// word itself has orbit 0 and timestamp cfg_init_ts).
module tfc_bank
  import rs_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  tfc_word_t   word_in,
  input  logic [63:0] cfg_init_ts,
  input  logic [15:0] cfg_scan_step,
  input  logic [31:0] run_info,
  output tfc_bank_t   bank,
  output logic        bank_valid,
  output logic [31:0] orbit_count
);

  logic [31:0] orbit;
  logic [63:0] ts;
  logic [31:0] orbit_now;
  logic [63:0] ts_now;

  assign orbit_now   = word_in.be_reset ? 32'd0 : orbit + 32'(word_in.bxid_reset);
  assign ts_now      = word_in.be_reset ? cfg_init_ts : ts + 64'd1;
  assign orbit_count = orbit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      orbit      <= '0;
      ts         <= '0;
      bank       <= '0;
      bank_valid <= 1'b0;
    end else begin
      orbit      <= orbit_now;
      ts         <= ts_now;
      bank_valid <= word_in.trigger;
      if (word_in.trigger) begin
        bank.bxid      <= word_in.bxid;
        bank.bx_type   <= word_in.bx_type;
        bank.origin    <= word_in.origin;
        bank.trg_mask  <= {word_in.mep_accept, word_in.synch, word_in.header_only,
                           word_in.tae_central, word_in.tae, word_in.snapshot,
                           word_in.nzs, word_in.calib};
        bank.scan_step <= cfg_scan_step;
        bank.orbit     <= orbit_now;
        bank.timestamp <= ts_now;
        bank.mep_dest  <= word_in.mep_dest;
        bank.run_info  <= run_info;
      end
    end
  end

endmodule
