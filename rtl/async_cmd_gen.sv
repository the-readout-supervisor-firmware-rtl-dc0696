// async_cmd_gen: inserts commands requested by the control system.
//
// Besides the commands produced by its own processes, the core sends
// commands that the control system asks for at any time ("other commands"
// entering at the output in the block diagram). The control system first
// programs which commands to send (cfg_cmd: calibration, NZS, snapshot, FE
// reset, BE reset) and then pulses issue; the request is held pending and
// ORed into the next word that passes, exactly once. Because it is added
// after the output pipeline, such a command leaves with the smallest
// latency but is not synchronous with the trigger path, which is what
// "asynchronous" means here. The pending/once behaviour and the command set
// are this design's choices.
//
// Timing: one register stage from word_in to word_out. A request issued in
// cycle t appears in the word leaving at t+2 (pending register, then output
// register).
module async_cmd_gen
  import rs_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  async_cmd_t cfg_cmd,
  input  logic       issue,
  input  tfc_word_t  word_in,
  output tfc_word_t  word_out,
  output logic       sent
);

  async_cmd_t pend;
  logic       pend_valid;
  tfc_word_t  w;

  always_comb begin
    w = word_in;
    if (pend_valid) begin
      w.calib    = w.calib    | pend.calib;
      w.nzs      = w.nzs      | pend.nzs;
      w.snapshot = w.snapshot | pend.snapshot;
      w.fe_reset = w.fe_reset | pend.fe_reset;
      w.be_reset = w.be_reset | pend.be_reset;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend       <= '0;
      pend_valid <= 1'b0;
      word_out   <= '0;
      sent       <= 1'b0;
    end else begin
      word_out <= w;
      sent     <= pend_valid;
      if (issue) begin
        pend       <= cfg_cmd;
        pend_valid <= 1'b1;
      end else if (pend_valid) begin
        pend_valid <= 1'b0;
      end
    end
  end

endmodule
