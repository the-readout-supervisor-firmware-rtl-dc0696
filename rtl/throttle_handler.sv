// throttle_handler: rejects accepted triggers when the system cannot take them.
//
// A trigger in word_in is removed (trigger, tae, tae_central and origin
// cleared; the commands in the word are kept) while any enabled throttle
// source is active:
//   cfg_en[0]  readout boards: OR of the N_RB throttle lines, each through a
//              two-flop synchroniser;
//   cfg_en[1]  MEP: the multi-event-packet handler has no destination;
//   cfg_en[2]  internal: the veto of the start-of-run sequencer, carried
//              in the word (veto bit) so that it lines up with the words
//              it belongs to whatever the pipeline delays;
//   cfg_en[3]  resets: a programmable wait of cfg_reset_wait cycles after
//              each FE Reset, so that no trigger is accepted before the
//              front ends have recovered. The wait is started either by an
//              FE Reset carried by the word stream (start-of-run sequence)
//              or by reset_in, a pulse marking an FE Reset that the control
//              system sends asynchronously at the end of the chain.
// These four sources are the inputs drawn into the throttle handler in the
// block diagram (boards, MEP, internal, resets) and the FE-Reset wait is the
// example the text gives; the enables, the synchroniser and the single OR
// over all boards are this design's choices.
//
// Timing: one register stage. The wait starts with the word that carries
// fe_reset, or with the word present while reset_in is high: that word and
// the next cfg_reset_wait words cannot trigger. Words that had already
// passed this stage when an asynchronous FE Reset is sent are not held back;
// they reach the links within (output delay + 3) words of the reset.
module throttle_handler
  import rs_pkg::*;
#(
  parameter int unsigned N_RB = 500
) (
  input  logic            clk,
  input  logic            rst_n,
  input  tfc_word_t       word_in,
  input  logic [N_RB-1:0] rb_throttle,
  input  logic            mep_throttle,
  input  logic            reset_in,      // asynchronous FE Reset being sent
  input  logic [3:0]      cfg_en,
  input  logic [31:0]     cfg_reset_wait,
  output tfc_word_t       word_out,
  output logic            throttled,     // one cycle per rejected trigger
  output logic [3:0]      active         // which sources are asserting
);

  logic [N_RB-1:0] rb_s1, rb_s2;
  logic [31:0]     wait_cnt;
  logic            reset_busy;
  logic            block;
  tfc_word_t       w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rb_s1 <= '0;
      rb_s2 <= '0;
    end else begin
      rb_s1 <= rb_throttle;
      rb_s2 <= rb_s1;
    end
  end

  assign reset_busy = word_in.fe_reset || reset_in || (wait_cnt != 0);

  assign active = {reset_busy, word_in.veto, mep_throttle, |rb_s2};
  assign block  = |(active & cfg_en);

  always_comb begin
    w = word_in;
    if (block) begin
      w.trigger     = 1'b0;
      w.tae         = 1'b0;
      w.tae_central = 1'b0;
      w.origin      = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wait_cnt  <= '0;
      word_out  <= '0;
      throttled <= 1'b0;
    end else begin
      if (word_in.fe_reset || reset_in) wait_cnt <= cfg_reset_wait;
      else if (wait_cnt != 0) wait_cnt <= wait_cnt - 32'd1;
      word_out  <= w;
      throttled <= block && word_in.trigger;
    end
  end

endmodule
