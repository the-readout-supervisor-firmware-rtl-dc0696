// tae_handler: Timing Alignment Event (TAE) windows on a fixed-latency pipeline.
//
// In TAE mode a window of consecutive bunch crossings around a central
// trigger is accepted: cfg_half crossings before it, the central one and
// cfg_half after it, up to 2*MAX_HALF+1 = 65 events. Crossings before the
// central trigger have already been generated when it arrives, so every word
// passes through a MAX_HALF+1 stage shift register; when a word flagged
// tae_central enters, the cfg_half words that entered just before it are
// still inside and are rewritten (trigger, tae and the TAE origin bit set),
// and a counter marks the next cfg_half words as they enter. Using a
// fixed-latency pipeline and modifying the words "in the past" follows the
// text, as does the 65-event limit; the shift-register form is this
// design's.
//
// With cfg_en low the words pass unchanged. A central trigger arriving
// inside a running window restarts the "after" count.
//
// Timing: fixed latency of MAX_HALF+1 cycles from word_in to word_out,
// whatever cfg_half is.
module tae_handler
  import rs_pkg::*;
#(
  parameter int unsigned MAX_HALF = 32
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      cfg_en,
  input  logic [5:0] cfg_half,
  input  tfc_word_t word_in,
  output tfc_word_t word_out,
  output logic      window_start
);

  tfc_word_t   sr [MAX_HALF+1];
  logic [7:0]  after_cnt;
  logic [7:0]  half;
  logic        central;

  assign half    = (32'(cfg_half) > MAX_HALF) ? 8'(MAX_HALF) : 8'(cfg_half);
  assign central = cfg_en && word_in.trigger && word_in.tae_central;
  assign window_start = central;

  function automatic tfc_word_t mark(input tfc_word_t w);
    tfc_word_t m;
    m                  = w;
    m.trigger          = 1'b1;
    m.tae              = 1'b1;
    m.origin[ORIG_TAE] = 1'b1;
    return m;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k <= MAX_HALF; k++) sr[k] <= '0;
      after_cnt <= '0;
    end else begin
      // Stage 0 takes the new word; it is marked if it is a central
      // trigger or falls inside the "after" part of a window.
      if (central || (cfg_en && after_cnt != 0)) sr[0] <= mark(word_in);
      else                                       sr[0] <= word_in;
      // Stage k+1 holds the word that entered k+1 cycles before word_in.
      for (int k = 0; k < MAX_HALF; k++) begin
        if (central && (k < 32'(half))) sr[k+1] <= mark(sr[k]);
        else                            sr[k+1] <= sr[k];
      end
      if (central)            after_cnt <= half;
      else if (after_cnt != 0) after_cnt <= after_cnt - 8'd1;
    end
  end

  assign word_out = sr[MAX_HALF];

endmodule
