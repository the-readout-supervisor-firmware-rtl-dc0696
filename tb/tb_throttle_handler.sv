// tb_throttle_handler: self-checking test of the throttle logic.
//
// Uses 8 readout-board lines. Random words (with triggers and occasional FE
// resets), random throttle sources and random enables are driven each cycle;
// the expected output word, one cycle later, is computed here: the trigger
// (and its TAE and origin bits) is removed when an enabled source is active,
// where the board throttle is seen through two synchroniser stages and the
// FE-reset wait, started by a word carrying fe_reset or by the reset_in
// pulse, covers that word and the next cfg_reset_wait words.
// Counts how often each source actually rejected a trigger.
module tb_throttle_handler;
  import rs_pkg::*;
  localparam int NRB = 8;

  logic clk = 0, rst_n = 0;
  tfc_word_t word_in, word_out;
  logic [NRB-1:0] rb_throttle;
  logic mep_throttle, int_throttle, reset_in;   // int_throttle drives the word's veto bit
  logic [3:0] cfg_en, active;
  logic [31:0] cfg_reset_wait;
  logic throttled;
  int checks = 0, failures = 0;
  int hits[4] = '{0, 0, 0, 0};

  throttle_handler #(.N_RB(NRB)) dut (.clk, .rst_n, .word_in, .rb_throttle, .mep_throttle, .reset_in,
    .cfg_en, .cfg_reset_wait, .word_out, .throttled, .active);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [NRB-1:0] rb1 = '0, rb2 = '0;
  always @(posedge clk) begin rb1 <= rb_throttle; rb2 <= rb1; end

  initial begin
    tfc_word_t exp_w;
    bit exp_thr, have;
    int wait_left;
    have = 0; wait_left = 0;
    word_in = '0; rb_throttle = '0; mep_throttle = 0; int_throttle = 0; reset_in = 0;
    cfg_en = 4'hF; cfg_reset_wait = 32'd20;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 6000; i++) begin
      bit src[4];
      bit blk;
      @(negedge clk);
      if (have) begin
        checks++;
        if (word_out !== exp_w || throttled !== exp_thr) begin
          failures++;
          if (failures < 10) $display("FAIL %0d: got %h/%0d want %h/%0d", i, word_out, throttled,
                                      exp_w, exp_thr);
        end
      end
      word_in = tfc_word_t'({$urandom, $urandom});
      word_in.fe_reset = ($urandom_range(0, 150) == 0);
      reset_in = ($urandom_range(0, 200) == 0);
      if (i % 40 == 0) rb_throttle = ($urandom_range(0, 2) == 0) ? NRB'(1 << $urandom_range(0, NRB-1)) : '0;
      if (i % 23 == 0) mep_throttle = ($urandom_range(0, 2) == 0);
      if (i % 31 == 0) int_throttle = ($urandom_range(0, 2) == 0);
      word_in.veto = int_throttle;
      if (i % 500 == 0) cfg_en = 4'($urandom);
      // reference
      src[0] = |rb2;
      src[1] = mep_throttle;
      src[2] = int_throttle;
      src[3] = word_in.fe_reset || reset_in || (wait_left != 0);
      blk = 0;
      for (int s = 0; s < 4; s++) if (src[s] && cfg_en[s]) blk = 1;
      for (int s = 0; s < 4; s++)
        if (word_in.trigger && src[s] && cfg_en[s]) hits[s]++;
      exp_w = word_in;
      if (blk) begin exp_w.trigger = 0; exp_w.tae = 0; exp_w.tae_central = 0; exp_w.origin = '0; end
      exp_thr = blk && word_in.trigger;
      if (word_in.fe_reset || reset_in) wait_left = 20;
      else if (wait_left != 0) wait_left--;
      have = 1;
    end
    for (int s = 0; s < 4; s++) begin
      checks++;
      if (hits[s] == 0) begin failures++; $display("FAIL: source %0d never throttled", s); end
    end
    $display("throttle hits: rb=%0d mep=%0d int=%0d reset=%0d", hits[0], hits[1], hits[2], hits[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
