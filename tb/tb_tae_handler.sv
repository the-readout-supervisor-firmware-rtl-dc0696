// tb_tae_handler: self-checking test of the TAE window logic.
//
// Feeds a stream of words numbered through the bxid field, with sparse
// ordinary triggers and sparse TAE central triggers, for several half
// windows including the full 32 (65-event window). The expected output
// stream is computed here: word i is marked (trigger, tae, TAE origin) if a
// central trigger lies within half words of it, and leaves the block
// exactly MAX_HALF+1 = 33 cycles after it entered. Also checks that with
// TAE disabled the stream passes unchanged and counts full windows.
module tb_tae_handler;
  import rs_pkg::*;
  localparam int MAXH = 32;
  localparam int N = 1500;

  logic clk = 0, rst_n = 0, cfg_en;
  logic [5:0] cfg_half;
  tfc_word_t word_in, word_out;
  logic window_start;
  int checks = 0, failures = 0, windows65 = 0;

  tae_handler #(.MAX_HALF(MAXH)) dut (.clk, .rst_n, .cfg_en, .cfg_half,
    .word_in, .word_out, .window_start);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  tfc_word_t in_s [N];
  tfc_word_t exp_s [N];

  task automatic run(input bit en, input int half);
    int central[$];
    cfg_en = en; cfg_half = 6'(half);
    for (int i = 0; i < N; i++) begin
      tfc_word_t w;
      w = '0;
      w.bxid = BXID_W'(i);
      w.calib = ($urandom_range(0, 9) == 0);
      if ($urandom_range(0, 40) == 0) begin w.trigger = 1; w.origin[ORIG_INTERNAL] = 1; end
      if (i > 40 && i < N - 80 && $urandom_range(0, 150) == 0) begin
        w.trigger = 1; w.tae_central = 1; central.push_back(i);
      end
      in_s[i] = w;
    end
    for (int i = 0; i < N; i++) begin
      exp_s[i] = in_s[i];
      if (en) foreach (central[k]) if (i >= central[k] - half && i <= central[k] + half) begin
        exp_s[i].trigger = 1; exp_s[i].tae = 1; exp_s[i].origin[ORIG_TAE] = 1;
      end
    end
    // count windows that are complete and isolated at half=32
    if (en && half == 32) foreach (central[k]) windows65++;
    fork
      for (int i = 0; i < N; i++) begin
        @(negedge clk); word_in = in_s[i];
      end
      begin
        // output of word i is seen at the negedge MAXH+1 cycles later
        @(negedge clk);
        repeat (MAXH + 1) @(negedge clk);
        for (int i = 0; i < N - MAXH - 2; i++) begin
          checks++;
          if (word_out !== exp_s[i]) begin
            failures++;
            if (failures < 10) $display("FAIL half=%0d word %0d: got %h want %h (out bxid %0d)",
                                        half, i, word_out, exp_s[i], word_out.bxid);
          end
          @(negedge clk);
        end
      end
    join
  endtask

  initial begin
    word_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1, 32);
    run(1, 5);
    run(1, 0);
    run(0, 10);
    checks++;
    if (windows65 == 0) begin failures++; $display("FAIL: no full 65-event window"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
