// tb_async_cmd_gen: self-checking test of asynchronous command insertion.
//
// Random words pass through; at random times a random command set is
// issued. The test checks that every word comes out one cycle later
// unchanged except that the word following each issue (issue seen at a
// clock edge, inserted in the next cycle's word) carries the issued
// commands ORed in, exactly once, and that 'sent' marks that word.
module tb_async_cmd_gen;
  import rs_pkg::*;

  logic clk = 0, rst_n = 0, issue, sent;
  async_cmd_t cfg_cmd;
  tfc_word_t word_in, word_out;
  int checks = 0, failures = 0, n_sent = 0;

  async_cmd_gen dut (.clk, .rst_n, .cfg_cmd, .issue, .word_in, .word_out, .sent);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tfc_word_t exp_w;
    bit exp_s, have, pend;
    async_cmd_t pcmd;
    have = 0; pend = 0; pcmd = '0;
    word_in = '0; issue = 0; cfg_cmd = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (have) begin
        checks++;
        if (word_out !== exp_w || sent !== exp_s) begin
          failures++;
          if (failures < 10) $display("FAIL %0d: %h/%0d want %h/%0d", i, word_out, sent, exp_w, exp_s);
        end
      end
      word_in = tfc_word_t'({$urandom, $urandom});
      cfg_cmd = async_cmd_t'($urandom);
      // expected output of this cycle's word: pending request from before
      exp_w = word_in;
      exp_s = pend;
      if (pend) begin
        exp_w.calib |= pcmd.calib; exp_w.nzs |= pcmd.nzs; exp_w.snapshot |= pcmd.snapshot;
        exp_w.fe_reset |= pcmd.fe_reset; exp_w.be_reset |= pcmd.be_reset;
        n_sent++;
      end
      issue = ($urandom_range(0, 20) == 0);
      if (issue) begin pend = 1; pcmd = cfg_cmd; end
      else pend = 0;
      have = 1;
    end
    checks++;
    if (n_sent < 50) begin failures++; $display("FAIL: only %0d sent", n_sent); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
