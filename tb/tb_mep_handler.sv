// tb_mep_handler: self-checking test of multi-event packet assignment.
//
// A model farm sends destination requests at random; random triggers arrive.
// A queue-based reference here predicts, for every output word, the
// destination tag, the mep_accept flag on the last event of each packet of
// cfg_packing events, dropped triggers when no destination exists, and the
// throttle (raised when no slot is left for the next event). The test also
// honours the throttle in a second phase, where no trigger may be lost, and
// counts packets closed, throttled cycles and queue overflows.
module tb_mep_handler;
  import rs_pkg::*;

  logic clk = 0, rst_n = 0, cfg_en;
  logic [7:0] cfg_packing;
  tfc_word_t word_in, word_out;
  logic farm_req_valid;
  logic [DEST_W-1:0] farm_req_dest;
  logic mep_throttle, lost, overflow;
  logic [4:0] fifo_count;
  int checks = 0, failures = 0;
  int n_packets = 0, n_thr = 0, n_lost = 0, n_ovf = 0;

  mep_handler #(.FIFO_DEPTH(16)) dut (.clk, .rst_n, .cfg_en, .cfg_packing, .word_in,
    .farm_req_valid, .farm_req_dest, .word_out, .mep_throttle, .lost, .overflow, .fifo_count);

  always #5 clk = ~clk;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference state
  int q[$];
  int cur = 0;
  bit cur_v = 0;
  int cnt = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic phase(input int n, input int pack, input bit obey, input int req_rate);
    tfc_word_t exp_w;
    bit exp_lost, have;
    have = 0;
    for (int i = 0; i < n; i++) begin
      bit thr, take, last, full;
      @(negedge clk);
      // the packet size changes only after the previous phase's last word
      // has been taken by the block
      if (i == 0) cfg_packing = 8'(pack);
      if (have) begin
        check(word_out === exp_w, $sformatf("word %h want %h", word_out, exp_w));
        check(lost === exp_lost, "lost flag");
        if (obey) check(!lost, "trigger lost while obeying the throttle");
      end
      // throttle prediction from the reference state
      last = (cnt + 1 >= pack);
      thr = !cur_v || (q.size() == 0 && last);
      check(mep_throttle === thr, $sformatf("throttle %0d want %0d", mep_throttle, thr));
      if (thr) n_thr++;
      // stimulus
      word_in = '0;
      word_in.bxid = BXID_W'(i);
      word_in.trigger = ($urandom_range(0, 2) == 0) && !(obey && mep_throttle);
      if (word_in.trigger) word_in.origin[ORIG_INTERNAL] = 1;
      farm_req_valid = ($urandom_range(0, req_rate) == 0);
      farm_req_dest = DEST_W'($urandom);
      // expected word
      exp_w = word_in;
      exp_lost = 0;
      take = word_in.trigger && cur_v;
      if (word_in.trigger) begin
        if (cur_v) begin
          exp_w.mep_dest = DEST_W'(cur);
          exp_w.mep_accept = last;
          if (last) n_packets++;
        end else begin
          exp_w.trigger = 0; exp_w.origin = '0; exp_lost = 1; n_lost++;
        end
      end
      // next reference state; a request is refused when the queue was full
      // at the start of the cycle, even if an entry leaves in the same cycle
      full = (q.size() == 16);
      if (take) cnt = last ? 0 : cnt + 1;
      if (q.size() != 0 && (!cur_v || (take && last))) begin
        cur = q.pop_front(); cur_v = 1;
      end else if (take && last) cur_v = 0;
      if (farm_req_valid) begin
        if (!full) q.push_back(int'(farm_req_dest));
        else n_ovf++;
      end
      have = 1;
    end
  endtask

  initial begin
    word_in = '0; farm_req_valid = 0; farm_req_dest = '0; cfg_en = 1; cfg_packing = 4;
    repeat (3) @(negedge clk);
    rst_n = 1;
    phase(3000, 4, 0, 8);    // farm slower than triggers: throttle and losses
    phase(3000, 3, 1, 5);    // throttle obeyed: nothing lost
    phase(1000, 1, 1, 0);    // farm floods the queue: overflow
    check(n_packets > 50, $sformatf("packets closed %0d", n_packets));
    check(n_thr > 0 && n_lost > 0 && n_ovf > 0,
          $sformatf("throttle %0d lost %0d overflow %0d", n_thr, n_lost, n_ovf));
    $display("packets=%0d throttled_cycles=%0d lost=%0d overflows=%0d", n_packets, n_thr, n_lost, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
