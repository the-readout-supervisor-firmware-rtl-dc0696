// tb_tfc_bank: self-checking test of the event data bank.
//
// Streams random words with sparse triggers, BXID resets every 30 words and
// two start-of-run markers (be_reset). A reference counts orbits and cycles
// from each run start and predicts every bank record: one record per
// accepted event, one cycle later, carrying the word's fields, the scan
// step, the run information, the orbit number and the timestamp
// (initial value plus cycles since the run-start word).
module tb_tfc_bank;
  import rs_pkg::*;

  logic clk = 0, rst_n = 0;
  tfc_word_t word_in;
  logic [63:0] init_ts;
  logic [15:0] scan;
  logic [31:0] run_info;
  tfc_bank_t bank;
  logic bank_valid;
  logic [31:0] orbit_count;
  int checks = 0, failures = 0, n_banks = 0;

  tfc_bank dut (.clk, .rst_n, .word_in, .cfg_init_ts(init_ts), .cfg_scan_step(scan),
    .run_info, .bank, .bank_valid, .orbit_count);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tfc_bank_t exp_b;
    bit exp_v, have;
    longint ts;
    int orb;
    have = 0; ts = 0; orb = 0;
    word_in = '0; init_ts = 64'h0000_0123_4567_0000; scan = 16'd7; run_info = 32'hCAFE0001;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      if (have) begin
        checks++;
        if (bank_valid !== exp_v || (exp_v && bank !== exp_b)) begin
          failures++;
          if (failures < 10) $display("FAIL %0d: v=%0d %h want v=%0d %h", i, bank_valid, bank, exp_v, exp_b);
        end
      end
      word_in = tfc_word_t'({$urandom, $urandom});
      word_in.trigger = ($urandom_range(0, 5) == 0);
      word_in.bxid_reset = (i % 30 == 0);
      word_in.be_reset = (i == 100 || i == 2500);
      if (i == 2000) begin init_ts = {$urandom, $urandom}; scan = 16'(scan + 1); end
      // reference counters for this word
      if (word_in.be_reset) begin ts = longint'(init_ts); orb = 0; end
      else begin ts = ts + 1; if (word_in.bxid_reset) orb++; end
      exp_v = word_in.trigger;
      exp_b.bxid = word_in.bxid;
      exp_b.bx_type = word_in.bx_type;
      exp_b.origin = word_in.origin;
      exp_b.trg_mask = {word_in.mep_accept, word_in.synch, word_in.header_only,
                        word_in.tae_central, word_in.tae, word_in.snapshot,
                        word_in.nzs, word_in.calib};
      exp_b.scan_step = scan;
      exp_b.orbit = 32'(orb);
      exp_b.timestamp = 64'(ts);
      exp_b.mep_dest = word_in.mep_dest;
      exp_b.run_info = run_info;
      if (exp_v) n_banks++;
      have = (i > 100);     // counters are defined from the first run start
    end
    checks++;
    if (n_banks < 100) begin failures++; $display("FAIL: only %0d banks", n_banks); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
