// tb_monitor_counters: self-checking test of free-running and latched counters.
//
// Random events on 6 counters; the test keeps its own counts, and after each
// latch pulse checks that every latched counter equals the reference value
// of the same instant (all taken on one clock edge), while the free-running
// counters keep counting. Also checks the common clear.
module tb_monitor_counters;
  localparam int N = 6;

  logic clk = 0, rst_n = 0, latch = 0, clear = 0;
  logic [N-1:0] event_in;
  logic [31:0] free_cnt [N];
  logic [31:0] latched_cnt [N];
  int checks = 0, failures = 0;

  monitor_counters #(.N_CNT(N), .CNT_W(32)) dut (.clk, .rst_n, .event_in, .latch, .clear,
    .free_cnt, .latched_cnt);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ref_cnt[N];
    int snap[N];
    event_in = '0;
    foreach (ref_cnt[k]) begin ref_cnt[k] = 0; snap[k] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      // state after the last edge
      for (int k = 0; k < N; k++) begin
        checks++;
        if (free_cnt[k] != 32'(ref_cnt[k])) begin
          failures++;
          if (failures < 10) $display("FAIL free %0d at %0d: %0d want %0d", k, i, free_cnt[k], ref_cnt[k]);
        end
      end
      // latched copies hold the values of the last latch until the next one
      if (i > 0) for (int k = 0; k < N; k++) begin
        checks++;
        if (latched_cnt[k] != 32'(snap[k])) begin
          failures++;
          if (failures < 10) $display("FAIL latched %0d: %0d want %0d", k, latched_cnt[k], snap[k]);
        end
      end
      latch = ($urandom_range(0, 50) == 0);
      clear = (i == 1500);
      event_in = N'($urandom);
      if (latch) foreach (snap[k]) snap[k] = ref_cnt[k];
      foreach (ref_cnt[k]) ref_cnt[k] = clear ? 0 : ref_cnt[k] + int'(event_in[k]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
