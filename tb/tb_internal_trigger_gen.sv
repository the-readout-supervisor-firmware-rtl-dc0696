// tb_internal_trigger_gen: self-checking test of the periodic trigger source.
//
// A small BXID counter (orbit of 50 crossings) drives the generator.
// Cycle mode: with period P the generator must fire exactly every P cycles.
// BX mode: it must fire only on the programmed BXID and exactly every P
// orbits. Random mode: with threshold T it must fire in a fraction
// T/2^24 of the cycles (checked within a statistical margin), never with
// T = 0, and not at a fixed period. Disabled, it must never fire.
module tb_internal_trigger_gen;
  import rs_pkg::*;
  localparam int ORBIT = 50;

  logic clk = 0, rst_n = 0;
  itrg_cfg_t cfg;
  logic [BXID_W-1:0] bxid = '0;
  logic bxid_reset;
  logic fire;
  int checks = 0, failures = 0;

  internal_trigger_gen dut (.clk, .rst_n, .cfg, .bxid, .bxid_reset, .fire);

  always #5 clk = ~clk;
  always @(posedge clk) bxid <= (bxid == ORBIT - 1) ? '0 : bxid + 1'b1;
  assign bxid_reset = (bxid == 0);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Collect firing times (cycle numbers) and BXIDs.
  int cyc = 0;
  int fires[$];
  int fire_bx[$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (fire) begin fires.push_back(cyc); fire_bx.push_back(int'(bxid)); end
  end

  task automatic run_cycle_mode(input int p);
    cfg = '0; cfg.period = 24'(p);
    @(negedge clk); fires.delete(); fire_bx.delete();
    cfg.en = 1;
    repeat (20 * p + 5) @(negedge clk);
    cfg.en = 0;
    check(fires.size() >= 20, $sformatf("cycle mode P=%0d fired %0d times", p, fires.size()));
    for (int i = 1; i < fires.size(); i++)
      check(fires[i] - fires[i-1] == p, $sformatf("cycle mode P=%0d gap %0d", p, fires[i] - fires[i-1]));
  endtask

  task automatic run_bx_mode(input int p, input int bx);
    cfg = '0; cfg.period = 24'(p); cfg.mode_bx = 1; cfg.bx = BXID_W'(bx);
    @(negedge clk); fires.delete(); fire_bx.delete();
    cfg.en = 1;
    repeat (ORBIT * (6 * p + 1)) @(negedge clk);
    cfg.en = 0;
    check(fires.size() >= 5, $sformatf("bx mode P=%0d fired %0d times", p, fires.size()));
    foreach (fires[i]) begin
      check(fire_bx[i] == bx, $sformatf("bx mode fired at bx %0d", fire_bx[i]));
      if (i > 0) check(fires[i] - fires[i-1] == p * ORBIT,
                       $sformatf("bx mode P=%0d gap %0d", p, fires[i] - fires[i-1]));
    end
  endtask

  task automatic run_random_mode(input int t, input int n);
    int lo, hi, same;
    real expect_n;
    cfg = '0; cfg.period = 24'(t); cfg.random = 1;
    @(negedge clk); fires.delete();
    cfg.en = 1;
    repeat (n) @(negedge clk);
    cfg.en = 0;
    expect_n = real'(n) * real'(t) / 16777216.0;
    // about four standard deviations of a binomial count
    lo = int'(expect_n - 4.0 * $sqrt(expect_n) - 1.0);
    hi = int'(expect_n + 4.0 * $sqrt(expect_n) + 1.0);
    check(fires.size() >= lo && fires.size() <= hi,
          $sformatf("random mode T=%0d fired %0d times in %0d cycles, want %0d..%0d", t, fires.size(), n, lo, hi));
    same = 0;
    for (int i = 2; i < fires.size(); i++)
      if (fires[i] - fires[i-1] == fires[i-1] - fires[i-2]) same++;
    check(fires.size() < 3 || same < fires.size() / 2, "random mode fires at a fixed period");
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_cycle_mode(1);
    run_cycle_mode(7);
    run_cycle_mode(13);
    run_bx_mode(1, 17);
    run_bx_mode(3, 0);
    run_bx_mode(2, 49);
    run_random_mode(1 << 20, 16000);   // 1/16 of the cycles
    run_random_mode(1 << 23, 4000);    // 1/2
    run_random_mode(0, 2000);          // never
    // disabled: never fires
    cfg = '0; cfg.period = 24'd2;
    @(negedge clk); fires.delete();
    repeat (200) @(negedge clk);
    check(fires.size() == 0, "disabled generator fired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
