// tb_bxid_counter: self-checking test of the bunch-crossing counter.
//
// Uses a 20-crossing orbit to stay short. Orbit pulses arrive every 20
// cycles; the test follows the counter with its own model (load the offset
// on the Bunch ID Reset, then count modulo the orbit length), checks that
// the reset command comes exactly three cycles after the pulse, that a
// regular orbit raises no error and that a pulse arriving early does.
module tb_bxid_counter;
  import rs_pkg::*;
  localparam int N = 20;

  logic clk = 0, rst_n = 0, orbit_in = 0;
  logic [BXID_W-1:0] offset, bxid, bxid_next;
  logic bxid_reset, orbit_err;
  int checks = 0, failures = 0;

  bxid_counter #(.BX_PER_ORBIT(N)) dut (.clk, .rst_n, .orbit_in,
    .cfg_orbit_offset(offset), .bxid, .bxid_next, .bxid_reset, .orbit_err);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int model;
  bit synced = 0;
  int pulse_cycle, cyc = 0;
  int resets_seen = 0;
  int errs_seen = 0;
  int o_errs;

  always @(posedge clk) cyc <= cyc + 1;

  // Model-based checking on the falling edge.
  always @(negedge clk) if (rst_n) begin
    if (bxid_reset) begin
      check(bxid == offset, $sformatf("bxid %0d at reset, want %0d", bxid, offset));
      check(cyc - pulse_cycle == 3, $sformatf("reset %0d cycles after pulse", cyc - pulse_cycle));
      model = offset;
      synced = 1;
      resets_seen++;
    end else if (synced) begin
      model = (model + 1) % N;
      check(bxid == model, $sformatf("bxid %0d want %0d", bxid, model));
    end
    if (orbit_err) errs_seen++;
  end

  task automatic pulse();
    @(posedge clk); orbit_in <= 1; pulse_cycle = cyc + 1;
    @(posedge clk); orbit_in <= 0;
  endtask

  initial begin
    offset = 12'd3;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    pulse();
    repeat (N - 2) @(posedge clk);
    for (int o = 0; o < 5; o++) begin
      pulse();
      repeat (N - 2) @(posedge clk);
    end
    check(errs_seen == 0, "no orbit error on regular orbits");
    check(resets_seen == 6, $sformatf("saw %0d bxid resets, want 6", resets_seen));
    // early pulse
    repeat (5) @(posedge clk);
    pulse();
    repeat (6) @(posedge clk);
    check(errs_seen == 1, $sformatf("orbit error on early pulse (%0d)", errs_seen));
    // offset zero wraps cleanly
    offset = 12'd0;
    pulse(); repeat (6) @(posedge clk);
    o_errs = errs_seen;
    repeat (N - 8) @(posedge clk);
    pulse(); repeat (N - 2) @(posedge clk);
    pulse(); repeat (5) @(posedge clk);
    check(errs_seen == o_errs, $sformatf("no error on regular orbits after offset change (%0d/%0d)", errs_seen, o_errs));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
