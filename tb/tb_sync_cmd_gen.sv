// tb_sync_cmd_gen: self-checking test of the start-of-run sequencer.
//
// BXID resets arrive every ORBIT cycles. For several settings the test
// raises start_of_run (or fe_reset_req), records the outputs cycle by cycle
// and compares them with a sequence computed here from the rules:
//   one reset cycle in the cycle after the request level is first seen (BE reset only
//   for start of run), Header Only from the next cycle for at least
//   cfg_ho_len cycles and until the cycle of the first BXID reset seen from
//   the reset cycle on, Synch for cfg_synch_len cycles, optional trailing
//   Header Only for cfg_post_len cycles, trigger veto high until the
//   sequence ends and low afterwards.
module tb_sync_cmd_gen;
  import rs_pkg::*;
  localparam int ORBIT = 40;

  logic clk = 0, rst_n = 0;
  logic start_of_run = 0, fe_reset_req = 0, bxid_reset;
  logic [15:0] ho_len, synch_len, post_len;
  logic post_en;
  sync_cmd_t cmd;
  logic trigger_veto, run_start, busy;
  logic [2:0] state_o;
  int checks = 0, failures = 0;

  sync_cmd_gen dut (.clk, .rst_n, .start_of_run, .fe_reset_req, .bxid_reset,
    .cfg_ho_len(ho_len), .cfg_synch_len(synch_len), .cfg_post_en(post_en),
    .cfg_post_len(post_len), .cmd, .trigger_veto, .run_start, .busy, .state_o);

  always #5 clk = ~clk;

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  assign bxid_reset = (cyc % ORBIT == 0);

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

  // One record per cycle, sampled before the clock edge.
  typedef struct { int c; logic fe, be, ho, sy, veto, bxr; } rec_t;
  rec_t recs[$];
  always @(negedge clk)
    recs.push_back('{cyc, cmd.fe_reset, cmd.be_reset, cmd.header_only, cmd.synch,
                     trigger_veto, bxid_reset});

  task automatic run(input bit sor, input int ho, input int sy, input bit pe, input int pl,
                     input int phase);
    int t0, tr, b, last_ho, s0, s_end, p_end, n;
    ho_len = 16'(ho); synch_len = 16'(sy); post_en = pe; post_len = 16'(pl);
    // choose where in the orbit the request lands
    while (cyc % ORBIT != phase) @(negedge clk);
    recs.delete();
    if (sor) start_of_run = 1; else fe_reset_req = 1;
    t0 = cyc;
    n = ho + sy + pl + 3 * ORBIT;
    repeat (n) @(negedge clk);
    start_of_run = 0; fe_reset_req = 0;
    // expected sequence
    tr = t0 + 1;
    b = tr; while (b % ORBIT != 0) b++;
    last_ho = (tr + ho > b) ? tr + ho : b;
    s0 = last_ho + 1;
    s_end = s0 + sy - 1;
    p_end = pe ? s_end + pl : s_end;
    foreach (recs[i]) begin
      int c;
      logic e_fe, e_be, e_ho, e_sy, e_veto;
      c = recs[i].c;
      if (c < t0 + 1) continue;
      e_fe   = (c == tr);
      e_be   = (c == tr) && sor;
      e_ho   = (c > tr && c <= last_ho) || (pe && c > s_end && c <= p_end);
      e_sy   = (c >= s0 && c <= s_end);
      e_veto = (c <= p_end);
      if (c < tr) continue;        // veto state before the request is not defined here
      check(recs[i].fe == e_fe && recs[i].be == e_be && recs[i].ho == e_ho &&
            recs[i].sy == e_sy && recs[i].veto == e_veto,
            $sformatf("cycle %0d (t0=%0d): fe%0d be%0d ho%0d sy%0d veto%0d, want %0d%0d%0d%0d%0d",
                      c, t0, recs[i].fe, recs[i].be, recs[i].ho, recs[i].sy, recs[i].veto,
                      e_fe, e_be, e_ho, e_sy, e_veto));
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(trigger_veto == 1, "veto after reset");
    run(1, 10, 5, 0, 0, 5);     // BXID reset falls after the Header Only length
    run(1, 50, 8, 1, 6, 5);     // Header Only length longer than to the BXID reset
    run(0, 3, 4, 1, 2, 20);     // FE reset request: no BE reset
    run(1, 1, 1, 0, 0, 38);     // BXID reset lands in the reset cycle
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
