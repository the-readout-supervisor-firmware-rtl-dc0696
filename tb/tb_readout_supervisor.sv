// tb_readout_supervisor: end-to-end test of the readout supervisor core.
//
// Runs the core at its default sizes (3564-crossing orbit, 500 throttle
// lines, 65-event TAE window, 256-deep pipelines) for about eight orbits.
// The test programs the core through the register bus like a control system
// would: loads a filling scheme with a block of empty crossings, sets both
// internal generators (a calibration trigger every 37 cycles and a TAE
// central trigger at BXID 2000 every orbit), the pipelines, the throttle,
// the MEP packing and the start-of-run sequence, then starts the run from
// the external command input. Late in the run generator 0 switches to its
// pseudo-random mode.
// Around it, models of the LHC (orbit pulse), a readout board (throttle
// line), an external trigger source and the farm (destination requests)
// drive the inputs.
//
// Checked on the output, word by word:
//   - BXIDs advance by one per word and wrap at 3564; the Bunch ID Reset
//     leaves a fixed number of cycles after the orbit pulse, equal to the
//     sum of the stage latencies;
//   - the start-of-run sequence: one FE+BE reset word, Header Only, then
//     exactly 50 Synch words, then 20 Header Only words;
//   - no trigger on an empty crossing, during the start-of-run veto or
//     during the FE-reset wait;
//   - at least one complete 7-word TAE window (half window 3);
//   - triggers carry the farm destinations in request order, 4 per packet,
//     with mep_accept on every fourth;
//   - every output trigger has a bank record with the same BXID and
//     destination, in the same order;
//   - an asynchronous snapshot command appears exactly once;
//   - an asynchronous FE Reset appears alone, and the words that follow it
//     through the throttle stage carry no trigger for the FE-reset wait;
//   - counters latched through the register bus match the test's counts.
// Each mechanism (sequence, TAE, board throttle, MEP throttle, FE-reset
// wait, crossing-type mask, external and register triggers, calibration,
// asynchronous command) is counted, and one that never happened fails.
module tb_readout_supervisor;
  import rs_pkg::*;

  localparam int ORBIT = 3564;
  localparam int MID = 10, OUTD = 20;
  localparam int PACK = 4;
  localparam int RST_WAIT = 100;

  logic clk = 0, rst_n = 0;
  logic orbit_in = 0, ext_trg_in = 0, ext_cmd_in = 0;
  logic [499:0] rb_throttle = '0;
  logic farm_req_valid = 0;
  logic [DEST_W-1:0] farm_req_dest = '0;
  logic [31:0] run_info = 32'h0000_2019;
  logic [11:0] ecs_addr = '0;
  logic ecs_wr = 0, ecs_rd = 0;
  logic [31:0] ecs_wdata = '0, ecs_rdata;
  logic ecs_rvalid;
  tfc_word_t tfc_out;
  tfc_bank_t bank;
  logic bank_valid;

  readout_supervisor dut (.clk, .rst_n, .orbit_in, .ext_trg_in, .ext_cmd_in, .rb_throttle,
    .farm_req_valid, .farm_req_dest, .run_info, .ecs_addr, .ecs_wr, .ecs_wdata, .ecs_rd,
    .ecs_rdata, .ecs_rvalid, .tfc_out, .bank, .bank_valid);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- register bus ----------------
  task automatic reg_write(input int a, input logic [31:0] d);
    @(negedge clk); ecs_addr = 12'(a); ecs_wdata = d; ecs_wr = 1;
    @(negedge clk); ecs_wr = 0;
  endtask
  task automatic reg_read(input int a, output logic [31:0] d);
    @(negedge clk); ecs_addr = 12'(a); ecs_rd = 1;
    @(negedge clk); ecs_rd = 0; d = ecs_rdata;
  endtask

  // ---------------- LHC orbit ----------------
  int orbit_pulses = 0;
  int orbit_cycle[$];
  initial begin
    @(posedge rst_n);
    repeat (500) @(posedge clk);
    forever begin
      orbit_in <= 1; orbit_cycle.push_back(cyc); orbit_pulses++;
      @(posedge clk); orbit_in <= 0;
      repeat (ORBIT - 1) @(posedge clk);
    end
  end

  // ---------------- farm ----------------
  int dests[$];
  int next_dest = 100;
  int farm_refused = 0;
  task automatic farm_request();
    @(negedge clk); farm_req_valid = 1; farm_req_dest = DEST_W'(next_dest);
    // a request that finds the destination queue full is refused
    if (dut.u_mep.full) farm_refused++;
    else dests.push_back(next_dest);
    next_dest += 3;
    @(negedge clk); farm_req_valid = 0;
  endtask

  // ---------------- output monitor ----------------
  int latency_exp;
  int n_rnd_out = 0, n_out_trg = 0, n_empty_trg = 0, n_calib_out = 0, n_snapshot = 0, n_ext_out = 0, n_ecs_out = 0;
  int n_tae_words = 0, n_tae_full = 0, n_mep_accept = 0, n_veto_ok = 0, n_wait_ok = 0;
  int n_bxid_resets_out = 0;
  logic [BXID_W-1:0] prev_bxid;
  bit started = 0;
  int out_trg_bx[$], out_trg_dest[$];
  // sequence tracking
  int seq_state = 0;      // 0 wait reset, 1 in header, 2 in synch, 3 in post, 4 done
  int synch_words = 0, post_words = 0, fe_reset_cycle = -1;
  bit veto_window = 1;
  int tae_run = 0;
  int dest_idx = 0, in_packet = 0;
  int async_fe_cycle = -1, n_async_fe = 0;

  always @(negedge clk) if (rst_n) begin
    if (started && cyc > 2000) check(tfc_out.bxid == ((prev_bxid == BXID_W'(ORBIT - 1)) ? '0 : prev_bxid + 1'b1),
                       $sformatf("bxid step %0d -> %0d", prev_bxid, tfc_out.bxid));
    prev_bxid = tfc_out.bxid;
    started = 1;
    if (tfc_out.bxid_reset) begin
      int lat;
      n_bxid_resets_out++;
      lat = cyc - orbit_cycle[n_bxid_resets_out - 1];
      check(lat == latency_exp, $sformatf("orbit-to-output latency %0d, want %0d", lat, latency_exp));
      check(tfc_out.bxid == '0, "bxid reset on BXID 0");
    end
    // start-of-run sequence
    case (seq_state)
      0: if (tfc_out.fe_reset && tfc_out.be_reset) begin seq_state = 1; fe_reset_cycle = cyc; end
      1: if (tfc_out.synch) begin seq_state = 2; synch_words = 1; end
         else check(tfc_out.header_only, "header only after reset");
      2: if (tfc_out.synch) synch_words++;
         else begin
           check(synch_words == 50, $sformatf("synch words %0d", synch_words));
           check(tfc_out.header_only, "trailing header only");
           seq_state = 3; post_words = 1;
         end
      3: if (tfc_out.header_only) post_words++;
         else begin
           check(post_words == 20, $sformatf("trailing header words %0d", post_words));
           seq_state = 4; veto_window = 0;
         end
      default: if (tfc_out.fe_reset) begin
        // asynchronous FE Reset sent by the control system after the run started
        async_fe_cycle = cyc; n_async_fe++;
        check(!tfc_out.be_reset && !tfc_out.header_only, "asynchronous FE Reset alone");
      end
    endcase
    if (tfc_out.trigger) begin
      n_out_trg++;
      check(tfc_out.bx_type == BX_BEAM_BEAM, $sformatf("trigger on crossing type %0d", tfc_out.bx_type));
      check(!veto_window || seq_state == 0, "trigger during start-of-run veto");
      check(fe_reset_cycle < 0 || cyc - fe_reset_cycle > RST_WAIT, "trigger inside FE-reset wait");
      // words that passed the throttle stage after an asynchronous FE Reset
      // leave OUTD+2 words after it; the next RST_WAIT of them hold no trigger
      check(async_fe_cycle < 0 || cyc - async_fe_cycle < OUTD + 2 || cyc - async_fe_cycle > OUTD + 2 + RST_WAIT,
            $sformatf("trigger %0d words after an asynchronous FE Reset", cyc - async_fe_cycle));
      out_trg_bx.push_back(int'(tfc_out.bxid));
      out_trg_dest.push_back(int'(tfc_out.mep_dest));
      if (tfc_out.origin[ORIG_EXTERNAL]) n_ext_out++;
      if (tfc_out.origin[ORIG_ECS]) n_ecs_out++;
      if (tfc_out.origin[ORIG_RANDOM]) n_rnd_out++;
      // MEP destinations in request order
      check(dest_idx < dests.size() && int'(tfc_out.mep_dest) == dests[dest_idx],
            $sformatf("mep dest %0d, want %0d", tfc_out.mep_dest, dests[dest_idx]));
      in_packet++;
      check(tfc_out.mep_accept == (in_packet == PACK), "mep_accept on last event of packet");
      if (in_packet == PACK) begin in_packet = 0; dest_idx++; n_mep_accept++; end
    end
    if (tfc_out.calib) n_calib_out++;
    if (tfc_out.snapshot) n_snapshot++;
    // TAE windows: runs of tae words
    if (tfc_out.tae) begin
      n_tae_words++;
      tae_run++;
    end else begin
      if (tae_run == 7) n_tae_full++;
      tae_run = 0;
    end
  end

  // bank records
  int bank_bx[$], bank_dest[$];
  int n_banks = 0;
  always @(negedge clk) if (rst_n && bank_valid) begin
    n_banks++;
    bank_bx.push_back(int'(bank.bxid));
    bank_dest.push_back(int'(bank.mep_dest));
    check(bank.run_info == 32'h0000_2019, "bank run info");
    check(bank.scan_step == 16'd3, "bank scan step");
  end

  // ---------------- stimulus ----------------
  initial begin
    logic [31:0] d;
    int thr_seen;
    // the orbit pulse is sampled one edge after it is driven, then 3 cycles
    // to the Bunch ID Reset, then the stages of the chain
    latency_exp = 4 + 1 + 33 + (MID + 1) + 1 + 1 + (OUTD + 1) + 1;
    repeat (5) @(negedge clk);
    rst_n = 1;
    // filling scheme: all beam-beam, except crossings 80..95 empty
    for (int a = 0; a < 224; a++) reg_write(12'h400 + a, (a == 5) ? 32'h0 : 32'hFFFF_FFFF);
    reg_write(REG_BXID, 32'd0);
    reg_write(REG_ITRG0_A, 32'b001101);               // en, cycle mode, calib, accept
    reg_write(REG_ITRG0_B, 32'd37);
    reg_write(REG_ITRG1_A, (32'd2000 << 16) | 32'b011011); // en, bx mode, accept, tae
    reg_write(REG_ITRG1_B, 32'd1);
    reg_write(REG_SYNC0, (32'd50 << 16) | 32'd100);
    reg_write(REG_SYNC1, (32'd1 << 16) | 32'd20);
    reg_write(REG_PIPE, (32'(OUTD) << 8) | 32'(MID));
    reg_write(REG_THR_EN, 32'hF);
    reg_write(REG_RST_WAIT, 32'(RST_WAIT));
    reg_write(REG_MEP, (32'd1 << 8) | 32'(PACK));
    reg_write(REG_TS_LO, 32'h1000);
    reg_write(REG_TS_HI, 32'h0);
    reg_write(REG_SCAN, 32'd3);
    // CTRL: external trigger enable, beam-beam mask, TAE enable, half window 3
    reg_write(REG_CTRL, (32'd3 << 9) | (32'd1 << 8) | (32'h8 << 4) | 32'h4);
    repeat (2) farm_request();
    // wait for the orbit to lock, then start the run from the external
    // command input (enabled by CTRL bit 3)
    while (orbit_pulses < 1) @(negedge clk);
    reg_write(REG_CTRL, (32'd3 << 9) | (32'd1 << 8) | (32'h8 << 4) | 32'hC);
    repeat (700) @(negedge clk);
    ext_cmd_in = 1; repeat (4) @(negedge clk); ext_cmd_in = 0;
    // run: farm keeps sending, with gaps long enough to make the MEP throttle
    fork
      begin
        for (int k = 0; k < 150; k++) begin
          farm_request();
          repeat ((k % 20 < 10) ? 100 : 250) @(negedge clk);
        end
      end
      begin
        // external triggers
        repeat (3000) @(negedge clk);
        for (int k = 0; k < 20; k++) begin
          ext_trg_in = 1; repeat (3) @(negedge clk); ext_trg_in = 0;
          repeat (211) @(negedge clk);
        end
      end
      begin
        // readout-board throttle for 2000 cycles
        repeat (8000) @(negedge clk);
        rb_throttle[321] = 1;
        repeat (2000) @(negedge clk);
        rb_throttle[321] = 0;
      end
      begin
        // triggers and an asynchronous snapshot from the control system
        repeat (12000) @(negedge clk);
        for (int k = 0; k < 5; k++) begin
          reg_write(12'h040, 32'(1 << CMD_TRIGGER));
          repeat (300) @(negedge clk);
        end
        reg_write(REG_ASYNC, 32'b00100);            // snapshot
        reg_write(12'h040, 32'(1 << CMD_ASYNC));
        // then an asynchronous FE Reset, which starts the FE-reset wait
        repeat (500) @(negedge clk);
        reg_write(REG_ASYNC, 32'b00010);
        reg_write(12'h040, 32'(1 << CMD_ASYNC));
        repeat (500) @(negedge clk);
        // generator 0 in random mode, about one trigger in 40 crossings
        reg_write(REG_ITRG0_B, 32'd419430);
        reg_write(REG_ITRG0_A, 32'b1001001);        // en, accept, random
        repeat (2000) @(negedge clk);
      end
    join
    // quiet down: stop generators, let the pipelines drain
    reg_write(REG_ITRG0_A, 32'd0);
    reg_write(REG_ITRG1_A, 32'd0);
    repeat (400) @(negedge clk);
    reg_write(12'h040, 32'(1 << CMD_LATCH));
    reg_read(12'h100 + CNT_ACCEPT, d);
    check(int'(d) == n_banks, $sformatf("latched accept counter %0d, banks %0d", d, n_banks));
    reg_read(12'h100 + CNT_ORBIT, d);
    check(int'(d) == orbit_pulses, $sformatf("latched orbit counter %0d, pulses %0d", d, orbit_pulses));
    reg_read(12'h100 + CNT_THROTTLE, d);
    thr_seen = int'(d);
    reg_read(12'h100 + CNT_TAE, d);
    check(d > 0, "TAE counter");
    reg_read(12'h100 + CNT_RUN, d);
    check(d == 1, $sformatf("run counter %0d", d));
    reg_read(12'h0C0, d);
    check(d[ERR_ORBIT] == 0 && d[ERR_MEP_LOST] == 0, $sformatf("error register %h", d));
    check(d[ERR_MEP_OVF] == (farm_refused > 0), "MEP queue overflow error");
    reg_read(12'h083, d);
    check(d == 32'h5253_0001, "identification word");
    // bank records match output triggers one to one
    check(out_trg_bx.size() == bank_bx.size(),
          $sformatf("%0d output triggers, %0d banks", out_trg_bx.size(), bank_bx.size()));
    foreach (out_trg_bx[i]) if (i < bank_bx.size())
      check(out_trg_bx[i] == bank_bx[i] && out_trg_dest[i] == bank_dest[i], "bank matches trigger");
    check(n_snapshot == 1, $sformatf("snapshot words %0d", n_snapshot));
    check(seq_state == 4, "start-of-run sequence completed");
    // mechanisms that must have happened
    $display("mechanisms: triggers=%0d calib=%0d ext=%0d ecs=%0d tae_windows=%0d mep_packets=%0d throttled=%0d banks=%0d orbits=%0d",
             n_out_trg, n_calib_out, n_ext_out, n_ecs_out, n_tae_full, n_mep_accept, thr_seen, n_banks,
             n_bxid_resets_out);
    check(n_out_trg > 100, "triggers");
    check(n_calib_out > 0, "calibration commands");
    check(n_ext_out > 0, "external triggers");
    check(n_ecs_out > 0, "register-bus triggers");
    check(n_tae_full > 0, "complete TAE window");
    check(n_mep_accept > 10, "MEP packets");
    check(thr_seen > 0, "throttled triggers");
    check(mep_thr_cycles > 0, "MEP throttle");
    check(rb_thr_cycles > 0, "board throttle");
    check(mask_blocked > 0, "crossing-type mask");
    check(farm_refused > 0, "MEP queue overflow");
    check(n_rnd_out > 10, $sformatf("random triggers %0d", n_rnd_out));
    check(n_async_fe == 1, $sformatf("asynchronous FE Resets %0d", n_async_fe));
    check(reset_thr_cycles > 0, "FE-reset wait throttled a trigger");
    check(ext_start_seen, "run started from the external command input");
    $display("mechanisms: mep_throttle_cycles=%0d board_throttle_cycles=%0d masked=%0d farm_refused=%0d",
             mep_thr_cycles, rb_thr_cycles, mask_blocked, farm_refused);
    $display("mechanisms: async_fe_resets=%0d reset_wait_throttled=%0d random=%0d", n_async_fe, reset_thr_cycles, n_rnd_out);
    check(n_bxid_resets_out >= 5, "orbits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // internal observation of how often the throttle sources were active
  // while a trigger was being rejected, and of masked crossings
  int mep_thr_cycles = 0, rb_thr_cycles = 0, mask_blocked = 0, reset_thr_cycles = 0;
  bit ext_start_seen = 0;
  always @(negedge clk) if (rst_n) begin
    if (dut.throttled && dut.thr_active[3] && n_async_fe > 0) reset_thr_cycles++;
    if (dut.run_start && !dut.cfg[REG_CTRL][0]) ext_start_seen = 1;
    if (dut.throttled && dut.thr_active[1]) mep_thr_cycles++;
    if (dut.throttled && dut.thr_active[0]) rb_thr_cycles++;
    if (dut.itrg_fire[0] && dut.bx_type == BX_EMPTY_EMPTY) mask_blocked++;
  end
endmodule
