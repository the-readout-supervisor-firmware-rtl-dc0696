// tb_trigger_manager: self-checking test of the TFC word builder.
//
// Drives random BXIDs, crossing types, generator firings and configurations,
// synchronous commands, ECS triggers and a slowly toggling external trigger
// line, and compares every output word, one cycle later, with a reference
// word computed here from the rules: trigger only on enabled crossing types,
// calibration command whenever a calibrating generator fires, origin bits
// per source, external trigger on the synchronised rising edge only.
module tb_trigger_manager;
  import rs_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [BXID_W-1:0] bxid;
  bx_type_e bx_type;
  logic bxid_reset;
  logic [1:0] itrg_fire;
  itrg_cfg_t itrg_cfg [2];
  logic ext_trg_in = 0, cfg_ext_en, ecs_trg;
  logic [3:0] mask;
  sync_cmd_t sync_cmd;
  logic trigger_veto;
  tfc_word_t word;
  int checks = 0, failures = 0;
  int n_ext = 0, n_calib = 0, n_trg = 0;

  trigger_manager #(.NUM_ITRG(2)) dut (.clk, .rst_n, .bxid, .bx_type, .bxid_reset,
    .itrg_fire, .itrg_cfg, .ext_trg_in, .cfg_ext_en, .ecs_trg,
    .cfg_bxtype_mask(mask), .sync_cmd, .trigger_veto, .word);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference external-trigger edge detector: the input is changed on the
  // falling edge, so it is seen at the following rising edge.
  logic ext_d1 = 0, ext_d2 = 0, ext_d3 = 0;
  always @(posedge clk) begin ext_d1 <= ext_trg_in; ext_d2 <= ext_d1; ext_d3 <= ext_d2; end

  function automatic tfc_word_t ref_word(input bit ext_edge);
    tfc_word_t w;
    bit ok;
    w = '0;
    w.bxid = bxid; w.bx_type = bx_type; w.bxid_reset = bxid_reset;
    w.fe_reset = sync_cmd.fe_reset; w.be_reset = sync_cmd.be_reset;
    w.header_only = sync_cmd.header_only; w.synch = sync_cmd.synch; w.veto = trigger_veto;
    ok = mask[bx_type];
    for (int i = 0; i < 2; i++) if (itrg_fire[i]) begin
      if (itrg_cfg[i].calib) w.calib = 1;
      if (itrg_cfg[i].accept && ok) begin
        w.trigger = 1;
        if (itrg_cfg[i].nzs) w.nzs = 1;
        if (itrg_cfg[i].tae) w.tae_central = 1;
        w.origin[itrg_cfg[i].calib ? ORIG_CALIB : (itrg_cfg[i].random ? ORIG_RANDOM : ORIG_INTERNAL)] = 1;
      end
    end
    if (ext_edge && cfg_ext_en && ok) begin w.trigger = 1; w.origin[ORIG_EXTERNAL] = 1; end
    if (ecs_trg && ok) begin w.trigger = 1; w.origin[ORIG_ECS] = 1; end
    return w;
  endfunction

  tfc_word_t expect_w;
  bit have = 0;

  initial begin
    bxid = '0; bx_type = BX_EMPTY_EMPTY; bxid_reset = 0; itrg_fire = 0;
    itrg_cfg[0] = '0; itrg_cfg[1] = '0; cfg_ext_en = 1; ecs_trg = 0; mask = 4'hF; sync_cmd = '0; trigger_veto = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (have) begin
        checks++;
        if (word !== expect_w) begin
          failures++;
          if (failures < 10) $display("FAIL cycle %0d: got %h want %h", i, word, expect_w);
        end
        if (expect_w.origin[ORIG_EXTERNAL]) n_ext++;
        if (expect_w.calib) n_calib++;
        if (expect_w.trigger) n_trg++;
      end
      // new stimulus for this cycle
      bxid = BXID_W'($urandom_range(0, 3563));
      bx_type = bx_type_e'($urandom_range(0, 3));
      bxid_reset = ($urandom_range(0, 9) == 0);
      itrg_fire = 2'($urandom);
      if (i % 50 == 0) begin
        itrg_cfg[0] = itrg_cfg_t'({$urandom, $urandom});
        itrg_cfg[1] = itrg_cfg_t'({$urandom, $urandom});
        mask = 4'($urandom);
        cfg_ext_en = ($urandom_range(0, 3) != 0);
      end
      ecs_trg = ($urandom_range(0, 7) == 0);
      sync_cmd = sync_cmd_t'($urandom);
      trigger_veto = 1'($urandom);
      if (i % 7 == 0) ext_trg_in = ~ext_trg_in;
      // the edge used by the block in this cycle: synchroniser stages 2 and 3
      expect_w = ref_word(ext_d2 & ~ext_d3);
      have = 1;
    end
    checks++;
    if (n_ext == 0 || n_calib == 0 || n_trg == 0) begin
      failures++; $display("FAIL: coverage ext=%0d calib=%0d trg=%0d", n_ext, n_calib, n_trg);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
