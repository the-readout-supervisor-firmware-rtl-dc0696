// readout_supervisor: the readout supervisor firmware core, top level.
//
// One TFC (timing and fast control) word per LHC bunch crossing flows along
// a fixed-latency chain, as in the block diagram of the design:
//
//   bxid_counter + filling_scheme_ram + internal triggers + sync commands
//     -> trigger_manager -> tae_handler -> latency_pipe (middle)
//     -> throttle_handler -> mep_handler -> latency_pipe (output)
//     -> async_cmd_gen -> tfc_out (to the links towards FE and readout boards)
//   mep_handler output -> tfc_bank -> bank/bank_valid (to the farm)
//
// The control system reaches every setting, command, status word, error
// bit and counter through the register bus of ecs_regs (address map there
// and in rs_pkg). The chain, the blocks and their connections follow the
// block diagram; register layout, widths and the TFC word format are this
// design's. The clock is the LHC bunch clock after the board PLL; the
// optical transceivers and the PCIe/host side are outside this core, so the
// TFC word, the bank, the throttle lines, the farm requests and the
// register bus are plain ports. The start-of-run sequence can also be
// started from an external electrical input (ext_cmd_in), and an FE Reset
// sent asynchronously by the control system also starts the throttle's
// FE-reset wait. The sticky error register is only read over the bus, so
// err_reg has no other load here; a few configuration and word bits are
// likewise not read by every block that receives the whole bundle.
//
// Latency from a bunch crossing's BXID to its word on tfc_out:
//   1 (trigger manager) + MAX_HALF+1 (TAE) + mid_delay+1 + 1 (throttle)
//   + 1 (MEP) + out_delay+1 + 1 (async insert), constant for given settings.
module readout_supervisor
  import rs_pkg::*;
#(
  parameter int unsigned BX_PER_ORBIT = 3564,
  parameter int unsigned NUM_ITRG     = 2,
  parameter int unsigned TAE_MAX_HALF = 32,
  parameter int unsigned PIPE_DEPTH   = 256,
  parameter int unsigned N_RB         = 500,
  parameter int unsigned MEP_FIFO     = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // LHC timing and external electrical inputs
  input  logic              orbit_in,
  input  logic              ext_trg_in,
  input  logic              ext_cmd_in,    // external start-of-run command
  // throttle lines from the readout boards
  input  logic [N_RB-1:0]   rb_throttle,
  // destination requests from the event-filter farm
  input  logic              farm_req_valid,
  input  logic [DEST_W-1:0] farm_req_dest,
  // other run information for the event bank
  input  logic [31:0]       run_info,
  // control-system register bus
  input  logic [11:0]       ecs_addr,
  input  logic              ecs_wr,
  input  logic [31:0]       ecs_wdata,
  input  logic              ecs_rd,
  output logic [31:0]       ecs_rdata,
  output logic              ecs_rvalid,
  // outputs
  output tfc_word_t         tfc_out,
  output tfc_bank_t         bank,
  output logic              bank_valid
);

  localparam int unsigned PAW = $clog2(PIPE_DEPTH);

  // ---------------- control-system registers ----------------
  logic [31:0] cfg      [32];
  logic [31:0] cmd_pulse;
  logic [31:0] status   [4];
  logic [31:0] err_in;
  logic [31:0] err_reg;
  logic [31:0] cnt_free    [NUM_CNT];
  logic [31:0] cnt_latched [NUM_CNT];
  logic        fs_we;
  logic [7:0]  fs_addr;
  logic [31:0] fs_wdata;

  ecs_regs #(.N_CFG(32), .N_STAT(4), .N_CNT(NUM_CNT)) u_regs (
    .clk, .rst_n,
    .addr(ecs_addr), .wr(ecs_wr), .wdata(ecs_wdata), .rd(ecs_rd),
    .rdata(ecs_rdata), .rvalid(ecs_rvalid),
    .cfg, .cmd_pulse, .status, .err_in, .err_reg,
    .cnt_latched, .cnt_free,
    .fs_we, .fs_addr, .fs_wdata
  );

  // ---------------- bunch counting and filling scheme ----------------
  logic [BXID_W-1:0] bxid, bxid_next;
  logic              bxid_reset, orbit_err;
  bx_type_e          bx_type;

  bxid_counter #(.BX_PER_ORBIT(BX_PER_ORBIT)) u_bxid (
    .clk, .rst_n, .orbit_in,
    .cfg_orbit_offset(cfg[REG_BXID][BXID_W-1:0]),
    .bxid, .bxid_next, .bxid_reset, .orbit_err
  );

  filling_scheme_ram u_fs (
    .clk, .wr_en(fs_we), .wr_addr(fs_addr), .wr_data(fs_wdata),
    .rd_bxid(bxid_next), .rd_type(bx_type)
  );

  // ---------------- internal triggers ----------------
  itrg_cfg_t           itrg_cfg [NUM_ITRG];
  logic [NUM_ITRG-1:0] itrg_fire;

  for (genvar g = 0; g < NUM_ITRG; g++) begin : g_itrg
    localparam int RA = (g == 0) ? REG_ITRG0_A : REG_ITRG1_A;
    localparam int RB = (g == 0) ? REG_ITRG0_B : REG_ITRG1_B;
    always_comb begin
      itrg_cfg[g].en      = cfg[RA][0];
      itrg_cfg[g].mode_bx = cfg[RA][1];
      itrg_cfg[g].calib   = cfg[RA][2];
      itrg_cfg[g].accept  = cfg[RA][3];
      itrg_cfg[g].tae     = cfg[RA][4];
      itrg_cfg[g].nzs     = cfg[RA][5];
      itrg_cfg[g].random  = cfg[RA][6];
      itrg_cfg[g].bx      = cfg[RA][16 +: BXID_W];
      itrg_cfg[g].period  = cfg[RB][23:0];
    end
    internal_trigger_gen #(.SEED(32'hACE1_2468 + 32'(g) * 32'h1357_9BDF)) u_itrg (
      .clk, .rst_n, .cfg(itrg_cfg[g]), .bxid, .bxid_reset, .fire(itrg_fire[g])
    );
  end

  // ---------------- synchronous commands ----------------
  // The start-of-run sequence is started by the control system (REG_CTRL
  // bit 0) or, when REG_CTRL bit 3 enables it, by a level on the external
  // electrical input ext_cmd_in, taken through a two-flop synchroniser.
  sync_cmd_t  sync_cmd;
  logic       trigger_veto, run_start, sync_busy;
  logic [2:0] sync_state;
  logic       ext_cmd_s1, ext_cmd_s2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ext_cmd_s1 <= 1'b0;
      ext_cmd_s2 <= 1'b0;
    end else begin
      ext_cmd_s1 <= ext_cmd_in;
      ext_cmd_s2 <= ext_cmd_s1;
    end
  end

  sync_cmd_gen u_sync (
    .clk, .rst_n,
    .start_of_run(cfg[REG_CTRL][0] || (cfg[REG_CTRL][3] && ext_cmd_s2)),
    .fe_reset_req(cfg[REG_CTRL][1]),
    .bxid_reset,
    .cfg_ho_len(cfg[REG_SYNC0][15:0]),
    .cfg_synch_len(cfg[REG_SYNC0][31:16]),
    .cfg_post_en(cfg[REG_SYNC1][16]),
    .cfg_post_len(cfg[REG_SYNC1][15:0]),
    .cmd(sync_cmd), .trigger_veto, .run_start, .busy(sync_busy),
    .state_o(sync_state)
  );

  // ---------------- word chain ----------------
  tfc_word_t w_tm, w_tae, w_mid, w_thr, w_mep, w_out, w_async;
  logic      tae_start, throttled, mep_throttle, mep_lost, mep_ovf, async_sent;
  logic [3:0] thr_active;
  logic [$clog2(MEP_FIFO):0] mep_count;

  trigger_manager #(.NUM_ITRG(NUM_ITRG)) u_tm (
    .clk, .rst_n, .bxid, .bx_type, .bxid_reset,
    .itrg_fire, .itrg_cfg, .ext_trg_in,
    .cfg_ext_en(cfg[REG_CTRL][2]),
    .ecs_trg(cmd_pulse[CMD_TRIGGER]),
    .cfg_bxtype_mask(cfg[REG_CTRL][7:4]),
    .sync_cmd, .trigger_veto, .word(w_tm)
  );

  tae_handler #(.MAX_HALF(TAE_MAX_HALF)) u_tae (
    .clk, .rst_n,
    .cfg_en(cfg[REG_CTRL][8]), .cfg_half(cfg[REG_CTRL][14:9]),
    .word_in(w_tm), .word_out(w_tae), .window_start(tae_start)
  );

  latency_pipe #(.W(TFC_W), .MAX_DEPTH(PIPE_DEPTH)) u_mid (
    .clk, .rst_n, .cfg_delay(cfg[REG_PIPE][PAW-1:0]),
    .din(w_tae), .dout(w_mid)
  );

  throttle_handler #(.N_RB(N_RB)) u_thr (
    .clk, .rst_n, .word_in(w_mid), .rb_throttle, .mep_throttle,
    .reset_in(cmd_pulse[CMD_ASYNC] && cfg[REG_ASYNC][1]),   // async FE Reset
    .cfg_en(cfg[REG_THR_EN][3:0]), .cfg_reset_wait(cfg[REG_RST_WAIT]),
    .word_out(w_thr), .throttled, .active(thr_active)
  );

  mep_handler #(.FIFO_DEPTH(MEP_FIFO)) u_mep (
    .clk, .rst_n, .cfg_en(cfg[REG_MEP][8]), .cfg_packing(cfg[REG_MEP][7:0]),
    .word_in(w_thr), .farm_req_valid, .farm_req_dest,
    .word_out(w_mep), .mep_throttle, .lost(mep_lost), .overflow(mep_ovf),
    .fifo_count(mep_count)
  );

  latency_pipe #(.W(TFC_W), .MAX_DEPTH(PIPE_DEPTH)) u_out (
    .clk, .rst_n, .cfg_delay(cfg[REG_PIPE][8 +: PAW]),
    .din(w_mep), .dout(w_out)
  );

  async_cmd_gen u_async (
    .clk, .rst_n, .cfg_cmd(async_cmd_t'(cfg[REG_ASYNC][4:0])),
    .issue(cmd_pulse[CMD_ASYNC]),
    .word_in(w_out), .word_out(w_async), .sent(async_sent)
  );

  assign tfc_out = w_async;

  // ---------------- event bank ----------------
  logic [31:0] run_orbits;

  tfc_bank u_bank (
    .clk, .rst_n, .word_in(w_mep),
    .cfg_init_ts({cfg[REG_TS_HI], cfg[REG_TS_LO]}),
    .cfg_scan_step(cfg[REG_SCAN][15:0]),
    .run_info, .bank, .bank_valid, .orbit_count(run_orbits)
  );

  // ---------------- monitoring ----------------
  logic [NUM_CNT-1:0] events;

  always_comb begin
    events               = '0;
    events[CNT_ORBIT]    = bxid_reset;
    events[CNT_ACCEPT]   = bank_valid;
    events[CNT_INTERNAL] = w_tm.origin[ORIG_INTERNAL] || w_tm.origin[ORIG_RANDOM];
    events[CNT_EXTERNAL] = w_tm.origin[ORIG_EXTERNAL];
    events[CNT_CALIB]    = w_async.calib;
    events[CNT_ECS_TRG]  = w_tm.origin[ORIG_ECS];
    events[CNT_TAE]      = tae_start;
    events[CNT_THROTTLE] = throttled;
    events[CNT_MEP]      = w_mep.trigger && w_mep.mep_accept;
    events[CNT_FE_RESET] = w_async.fe_reset;
    events[CNT_RUN]      = run_start;
    events[CNT_MEP_LOST] = mep_lost;
    events[CNT_CYCLES]   = 1'b1;
    events[CNT_HDR_ONLY] = w_async.header_only;
    events[CNT_SYNCH]    = w_async.synch;
    events[CNT_ASYNC]    = async_sent;
  end

  monitor_counters #(.N_CNT(NUM_CNT), .CNT_W(32)) u_mon (
    .clk, .rst_n, .event_in(events),
    .latch(cmd_pulse[CMD_LATCH]), .clear(cmd_pulse[CMD_CLEAR]),
    .free_cnt(cnt_free), .latched_cnt(cnt_latched)
  );

  // ---------------- status and errors ----------------
  always_comb begin
    status[0] = 32'(bxid);
    status[1] = {16'(mep_count), 4'(thr_active), 4'd0,
                 1'b0, sync_state, 1'b0, 1'b0, trigger_veto, sync_busy};
    status[2] = run_orbits;
    status[3] = 32'h5253_0001;     // identification and version
    err_in               = '0;
    err_in[ERR_ORBIT]    = orbit_err;
    err_in[ERR_MEP_OVF]  = mep_ovf;
    err_in[ERR_MEP_LOST] = mep_lost;
  end

endmodule
