// trigger_manager: builds the TFC word of each bunch crossing.
//
// Collects every trigger source the text lists - the internal periodic
// generators, the external electrical trigger input and single triggers
// requested by the control system - together with the current BXID, its
// crossing type from the filling scheme and the synchronous commands of the
// start-of-run sequencer and its trigger veto, and registers them into one rs_pkg::tfc_word_t.
//
// Per internal generator, its configuration decides whether a firing sends
// a calibration command, whether the event is accepted (trigger bit), whether
// it asks for non-zero-suppressed data and whether it is the centre of a TAE
// window; the text describes these choices, their encoding is this design's.
// Triggers are accepted only on crossing types enabled in cfg_bxtype_mask
// (bit n enables type n): a choice standing for the "masking of triggers"
// that the control system programs. The external input is passed through a
// two-flop synchroniser and rising-edge detected. origin records which
// sources produced an accepted trigger.
//
// Timing: one register stage; the word for bxid appears one cycle later.
module trigger_manager
  import rs_pkg::*;
#(
  parameter int unsigned NUM_ITRG = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [BXID_W-1:0] bxid,
  input  bx_type_e          bx_type,
  input  logic              bxid_reset,
  input  logic [NUM_ITRG-1:0] itrg_fire,
  input  itrg_cfg_t         itrg_cfg [NUM_ITRG],
  input  logic              ext_trg_in,
  input  logic              cfg_ext_en,
  input  logic              ecs_trg,
  input  logic [3:0]        cfg_bxtype_mask,
  input  sync_cmd_t         sync_cmd,
  input  logic              trigger_veto,
  output tfc_word_t         word
);

  logic [2:0] ext_sync;
  logic       ext_edge;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ext_sync <= '0;
    else        ext_sync <= {ext_sync[1:0], ext_trg_in};
  end
  assign ext_edge = ext_sync[1] & ~ext_sync[2] & cfg_ext_en;

  tfc_word_t w;

  always_comb begin
    logic bx_ok;
    w             = '0;
    w.bxid        = bxid;
    w.bx_type     = bx_type;
    w.bxid_reset  = bxid_reset;
    w.fe_reset    = sync_cmd.fe_reset;
    w.be_reset    = sync_cmd.be_reset;
    w.header_only = sync_cmd.header_only;
    w.synch       = sync_cmd.synch;
    w.veto        = trigger_veto;
    bx_ok         = cfg_bxtype_mask[bx_type];

    for (int i = 0; i < NUM_ITRG; i++) begin
      if (itrg_fire[i]) begin
        if (itrg_cfg[i].calib) w.calib = 1'b1;
        if (itrg_cfg[i].accept && bx_ok) begin
          w.trigger = 1'b1;
          if (itrg_cfg[i].nzs) w.nzs = 1'b1;
          if (itrg_cfg[i].tae) w.tae_central = 1'b1;
          if (itrg_cfg[i].calib)       w.origin[ORIG_CALIB]    = 1'b1;
          else if (itrg_cfg[i].random) w.origin[ORIG_RANDOM]   = 1'b1;
          else                         w.origin[ORIG_INTERNAL] = 1'b1;
        end
      end
    end
    if (ext_edge && bx_ok) begin
      w.trigger                = 1'b1;
      w.origin[ORIG_EXTERNAL]  = 1'b1;
    end
    if (ecs_trg && bx_ok) begin
      w.trigger           = 1'b1;
      w.origin[ORIG_ECS]  = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) word <= '0;
    else        word <= w;
  end

endmodule
