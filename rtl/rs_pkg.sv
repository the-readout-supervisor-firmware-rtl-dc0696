// rs_pkg: types and constants shared by the readout supervisor core.
//
// The central type is the TFC word (Timing and Fast Control), the bundle of
// bunch-crossing information and fast commands that travels, one word per
// 40 MHz clock cycle, from the trigger manager through the TAE handler,
// the latency pipelines, the throttle and MEP handlers to the output links.
// The set of fields follows what the text names (BXID, crossing type,
// trigger, FE/BE reset, BXID reset, Header Only, Synch, calibration, NZS,
// TAE, trigger origin, MEP destination); their widths and bit order are
// this design's own choice, since no link format is specified.
package rs_pkg;

  localparam int BXID_W = 12;              // 3564 crossings fit in 12 bits
  localparam int DEST_W = 16;              // MEP destination identifier
  localparam int NUM_ORIG = 6;

  // Crossing type from the filling scheme (2 bits per bunch crossing).
  typedef enum logic [1:0] {
    BX_EMPTY_EMPTY = 2'd0,
    BX_BEAM1_EMPTY = 2'd1,   // beam-gas, beam 1 only
    BX_EMPTY_BEAM2 = 2'd2,   // beam-gas, beam 2 only
    BX_BEAM_BEAM   = 2'd3
  } bx_type_e;

  // Trigger origin bits (one-hot or several at once).
  localparam int ORIG_INTERNAL = 0;
  localparam int ORIG_EXTERNAL = 1;
  localparam int ORIG_CALIB    = 2;
  localparam int ORIG_ECS      = 3;
  localparam int ORIG_TAE      = 4;
  localparam int ORIG_RANDOM   = 5;

  // Synchronous commands produced by the start-of-run sequencer.
  typedef struct packed {
    logic fe_reset;
    logic be_reset;
    logic header_only;
    logic synch;
  } sync_cmd_t;

  // Commands that the control system may insert asynchronously.
  typedef struct packed {
    logic calib;
    logic nzs;
    logic snapshot;
    logic fe_reset;
    logic be_reset;
  } async_cmd_t;

  typedef struct packed {
    logic [BXID_W-1:0]   bxid;
    bx_type_e            bx_type;
    logic                trigger;      // event accepted
    logic                bxid_reset;
    logic                fe_reset;
    logic                be_reset;
    logic                header_only;
    logic                synch;
    logic                veto;         // start-of-run trigger veto
    logic                calib;
    logic                nzs;
    logic                snapshot;
    logic                tae;          // part of a TAE window
    logic                tae_central;  // the central trigger of a TAE window
    logic [NUM_ORIG-1:0] origin;
    logic                mep_accept;   // last event of a multi-event packet
    logic [DEST_W-1:0]   mep_dest;
  } tfc_word_t;

  localparam int TFC_W = $bits(tfc_word_t);

  // Configuration of one internal trigger generator.
  typedef struct packed {
    logic              en;
    logic              mode_bx;   // 1: at BXID 'bx' every 'period' orbits; 0: every 'period' cycles
    logic              calib;     // also send a calibration command
    logic              accept;    // raise the trigger bit (accept the event)
    logic              tae;       // this trigger is the centre of a TAE window
    logic              nzs;       // ask the FE for non-zero-suppressed data
    logic              random;    // 1: pseudo-random, fire with probability period/2^24 per cycle
    logic [BXID_W-1:0] bx;
    logic [23:0]       period;
  } itrg_cfg_t;

  // Event data bank sent to the farm for each accepted event.
  typedef struct packed {
    logic [BXID_W-1:0]   bxid;
    bx_type_e            bx_type;
    logic [NUM_ORIG-1:0] origin;
    logic [7:0]          trg_mask;     // commands sent with the event
    logic [15:0]         scan_step;
    logic [31:0]         orbit;        // orbits since start of run
    logic [63:0]         timestamp;    // clock cycles since start of run + initial value
    logic [DEST_W-1:0]   mep_dest;
    logic [31:0]         run_info;     // other run information from the control system
  } tfc_bank_t;

  // Configuration register indices (register bus word addresses 0x00..).
  localparam int REG_CTRL     = 0;   // [0] start of run, [1] FE reset request,
                                     // [2] external trigger enable,
                                     // [3] external start-of-run input enable,
                                     // [7:4] crossing-type trigger mask,
                                     // [8] TAE enable, [14:9] TAE half window
  localparam int REG_BXID     = 1;   // [11:0] BXID loaded on the orbit pulse
  localparam int REG_ITRG0_A  = 2;   // generator 0: [0] en [1] mode_bx [2] calib
                                     // [3] accept [4] tae [5] nzs [6] random [27:16] bx
  localparam int REG_ITRG0_B  = 3;   // generator 0: [23:0] period (random: threshold)
  localparam int REG_ITRG1_A  = 4;
  localparam int REG_ITRG1_B  = 5;
  localparam int REG_SYNC0    = 6;   // [15:0] Header Only length, [31:16] Synch length
  localparam int REG_SYNC1    = 7;   // [15:0] trailing Header Only length, [16] its enable
  localparam int REG_PIPE     = 8;   // [7:0] middle pipeline delay, [15:8] output delay
  localparam int REG_THR_EN   = 9;   // [0] boards [1] MEP [2] internal veto [3] FE-reset wait
  localparam int REG_RST_WAIT = 10;  // FE-reset wait in cycles
  localparam int REG_MEP      = 11;  // [7:0] events per packet, [8] enable
  localparam int REG_TS_LO    = 12;  // initial timestamp
  localparam int REG_TS_HI    = 13;
  localparam int REG_SCAN     = 14;  // [15:0] scan step
  localparam int REG_ASYNC    = 15;  // [4:0] async_cmd_t to send on the next issue

  // Command register bits (one-cycle pulses).
  localparam int CMD_LATCH    = 0;   // latch all monitoring counters
  localparam int CMD_CLEAR    = 1;   // clear all free-running counters
  localparam int CMD_TRIGGER  = 2;   // one trigger from the control system
  localparam int CMD_ASYNC    = 3;   // send the commands of REG_ASYNC once

  // Monitoring counter indices.
  localparam int CNT_ORBIT    = 0;
  localparam int CNT_ACCEPT   = 1;   // events sent to the farm bank
  localparam int CNT_INTERNAL = 2;
  localparam int CNT_EXTERNAL = 3;
  localparam int CNT_CALIB    = 4;   // calibration commands sent
  localparam int CNT_ECS_TRG  = 5;
  localparam int CNT_TAE      = 6;   // TAE windows opened
  localparam int CNT_THROTTLE = 7;   // triggers rejected by the throttle
  localparam int CNT_MEP      = 8;   // multi-event packets closed
  localparam int CNT_FE_RESET = 9;
  localparam int CNT_RUN      = 10;  // start-of-run sequences
  localparam int CNT_MEP_LOST = 11;
  localparam int CNT_CYCLES   = 12;
  localparam int CNT_HDR_ONLY = 13;
  localparam int CNT_SYNCH    = 14;
  localparam int CNT_ASYNC    = 15;
  localparam int NUM_CNT      = 16;

  // Error register bits.
  localparam int ERR_ORBIT    = 0;   // orbit pulse at an unexpected BXID
  localparam int ERR_MEP_OVF  = 1;   // farm request with the destination queue full
  localparam int ERR_MEP_LOST = 2;   // trigger with no MEP destination

endpackage
