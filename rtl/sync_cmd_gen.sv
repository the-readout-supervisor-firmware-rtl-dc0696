// sync_cmd_gen: start-of-run synchronisation sequencer.
//
// Brings every front-end link into step with its readout-board decoder:
//   1. The control system raises start_of_run (or fe_reset_req); the level
//      is rising-edge detected here.
//   2. RESET: one cycle with fe_reset (and be_reset, for start of run only).
//   3. HEADER: Header Only is sent to keep the front ends idle, for
//      cfg_ho_len cycles (at least one).
//   4. The sequence moves on to SYNCH only once a BXID reset has been seen
//      after the FE reset; if the programmed Header Only length ends first,
//      Header Only continues until that BXID reset.
//   5. SYNCH: Synch is sent for cfg_synch_len cycles (at least one), then,
//      if cfg_post_en, Header Only again for cfg_post_len cycles (POST).
//   6. The trigger veto, set from reset and from every new sequence, is
//      released when the sequence ends.
// Steps 1-6, the one-cycle resets and the programmable lengths follow the
// text. The text says both that Header Only has a programmable length and
// that it is released when the first BXID reset after the FE reset arrives;
// this design reconciles the two as in step 4. The veto being on after
// reset, and fe_reset_req starting the same sequence without a BE reset,
// are this design's choices. A new request restarts the sequence.
//
// Timing: cmd and trigger_veto are decoded from the registered state, so
// they change one cycle after the clock edge that sees the request edge
// (two cycles after the request level rises). run_start pulses together
// with the start-of-run RESET cycle.
module sync_cmd_gen
  import rs_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start_of_run,
  input  logic        fe_reset_req,
  input  logic        bxid_reset,
  input  logic [15:0] cfg_ho_len,
  input  logic [15:0] cfg_synch_len,
  input  logic        cfg_post_en,
  input  logic [15:0] cfg_post_len,
  output sync_cmd_t   cmd,
  output logic        trigger_veto,
  output logic        run_start,
  output logic        busy,
  output logic [2:0]  state_o
);

  typedef enum logic [2:0] {
    S_IDLE   = 3'd0,
    S_RESET  = 3'd1,
    S_HEADER = 3'd2,
    S_SYNCH  = 3'd3,
    S_POST   = 3'd4
  } state_e;

  state_e      state;
  logic        sor_q, fer_q;
  logic        sor_edge, fer_edge;
  logic        with_be;
  logic        seen_bxrst;
  logic [15:0] cnt;
  logic        veto;

  assign sor_edge = start_of_run & ~sor_q;
  assign fer_edge = fe_reset_req & ~fer_q;

  function automatic logic len_done(input logic [15:0] c, input logic [15:0] len);
    return (32'(c) + 32'd1 >= 32'(len));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sor_q      <= 1'b0;
      fer_q      <= 1'b0;
      state      <= S_IDLE;
      with_be    <= 1'b0;
      seen_bxrst <= 1'b0;
      cnt        <= '0;
      veto       <= 1'b1;
    end else begin
      sor_q <= start_of_run;
      fer_q <= fe_reset_req;
      if (sor_edge || fer_edge) begin
        state      <= S_RESET;
        with_be    <= sor_edge;
        seen_bxrst <= 1'b0;
        cnt        <= '0;
        veto       <= 1'b1;
      end else begin
        unique case (state)
          S_IDLE: ;
          S_RESET: begin
            state      <= S_HEADER;
            seen_bxrst <= bxid_reset;
            cnt        <= '0;
          end
          S_HEADER: begin
            if (bxid_reset) seen_bxrst <= 1'b1;
            if (len_done(cnt, cfg_ho_len) && (seen_bxrst || bxid_reset)) begin
              state <= S_SYNCH;
              cnt   <= '0;
            end else if (!len_done(cnt, cfg_ho_len)) begin
              cnt <= cnt + 16'd1;
            end
          end
          S_SYNCH: begin
            if (len_done(cnt, cfg_synch_len)) begin
              cnt <= '0;
              if (cfg_post_en) state <= S_POST;
              else begin
                state <= S_IDLE;
                veto  <= 1'b0;
              end
            end else cnt <= cnt + 16'd1;
          end
          S_POST: begin
            if (len_done(cnt, cfg_post_len)) begin
              state <= S_IDLE;
              veto  <= 1'b0;
              cnt   <= '0;
            end else cnt <= cnt + 16'd1;
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  always_comb begin
    cmd             = '0;
    cmd.fe_reset    = (state == S_RESET);
    cmd.be_reset    = (state == S_RESET) && with_be;
    cmd.header_only = (state == S_HEADER) || (state == S_POST);
    cmd.synch       = (state == S_SYNCH);
  end

  assign run_start    = (state == S_RESET) && with_be;
  assign trigger_veto = veto;
  assign busy         = (state != S_IDLE);
  assign state_o      = state;

endmodule
