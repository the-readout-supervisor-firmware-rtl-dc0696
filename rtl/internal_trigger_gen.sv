// internal_trigger_gen: one programmable internal trigger source.
//
// The text asks for internal periodic generators whose rate and location
// can be configured, and lists "random" among the trigger origins; how they
// are built is this design's choice. Three modes:
//   mode_bx = 0: fire once every cfg.period clock cycles (period 0 or 1 =
//                every cycle), counting from when the generator is enabled.
//   mode_bx = 1: fire at BXID cfg.bx, once every cfg.period orbits
//                (period 0 or 1 = every orbit). Orbits are counted on
//                bxid_reset.
//   random = 1:  (takes precedence) fire in each cycle with probability
//                cfg.period / 2^24: a 32-bit maximal-length LFSR
//                (x^32 + x^22 + x^2 + x + 1, Galois form) steps every cycle
//                and the generator fires when its low 24 bits are below
//                cfg.period. SEED makes instances differ.
// The other fields of cfg (calib, accept, tae, nzs) are not used here; the
// trigger manager applies them to the request.
//
// Timing: fire is combinational from the current bxid and the internal
// counter, so it belongs to the same cycle as bxid.
module internal_trigger_gen
  import rs_pkg::*;
#(
  parameter logic [31:0] SEED = 32'hACE1_2468     // any non-zero value
) (
  input  logic              clk,
  input  logic              rst_n,
  input  itrg_cfg_t         cfg,
  input  logic [BXID_W-1:0] bxid,
  input  logic              bxid_reset,
  output logic              fire
);

  logic [23:0] cnt;
  logic [23:0] last;
  logic        at_end;
  logic [31:0] lfsr;

  // Cycle mode: fire when cnt reaches period-1 (cnt counts 0..period-1).
  // BX mode: fire once cnt, the orbits begun since the last firing, reaches
  // period.
  always_comb begin
    if (cfg.mode_bx) last = (cfg.period > 24'd1) ? cfg.period : 24'd1;
    else             last = (cfg.period > 24'd1) ? cfg.period - 24'd1 : 24'd0;
  end
  // In BX mode an orbit that begins in this very cycle already counts.
  assign at_end = (32'(cnt) + 32'(cfg.mode_bx && bxid_reset) >= 32'(last));

  always_comb begin
    if (!cfg.en)          fire = 1'b0;
    else if (cfg.random)  fire = (lfsr[23:0] < cfg.period);
    else if (cfg.mode_bx) fire = (bxid == cfg.bx) && at_end;
    else                  fire = at_end;
  end

  // In cycle mode cnt counts clock cycles; in BX mode it counts orbits and
  // is cleared after the orbit in which the generator fired.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lfsr <= SEED;
    else        lfsr <= {1'b0, lfsr[31:1]} ^ (lfsr[0] ? 32'h8020_0003 : 32'h0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
    end else if (!cfg.en) begin
      cnt <= '0;
    end else if (!cfg.mode_bx) begin
      cnt <= at_end ? '0 : cnt + 24'd1;
    end else if (fire) begin
      cnt <= '0;
    end else if (bxid_reset && cnt < last) begin
      cnt <= cnt + 24'd1;
    end
  end

endmodule
