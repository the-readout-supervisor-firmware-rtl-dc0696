// bxid_counter: bunch-crossing counter locked to the LHC orbit pulse.
//
// The orbit pulse, an asynchronous electrical input, is passed through a
// two-flop synchroniser and rising-edge detected. On the edge the counter is
// loaded with cfg_orbit_offset and a one-cycle bxid_reset command is issued;
// otherwise it counts up, wrapping from BX_PER_ORBIT-1 to 0. Using the orbit
// pulse to reset the counter and derive the Bunch ID Reset command is what
// the text describes; the offset load, the free-running wrap and the orbit
// error flag (edge seen anywhere but at the expected wrap point) are this
// design's choices.
//
// Timing: bxid_reset is high in the cycle where bxid equals cfg_orbit_offset,
// three cycles after the orbit pulse rises at the input. bxid_next is the
// value bxid will take on the next clock edge, used to address a synchronous
// RAM so that its output lines up with bxid.
module bxid_counter
  import rs_pkg::*;
#(
  parameter int unsigned BX_PER_ORBIT = 3564
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              orbit_in,
  input  logic [BXID_W-1:0] cfg_orbit_offset,
  output logic [BXID_W-1:0] bxid,
  output logic [BXID_W-1:0] bxid_next,
  output logic              bxid_reset,
  output logic              orbit_err
);

  logic [2:0] orbit_sync;
  logic       orbit_edge;
  logic       locked;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) orbit_sync <= '0;
    else        orbit_sync <= {orbit_sync[1:0], orbit_in};
  end

  assign orbit_edge = orbit_sync[1] & ~orbit_sync[2];

  always_comb begin
    if (orbit_edge)                         bxid_next = cfg_orbit_offset;
    else if (bxid == BXID_W'(BX_PER_ORBIT - 1)) bxid_next = '0;
    else                                    bxid_next = bxid + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bxid       <= '0;
      bxid_reset <= 1'b0;
      orbit_err  <= 1'b0;
      locked     <= 1'b0;
    end else begin
      bxid       <= bxid_next;
      bxid_reset <= orbit_edge;
      // Once locked, the next orbit edge must land exactly where the
      // counter would have reached the offset by itself.
      orbit_err  <= orbit_edge && locked &&
                    (bxid != (cfg_orbit_offset == '0 ? BXID_W'(BX_PER_ORBIT - 1)
                                                     : cfg_orbit_offset - 1'b1));
      if (orbit_edge) locked <= 1'b1;
    end
  end

endmodule
