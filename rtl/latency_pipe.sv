// latency_pipe: programmable fixed-latency delay line.
//
// The core has two of these: a middle pipeline after the TAE handler and
// an output pipeline in front of the links, so that commands reach the
// front ends with a constant, adjustable latency whatever the trigger and
// throttle logic upstream does. The text gives their purpose; depth and
// structure are this design's. The line is a circular buffer in a memory
// array (MAX_DEPTH words of W bits) so that it maps onto block RAM:
// every cycle din is written at the write pointer and the word written
// cfg_delay cycles earlier is read out through an output register.
//
// Timing: latency from din to dout is cfg_delay+1 cycles, cfg_delay in
// 0..MAX_DEPTH-1 (the field is only AW bits wide). After reset, or after
// cfg_delay changes, the first cfg_delay+1 outputs are stale memory
// contents; the memory is cleared at start-up.
module latency_pipe #(
  parameter int unsigned W         = 64,
  parameter int unsigned MAX_DEPTH = 256,
  localparam int unsigned AW       = $clog2(MAX_DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [AW-1:0] cfg_delay,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);

  logic [W-1:0]  mem [MAX_DEPTH];
  logic [AW-1:0] wp;
  logic [AW-1:0] rp;

  initial for (int i = 0; i < MAX_DEPTH; i++) mem[i] = '0;

  assign rp = wp - cfg_delay;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wp <= '0;
    else        wp <= wp + 1'b1;
  end

  always_ff @(posedge clk) begin
    mem[wp] <= din;
    if (cfg_delay == '0) dout <= din;
    else                 dout <= mem[rp];
  end

endmodule
