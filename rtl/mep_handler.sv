// mep_handler: groups accepted events into multi-event packets (MEPs) and
// gives each packet a destination in the event-filter farm.
//
// The block diagram shows a Multi-Event Packet handler fed by the farm,
// passing information to the TFC bank and throttling the trigger; the text
// says no more. This design does the simplest thing that fits: farm nodes
// announce that they can take a packet by sending their destination
// identifier (farm_req_valid/farm_req_dest), which is queued in a FIFO of
// FIFO_DEPTH entries. The head destination becomes the current one; the
// next cfg_packing accepted events are tagged with it (mep_dest) and the
// last one also carries mep_accept, after which the next queued destination
// is taken. When no destination remains for the next event the handler
// raises mep_throttle. The throttle looks one event ahead (it is raised
// while only one slot is left and the queue is empty) to cover the one
// register stage of the throttle handler in front of it. A trigger that
// still arrives with no destination is dropped and counted on 'lost'.
//
// With cfg_en low the words pass unchanged and nothing throttles.
// Timing: one register stage from word_in to word_out.
module mep_handler
  import rs_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16,
  localparam int unsigned FAW       = $clog2(FIFO_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_en,
  input  logic [7:0]        cfg_packing,
  input  tfc_word_t         word_in,
  input  logic              farm_req_valid,
  input  logic [DEST_W-1:0] farm_req_dest,
  output tfc_word_t         word_out,
  output logic              mep_throttle,
  output logic              lost,
  output logic              overflow,
  output logic [FAW:0]      fifo_count
);

  logic [DEST_W-1:0] fifo [FIFO_DEPTH];
  logic [FAW-1:0]    rd_ptr, wr_ptr;
  logic [FAW:0]      count;
  logic              empty, full;
  logic [DEST_W-1:0] cur_dest;
  logic              cur_valid;
  logic [7:0]        cur_cnt;
  logic [7:0]        pack;
  logic              take, last_evt, pop, push;
  tfc_word_t         w;

  assign pack     = (cfg_packing == 0) ? 8'd1 : cfg_packing;
  assign empty    = (count == 0);
  assign full     = (32'(count) == FIFO_DEPTH);
  assign take     = cfg_en && word_in.trigger && cur_valid;
  assign last_evt = (cur_cnt + 8'd1 >= pack);
  assign pop      = cfg_en && !empty && (!cur_valid || (take && last_evt));
  assign push     = farm_req_valid && !full;

  assign mep_throttle = cfg_en && (!cur_valid || (empty && last_evt));
  assign fifo_count   = count;

  always_comb begin
    w = word_in;
    if (cfg_en && word_in.trigger) begin
      if (cur_valid) begin
        w.mep_dest   = cur_dest;
        w.mep_accept = last_evt;
      end else begin
        w.trigger     = 1'b0;
        w.tae         = 1'b0;
        w.tae_central = 1'b0;
        w.origin      = '0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (push) fifo[wr_ptr] <= farm_req_dest;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr    <= '0;
      wr_ptr    <= '0;
      count     <= '0;
      cur_dest  <= '0;
      cur_valid <= 1'b0;
      cur_cnt   <= '0;
      word_out  <= '0;
      lost      <= 1'b0;
      overflow  <= 1'b0;
    end else begin
      word_out <= w;
      lost     <= cfg_en && word_in.trigger && !cur_valid;
      overflow <= farm_req_valid && full;
      if (push) wr_ptr <= wr_ptr + 1'b1;
      if (pop)  rd_ptr <= rd_ptr + 1'b1;
      count <= count + FAW'(push) - FAW'(pop);
      if (take) cur_cnt <= last_evt ? 8'd0 : cur_cnt + 8'd1;
      if (pop) begin
        cur_dest  <= fifo[rd_ptr];
        cur_valid <= 1'b1;
      end else if (take && last_evt) begin
        cur_valid <= 1'b0;
      end
      if (!cfg_en) begin
        cur_valid <= 1'b0;
        cur_cnt   <= '0;
      end
    end
  end

endmodule
