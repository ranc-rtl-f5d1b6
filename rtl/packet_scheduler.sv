// packet_scheduler: holds incoming spikes until the tick they are due.
//
// A spike memory of NUM_TICKS slots x NUM_AXONS bits. An arriving packet
// carries a destination axon (log2 N(a) bits) and a delivery offset
// (log2 N(t) bits); it sets bit 'axon' of slot (current + offset) mod N(t).
// The current slot is offered to the core controller as the N(a)-bit vector
// of axon spikes for this tick. A packet whose target slot equals the current
// slot (offset 0 mod N(t): it arrived too late) is dropped and raises
// 'sched_error' for one cycle; operation continues. The memory shape, the
// B(t)-bit counter, the clear/reset inputs and the '=' error comparison follow
// the paper's scheduler diagram; the diagram compares the offset with the
// counter directly, while the text makes the offset relative to the current
// tick, so here the offset is added to the counter first (as the text says)
// and the sum is compared. This design's other choices: the counter advances on the
// controller's 'advance' pulse (once per tick, controller state 1), 'clear'
// zeroes the current slot (controller state 7), and reset empties the memory.
// One packet can be written per cycle and the scheduler never stalls.
module packet_scheduler
  import ranc_pkg::*;
#(
  parameter int unsigned NUM_AXONS = DEF_NUM_AXONS,
  parameter int unsigned NUM_TICKS = DEF_NUM_TICKS,
  localparam int unsigned AXON_W   = (NUM_AXONS > 1) ? $clog2(NUM_AXONS) : 1,
  localparam int unsigned TICK_W   = (NUM_TICKS > 1) ? $clog2(NUM_TICKS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 pkt_valid,
  input  logic [AXON_W-1:0]    pkt_axon,
  input  logic [TICK_W-1:0]    pkt_tick_offset,
  input  logic                 advance,
  input  logic                 clear,
  output logic [NUM_AXONS-1:0] axon_spikes,
  output logic [TICK_W-1:0]    current_slot,
  output logic                 sched_error
);

  logic [NUM_AXONS-1:0] slots [NUM_TICKS];
  logic [TICK_W-1:0]    counter;
  logic [TICK_W-1:0]    target;
  logic [TICK_W:0]      target_sum;

  always_comb begin
    target_sum = {1'b0, counter} + {1'b0, pkt_tick_offset};
    if (target_sum >= (TICK_W + 1)'(NUM_TICKS)) target_sum -= (TICK_W + 1)'(NUM_TICKS);
    target = target_sum[TICK_W-1:0];
  end
  assign sched_error  = pkt_valid && (target == counter);
  assign axon_spikes  = slots[counter];
  assign current_slot = counter;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      counter <= '0;
      for (int t = 0; t < NUM_TICKS; t++) slots[t] <= '0;
    end else begin
      if (clear) slots[counter] <= '0;
      if (pkt_valid && !sched_error) slots[target][pkt_axon] <= 1'b1;
      if (advance) counter <= (counter == TICK_W'(NUM_TICKS - 1)) ? '0 : counter + 1'b1;
    end
  end

endmodule
