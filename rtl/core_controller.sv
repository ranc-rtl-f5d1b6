// core_controller: the per-core sequencer that emulates the N(a) x N(n)
// crossbar with one neuron datapath.
//
// On each global tick it visits every neuron j = 0 .. N(n)-1 and, for each,
// every axon i = 0 .. N(a)-1. Axon i contributes to neuron j when the
// scheduler holds a spike for it this tick AND the crossbar bit (i, j) in
// neuron j's CSRAM word is set; the controller then raises process_spike so
// the neuron block adds the weight selected by the axon type tau_i.
//
// States (numbered as in the paper's controller diagram):
//   0 wait for tick              1 advance the scheduler slot, neuron index 0
//   2 wait for the CSRAM word    3 first axon: load v_j(t-1) (+ weight)
//   4 axons 1 .. N(a)-1          5 write v_j(t) back; spike_valid if spiking
//   6 spike_valid off; next neuron (back to 2) or, after the last, to 7
//   7 clear the scheduler slot just consumed, back to 0
// A tick that arrives while the controller is not in state 0 sets the sticky
// 'tick_error' flag (the tick period is too short; outputs may be wrong) and
// is otherwise ignored. Cost of one tick: states 1 and 7 once plus N(a)+3
// cycles per neuron, i.e. busy for N(n)*(N(a)+3)+2 cycles after the tick
// (66,306 for 256 x 256; the paper quotes 66,308 for its own implementation).
// The paper fixes that an axon's type is a hardcoded index; here it is the
// axon number modulo N(w), which is this design's choice.
module core_controller
  import ranc_pkg::*;
#(
  parameter int unsigned NUM_AXONS   = DEF_NUM_AXONS,
  parameter int unsigned NUM_NEURONS = DEF_NUM_NEURONS,
  parameter int unsigned NUM_WEIGHTS = DEF_NUM_WEIGHTS,
  localparam int unsigned AXON_W     = (NUM_AXONS > 1) ? $clog2(NUM_AXONS) : 1,
  localparam int unsigned NEURON_W   = (NUM_NEURONS > 1) ? $clog2(NUM_NEURONS) : 1,
  localparam int unsigned TYPE_W     = (NUM_WEIGHTS > 1) ? $clog2(NUM_WEIGHTS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 tick,
  // data for the current neuron and tick
  input  logic [NUM_AXONS-1:0] synapses,      // crossbar column of neuron j (CSRAM)
  input  logic [NUM_AXONS-1:0] axon_spikes,   // spikes due this tick (scheduler)
  input  logic                 nb_spike,      // s_i(t) from the neuron block
  // core SRAM
  output logic                 csram_re,
  output logic                 csram_we,
  output logic [NEURON_W-1:0]  neuron_idx,
  // neuron block
  output logic                 nb_en,
  output logic                 new_neuron,
  output logic                 process_spike,
  output logic [TYPE_W-1:0]    axon_type,
  // router and scheduler
  output logic                 spike_valid,
  output logic                 sched_advance,
  output logic                 sched_clear,
  // status
  output ctrl_state_t          state,
  output logic                 busy,
  output logic                 tick_error
);

  ctrl_state_t         state_q, state_d;
  logic [AXON_W-1:0]   axon_idx;
  logic                last_neuron;
  logic                last_axon;

  assign state       = state_q;
  assign last_neuron = (neuron_idx == NEURON_W'(NUM_NEURONS - 1));
  assign last_axon   = (axon_idx == AXON_W'(NUM_AXONS - 1));
  assign busy        = (state_q != S0_WAIT_TICK);

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      S0_WAIT_TICK:  if (tick) state_d = S1_SET_ADDR;
      S1_SET_ADDR:   state_d = S2_WAIT_SRAM;
      S2_WAIT_SRAM:  state_d = S3_FIRST_AXON;
      S3_FIRST_AXON: state_d = (NUM_AXONS == 1) ? S5_WRITEBACK : S4_AXONS;
      S4_AXONS:      if (last_axon) state_d = S5_WRITEBACK;
      S5_WRITEBACK:  state_d = S6_SPIKE_OFF;
      S6_SPIKE_OFF:  state_d = last_neuron ? S7_CLEAR_SLOT : S2_WAIT_SRAM;
      S7_CLEAR_SLOT: state_d = S0_WAIT_TICK;
      default:       state_d = S0_WAIT_TICK;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q    <= S0_WAIT_TICK;
      neuron_idx <= '0;
      axon_idx   <= '0;
      tick_error <= 1'b0;
    end else begin
      state_q <= state_d;
      if (tick && state_q != S0_WAIT_TICK) tick_error <= 1'b1;
      unique case (state_q)
        S1_SET_ADDR:   neuron_idx <= '0;
        S2_WAIT_SRAM:  axon_idx   <= '0;
        S3_FIRST_AXON: axon_idx   <= AXON_W'(1);
        S4_AXONS:      axon_idx   <= axon_idx + 1'b1;
        S6_SPIKE_OFF:  if (!last_neuron) neuron_idx <= neuron_idx + 1'b1;
        default: ;
      endcase
    end
  end

  // Datapath and handshake controls, decoded from the state.
  always_comb begin
    csram_re      = (state_q == S2_WAIT_SRAM);
    csram_we      = (state_q == S5_WRITEBACK);
    nb_en         = (state_q == S3_FIRST_AXON) || (state_q == S4_AXONS);
    new_neuron    = (state_q == S3_FIRST_AXON);
    process_spike = nb_en && synapses[axon_idx] && axon_spikes[axon_idx];
    axon_type     = TYPE_W'(axon_idx % AXON_W'(NUM_WEIGHTS));
    spike_valid   = (state_q == S5_WRITEBACK) && nb_spike;
    sched_advance = (state_q == S1_SET_ADDR);
    sched_clear   = (state_q == S7_CLEAR_SLOT);
  end

endmodule
