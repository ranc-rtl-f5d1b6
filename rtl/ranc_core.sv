// ranc_core: one RANC core - neuron block, core controller, core SRAM,
// packet scheduler and packet router wired as in the paper's core diagram.
//
// Per tick the controller reads each neuron's CSRAM word once, feeds the
// neuron block one axon per cycle (spikes from the scheduler's current slot,
// crossbar bits and weights from the word), writes the new potential back
// into the same word and, when the neuron fires, hands the router a packet
// built from the word's destination fields. Packets that reach this core are
// written into the scheduler for the tick they name.
//
// CSRAM word layout, most significant field first (this design's choice; the
// paper lists the fields but not their order):
//   synapses   [N(a)]        bit i = axon i connects to this neuron
//   potential  [B(v)] signed v_j(t-1), rewritten every tick
//   pos_reset  [B(v)] signed r+      neg_reset [B(v)] signed r-
//   weights    [N(w)*B(w)]   weight k in bits [k*B(w) +: B(w)] of the field
//   leak       [B(l)] signed
//   pos_thresh [B(v)] signed v+      neg_thresh [B(v)] signed v-
//   reset_mode [1]           0 absolute, 1 linear
//   dx [DX_W], dy [DY_W]     signed destination core offset
//   axon [log2 N(a)]         destination axon
//   tick [log2 N(t)]         delivery offset in ticks (1 .. N(t)-1)
// WORD_W = N(a) + 5*B(v) + N(w)*B(w) + B(l) + 1 + packet = 377 bits by default.
//
// The configuration port (cfg_*) writes whole CSRAM words; use it while the
// core is idle (busy = 0). Mesh links follow packet_router. The status flags
// are: tick_error (sticky, a tick came before the core finished), sched_error
// (a packet arrived for the slot being processed; one-cycle pulse) and
// local_overflow (a spike was lost at the router; one-cycle pulse).
module ranc_core
  import ranc_pkg::*;
#(
  parameter int unsigned NUM_AXONS   = DEF_NUM_AXONS,
  parameter int unsigned NUM_NEURONS = DEF_NUM_NEURONS,
  parameter int unsigned NUM_WEIGHTS = DEF_NUM_WEIGHTS,
  parameter int unsigned NUM_TICKS   = DEF_NUM_TICKS,
  parameter int unsigned WEIGHT_W    = DEF_WEIGHT_W,
  parameter int unsigned POT_W       = DEF_POT_W,
  parameter int unsigned LEAK_W      = DEF_LEAK_W,
  parameter int unsigned DX_W        = DEF_DX_W,
  parameter int unsigned DY_W        = DEF_DY_W,
  parameter int unsigned FIFO_DEPTH  = 4,
  parameter string       INIT_FILE   = "",
  localparam int unsigned AXON_W     = (NUM_AXONS > 1) ? $clog2(NUM_AXONS) : 1,
  localparam int unsigned NEURON_W   = (NUM_NEURONS > 1) ? $clog2(NUM_NEURONS) : 1,
  localparam int unsigned TICK_W     = (NUM_TICKS > 1) ? $clog2(NUM_TICKS) : 1,
  localparam int unsigned PAYLOAD_W  = AXON_W + TICK_W,
  localparam int unsigned PKT_W      = DX_W + DY_W + PAYLOAD_W,
  localparam int unsigned WORD_W     = NUM_AXONS + 5 * POT_W + NUM_WEIGHTS * WEIGHT_W
                                       + LEAK_W + 1 + PKT_W
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                tick,
  // CSRAM configuration
  input  logic                                cfg_we,
  input  logic [NEURON_W-1:0]                 cfg_addr,
  input  logic [WORD_W-1:0]                   cfg_data,
  // mesh links (index by dir_t: E, W, N, S)
  input  logic [NUM_MESH_DIRS-1:0]            in_valid,
  input  logic [NUM_MESH_DIRS-1:0][PKT_W-1:0] in_pkt,
  output logic [NUM_MESH_DIRS-1:0]            in_ren,
  output logic [NUM_MESH_DIRS-1:0]            out_valid,
  output logic [NUM_MESH_DIRS-1:0][PKT_W-1:0] out_pkt,
  input  logic [NUM_MESH_DIRS-1:0]            out_ren,
  // status
  output logic                                busy,
  output logic                                tick_error,
  output logic                                sched_error,
  output logic                                local_overflow
);

  // ---- CSRAM word fields --------------------------------------------------
  logic [WORD_W-1:0]                   word;
  logic [NUM_AXONS-1:0]                f_synapses;
  logic signed [POT_W-1:0]             f_potential, f_pos_reset, f_neg_reset;
  logic [NUM_WEIGHTS-1:0][WEIGHT_W-1:0] f_weights;
  logic signed [LEAK_W-1:0]            f_leak;
  logic signed [POT_W-1:0]             f_pos_thresh, f_neg_thresh;
  logic                                f_reset_mode;
  logic [PKT_W-1:0]                    f_dest;

  assign {f_synapses, f_potential, f_pos_reset, f_neg_reset, f_weights, f_leak,
          f_pos_thresh, f_neg_thresh, f_reset_mode, f_dest} = word;

  // ---- controller ---------------------------------------------------------
  logic                   csram_re, csram_we;
  logic [NEURON_W-1:0]    neuron_idx;
  logic                   nb_en, new_neuron, process_spike, nb_spike;
  logic [((NUM_WEIGHTS > 1) ? $clog2(NUM_WEIGHTS) : 1)-1:0] axon_type;
  logic                   spike_valid, sched_advance, sched_clear;
  logic [NUM_AXONS-1:0]   axon_spikes;
  ctrl_state_t            ctrl_state;
  logic signed [POT_W-1:0] new_potential;

  core_controller #(
    .NUM_AXONS(NUM_AXONS), .NUM_NEURONS(NUM_NEURONS), .NUM_WEIGHTS(NUM_WEIGHTS)
  ) u_ctrl (
    .clk, .rst_n, .tick,
    .synapses(f_synapses), .axon_spikes, .nb_spike,
    .csram_re, .csram_we, .neuron_idx,
    .nb_en, .new_neuron, .process_spike, .axon_type,
    .spike_valid, .sched_advance, .sched_clear,
    .state(ctrl_state), .busy, .tick_error
  );

  // ---- core SRAM: controller write-back has priority over configuration ---
  logic                csram_wen;
  logic [NEURON_W-1:0] csram_waddr;
  logic [WORD_W-1:0]   csram_wdata;

  always_comb begin
    if (csram_we) begin
      csram_wen   = 1'b1;
      csram_waddr = neuron_idx;
      csram_wdata = {f_synapses, new_potential, f_pos_reset, f_neg_reset, f_weights,
                     f_leak, f_pos_thresh, f_neg_thresh, f_reset_mode, f_dest};
    end else begin
      csram_wen   = cfg_we;
      csram_waddr = cfg_addr;
      csram_wdata = cfg_data;
    end
  end

  core_sram #(.NUM_NEURONS(NUM_NEURONS), .WORD_W(WORD_W), .INIT_FILE(INIT_FILE)) u_csram (
    .clk, .re(csram_re), .raddr(neuron_idx), .rdata(word),
    .we(csram_wen), .waddr(csram_waddr), .wdata(csram_wdata)
  );

  // ---- neuron block -------------------------------------------------------
  neuron_block #(
    .NUM_WEIGHTS(NUM_WEIGHTS), .WEIGHT_W(WEIGHT_W), .POT_W(POT_W), .LEAK_W(LEAK_W)
  ) u_nb (
    .clk, .rst_n, .nb_en, .new_neuron, .process_spike, .axon_type,
    .weights(f_weights), .prev_potential(f_potential), .leak(f_leak),
    .pos_threshold(f_pos_thresh), .neg_threshold(f_neg_thresh),
    .pos_reset(f_pos_reset), .neg_reset(f_neg_reset), .reset_mode(f_reset_mode),
    .potential_out(new_potential), .spike(nb_spike)
  );

  // ---- router and scheduler -----------------------------------------------
  logic                 deliver_valid;
  logic [PAYLOAD_W-1:0] deliver_payload;

  packet_router #(
    .DX_W(DX_W), .DY_W(DY_W), .PAYLOAD_W(PAYLOAD_W), .FIFO_DEPTH(FIFO_DEPTH)
  ) u_router (
    .clk, .rst_n,
    .in_valid, .in_pkt, .in_ren, .out_valid, .out_pkt, .out_ren,
    .spike_valid, .spike_pkt(f_dest), .local_overflow,
    .deliver_valid, .deliver_payload
  );

  packet_scheduler #(.NUM_AXONS(NUM_AXONS), .NUM_TICKS(NUM_TICKS)) u_sched (
    .clk, .rst_n,
    .pkt_valid(deliver_valid),
    .pkt_axon(deliver_payload[PAYLOAD_W-1 -: AXON_W]),
    .pkt_tick_offset(deliver_payload[TICK_W-1:0]),
    .advance(sched_advance), .clear(sched_clear),
    .axon_spikes, .current_slot(), .sched_error
  );

  a_cfg_when_idle: assert property (@(posedge clk) disable iff (!rst_n) cfg_we |-> !busy);

endmodule
