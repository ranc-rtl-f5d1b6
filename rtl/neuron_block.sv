// neuron_block: the leaky-integrate-and-fire datapath of one RANC core.
//
// One datapath serves all neurons of the core in turn; the core controller
// steps it through the axons of one neuron after another. Each enabled cycle
// the neuron-potential register NP is loaded with
//     base + (process_spike ? w_j[tau_i] : 0)
// where base is v_j(t-1) from the core SRAM on the first axon of a neuron
// (new_neuron = 1) and NP itself afterwards. tau_i, the axon type, selects one
// of the N(w) weights of the neuron.
//
// The output side is combinational on NP: the leak l_j is added, then the
// leaked value L is compared with both thresholds.
//   L >= v+  : spike, v_j(t) = r+            (absolute reset)  or L - r+ (linear)
//   L <= v-  : no spike, v_j(t) = r-        (absolute reset)  or L + r- (linear)
//   otherwise: v_j(t) = L
// The >= / <= pair is the symmetric thresholding of RANC (TrueNorth uses < on
// the negative side). The structure (weight mux, zero mux, new_neuron mux, NP,
// leak adder, two comparators, two reset muxes with the positive one last)
// follows the paper's neuron datapath diagram. The choices of this design:
// comparators look at the leaked value; the "linear" reset subtracts r+ (adds
// r-) instead of loading it; every addition saturates at the B(v)-bit signed
// range. Timing: NP updates on the clock edge when nb_en is high; v_j(t) and
// the spike are valid in the cycle after the last axon was accumulated.
module neuron_block
  import ranc_pkg::*;
#(
  parameter int unsigned NUM_WEIGHTS = DEF_NUM_WEIGHTS,
  parameter int unsigned WEIGHT_W    = DEF_WEIGHT_W,
  parameter int unsigned POT_W       = DEF_POT_W,
  parameter int unsigned LEAK_W      = DEF_LEAK_W,
  localparam int unsigned TYPE_W     = (NUM_WEIGHTS > 1) ? $clog2(NUM_WEIGHTS) : 1
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 nb_en,
  input  logic                                 new_neuron,
  input  logic                                 process_spike,
  input  logic [TYPE_W-1:0]                    axon_type,
  input  logic [NUM_WEIGHTS-1:0][WEIGHT_W-1:0] weights,
  input  logic signed [POT_W-1:0]              prev_potential,
  input  logic signed [LEAK_W-1:0]             leak,
  input  logic signed [POT_W-1:0]              pos_threshold,
  input  logic signed [POT_W-1:0]              neg_threshold,
  input  logic signed [POT_W-1:0]              pos_reset,
  input  logic signed [POT_W-1:0]              neg_reset,
  input  logic                                 reset_mode,
  output logic signed [POT_W-1:0]              potential_out,
  output logic                                 spike
);

  localparam int SUM_W = ((POT_W > WEIGHT_W) ? POT_W : WEIGHT_W) + 2;
  localparam int SUM_W2 = ((SUM_W > LEAK_W) ? SUM_W : LEAK_W) + 1;
  localparam logic signed [SUM_W2-1:0] POT_MAX = SUM_W2'(sat_limit_hi(POT_W));
  localparam logic signed [SUM_W2-1:0] POT_MIN = SUM_W2'(sat_limit_lo(POT_W));

  logic signed [POT_W-1:0]    np_q;
  logic signed [WEIGHT_W-1:0] weight_sel;   // weight mux output
  logic signed [WEIGHT_W-1:0] addend;       // "A": zero mux output
  logic signed [POT_W-1:0]    base;         // "B": new_neuron mux output
  logic signed [POT_W-1:0]    np_d;         // "C": saturated sum into NP
  logic signed [POT_W-1:0]    leaked;
  logic signed [POT_W-1:0]    neg_value;    // first reset mux output
  logic                       below_neg;

  function automatic logic signed [POT_W-1:0] saturate(input logic signed [SUM_W2-1:0] v);
    if (v > POT_MAX)      return POT_W'(POT_MAX);
    else if (v < POT_MIN) return POT_W'(POT_MIN);
    else                  return POT_W'(v);
  endfunction

  always_comb begin
    weight_sel = WEIGHT_W'(weights[axon_type]);
    addend     = process_spike ? weight_sel : '0;
    base       = new_neuron ? prev_potential : np_q;
    np_d       = saturate(SUM_W2'(base) + SUM_W2'(addend));
  end

  always_ff @(posedge clk) begin
    if (!rst_n)     np_q <= '0;
    else if (nb_en) np_q <= np_d;
  end

  always_comb begin
    leaked    = saturate(SUM_W2'(np_q) + SUM_W2'(leak));
    spike     = (leaked >= pos_threshold);
    below_neg = (leaked <= neg_threshold);
    if (below_neg)
      neg_value = reset_mode ? saturate(SUM_W2'(leaked) + SUM_W2'(neg_reset)) : neg_reset;
    else
      neg_value = leaked;
    if (spike)
      potential_out = reset_mode ? saturate(SUM_W2'(leaked) - SUM_W2'(pos_reset)) : pos_reset;
    else
      potential_out = neg_value;
  end

endmodule
