// neuron_block_tb: self-checking test of the LIF datapath.
//
// First replays the paper's two worked examples of the VMM mapping (neuron 1
// of the first core: weights of 1, threshold 1, linear reset of 1; neuron 0 of
// the [8,4,2,1] core), checking v_j(t) and the spike after every tick. Then
// runs random neurons (random weights, potentials, thresholds, leak, reset
// mode, spike patterns) against an independent integer model of the same
// rules with saturation at the 9-bit signed range.
module neuron_block_tb;
  localparam int NW = 4, WW = 9, PW = 9, LW = 9;
  localparam int PMAX = 255, PMIN = -256;

  logic clk = 0, rst_n = 0;
  logic nb_en, new_neuron, process_spike;
  logic [1:0] axon_type;
  logic [NW-1:0][WW-1:0] weights;
  logic signed [PW-1:0] prev_potential, pos_threshold, neg_threshold, pos_reset, neg_reset;
  logic signed [LW-1:0] leak;
  logic reset_mode;
  logic signed [PW-1:0] potential_out;
  logic spike;
  int checks = 0, failures = 0;

  neuron_block #(.NUM_WEIGHTS(NW), .WEIGHT_W(WW), .POT_W(PW), .LEAK_W(LW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat(int v);
    return (v > PMAX) ? PMAX : (v < PMIN) ? PMIN : v;
  endfunction

  // Reference: integrate the listed spikes, then leak/threshold/reset.
  function automatic void model(input int prev, input int w[4], input bit sp[], input int lk,
                                input int vp, input int vn, input int rp, input int rn,
                                input bit mode, output int vout, output bit s);
    int np = prev;
    foreach (sp[i]) if (sp[i]) np = sat(np + w[i % 4]);
    np = sat(np + lk);
    s = (np >= vp);
    if (s)              vout = mode ? sat(np - rp) : rp;
    else if (np <= vn)  vout = mode ? sat(np + rn) : rn;
    else                vout = np;
  endfunction

  // Run one neuron through the datapath: axon i of sp[] has type i % 4.
  task automatic run_neuron(input bit sp[]);
    foreach (sp[i]) begin
      nb_en = 1; new_neuron = (i == 0); process_spike = sp[i]; axon_type = 2'(i % 4);
      @(posedge clk); #1;
    end
    nb_en = 0; new_neuron = 0; process_spike = 0;
  endtask

  task automatic check(input int exp_v, input bit exp_s, input string what);
    checks++;
    if (potential_out !== PW'(exp_v) || spike !== exp_s) begin
      failures++;
      $display("FAIL %s: v=%0d s=%0b expected v=%0d s=%0b", what, potential_out, spike, exp_v, exp_s);
    end
  endtask

  initial begin
    int w[4];
    bit sp[];
    int ev; bit es;
    nb_en = 0; new_neuron = 0; process_spike = 0; axon_type = 0;
    weights = '0; prev_potential = 0; leak = 0; reset_mode = 0;
    pos_threshold = 1; neg_threshold = 0; pos_reset = 0; neg_reset = 0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;

    // Paper example: first VMM core, neuron 1, all weights 1, threshold 1,
    // linear reset subtracting 1, leak 0, negative threshold -256 (off).
    weights = {9'd1, 9'd1, 9'd1, 9'd1}; pos_threshold = 1; pos_reset = 1;
    neg_threshold = -256; neg_reset = 0; reset_mode = 1; leak = 0;
    prev_potential = 0;   run_neuron('{0, 0, 1, 1}); check(1, 1, "vmm core1 n1 tick1");
    prev_potential = 1;   run_neuron('{0, 0, 1, 0}); check(1, 1, "vmm core1 n1 tick2");
    prev_potential = 1;   run_neuron('{0, 0, 0, 0}); check(0, 1, "vmm core1 n1 tick3");
    prev_potential = 0;   run_neuron('{0, 0, 0, 0}); check(0, 0, "vmm core1 n1 tick4");
    // Paper example: second VMM core, neuron 0, weights {8,4,2,1} on axons 0..3.
    weights[0] = 9'd8; weights[1] = 9'd4; weights[2] = 9'd2; weights[3] = 9'd1;
    prev_potential = 0;   run_neuron('{1, 1, 1, 1}); check(14, 1, "vmm core2 tick2");
    prev_potential = 14;  run_neuron('{0, 1, 0, 1}); check(18, 1, "vmm core2 tick3");
    prev_potential = 18;  run_neuron('{0, 1, 0, 1}); check(22, 1, "vmm core2 tick4");
    prev_potential = 22;  run_neuron('{0, 0, 0, 0}); check(21, 1, "vmm core2 tick5");
    // Symmetric negative threshold: -1 with v- = 0 and absolute reset to 0.
    weights[0] = -9'sd1; pos_threshold = 1; neg_threshold = 0; neg_reset = 0; reset_mode = 0;
    prev_potential = 0;   run_neuron('{1}); check(0, 0, "negative threshold <= reaches zero");

    // Random neurons against the model.
    for (int n = 0; n < 3000; n++) begin
      int na = 1 + $urandom_range(0, 40);
      for (int k = 0; k < 4; k++) begin
        w[k] = int'($urandom_range(0, 511)) - 256;
        if (n % 3 == 0) w[k] = int'($urandom_range(0, 20)) - 10;
        weights[k] = WW'(w[k]);
      end
      sp = new[na];
      foreach (sp[i]) sp[i] = ($urandom_range(0, 2) == 0);
      prev_potential = PW'(int'($urandom_range(0, 511)) - 256);
      leak          = LW'(int'($urandom_range(0, 40)) - 20);
      pos_threshold = PW'(int'($urandom_range(0, 300)) - 44);
      neg_threshold = PW'(int'($urandom_range(0, 300)) - 256);
      pos_reset     = PW'(int'($urandom_range(0, 100)) - 50);
      neg_reset     = PW'(int'($urandom_range(0, 100)) - 50);
      reset_mode    = 1'($urandom_range(0, 1));
      model(int'(prev_potential), w, sp, int'(leak), int'(pos_threshold), int'(neg_threshold),
            int'(pos_reset), int'(neg_reset), reset_mode, ev, es);
      run_neuron(sp);
      check(ev, es, $sformatf("random neuron %0d", n));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
