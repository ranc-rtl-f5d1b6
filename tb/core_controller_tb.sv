// core_controller_tb: self-checking test of the core controller FSM.
//
// A small controller (8 axons x 4 neurons) is driven with random crossbar
// columns (looked up by the neuron index it outputs) and random per-tick axon
// spikes. The testbench follows the axons itself and checks, cycle by cycle,
// the state order 0-1-2-3-4..4-5-6-(2..)-7-0, process_spike = synapse AND
// spike for each axon, new_neuron only on the first axon, the axon type
// (axon mod 4), one CSRAM read and one write-back per neuron at the right
// address, spike_valid exactly when the neuron block reports a spike, one
// scheduler advance and one clear per tick, and the busy time of
// N(n)*(N(a)+3)+2 cycles. A second controller at the default 256 x 256 size
// is timed over one tick. Finally a tick arriving mid-computation must set
// the tick error flag.
module core_controller_tb;
  import ranc_pkg::*;
  localparam int NA = 8, NN = 4;
  logic clk = 0, rst_n = 0, tick = 0;
  logic [NA-1:0] synapses, axon_spikes;
  logic nb_spike;
  logic csram_re, csram_we, nb_en, new_neuron, process_spike, spike_valid;
  logic sched_advance, sched_clear, busy, tick_error;
  logic [1:0] neuron_idx, axon_type;
  ctrl_state_t state;
  int checks = 0, failures = 0;

  core_controller #(.NUM_AXONS(NA), .NUM_NEURONS(NN), .NUM_WEIGHTS(4)) dut (.*);

  // Full-size instance for the cycle count.
  logic big_tick = 0, big_busy, big_err;
  core_controller big (
    .clk, .rst_n, .tick(big_tick), .synapses('0), .axon_spikes('0), .nb_spike(1'b0),
    .csram_re(), .csram_we(), .neuron_idx(), .nb_en(), .new_neuron(), .process_spike(),
    .axon_type(), .spike_valid(), .sched_advance(), .sched_clear(), .state(),
    .busy(big_busy), .tick_error(big_err)
  );

  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit [NA-1:0] syn_tab [NN];
  bit          fire_tab [NN];
  assign synapses = syn_tab[neuron_idx];
  assign nb_spike = fire_tab[neuron_idx];

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t %s", $time, msg); end
  endtask

  initial begin
    int busy_cycles;
    rst_n = 0; repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    chk(state == S0_WAIT_TICK && !busy, "idle after reset");

    for (int t = 0; t < 20; t++) begin
      int reads, writes, adv, clr, spikes, exp_spikes;
      reads = 0; writes = 0; adv = 0; clr = 0; spikes = 0; exp_spikes = 0;
      foreach (syn_tab[n]) begin
        syn_tab[n] = NA'($urandom); fire_tab[n] = $urandom_range(0, 1) == 1;
        exp_spikes += int'(fire_tab[n]);
      end
      axon_spikes = NA'($urandom);
      tick = 1; @(negedge clk); tick = 0;
      chk(state == S1_SET_ADDR, "tick -> state 1");
      busy_cycles = 0;
      while (busy) begin
        busy_cycles++;
        adv += int'(sched_advance);
        clr += int'(sched_clear);
        if (state == S2_WAIT_SRAM) begin
          chk(csram_re, "CSRAM read in state 2");
          reads++;
        end
        if (state == S3_FIRST_AXON || state == S4_AXONS) begin
          if (state == S3_FIRST_AXON) begin
            for (int k = 0; k < NA; k++) begin
              chk(state == (k == 0 ? S3_FIRST_AXON : S4_AXONS), $sformatf("axon %0d state", k));
              chk(nb_en && new_neuron == (k == 0), "nb_en/new_neuron");
              chk(process_spike == (syn_tab[neuron_idx][k] && axon_spikes[k]),
                  $sformatf("process_spike n%0d a%0d", neuron_idx, k));
              chk(axon_type == 2'(k % 4), "axon type = axon mod N(w)");
              @(negedge clk); busy_cycles++;
            end
            busy_cycles--;
            chk(state == S5_WRITEBACK, "state 5 after last axon");
            chk(csram_we && neuron_idx == 2'(writes), "write-back address");
            chk(spike_valid == fire_tab[neuron_idx], "spike_valid follows neuron spike");
            spikes += int'(spike_valid);
            writes++;
            @(negedge clk); busy_cycles++;
            chk(state == S6_SPIKE_OFF && !spike_valid, "state 6 spike off");
            continue;
          end
        end
        @(negedge clk);
      end
      chk(state == S0_WAIT_TICK, "back to idle");
      chk(reads == NN && writes == NN, $sformatf("one read and write per neuron (%0d,%0d)", reads, writes));
      chk(adv == 1 && clr == 1, "one advance and one clear per tick");
      chk(spikes == exp_spikes, "spike count");
      chk(busy_cycles == NN * (NA + 3) + 2, $sformatf("busy cycles %0d", busy_cycles));
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    chk(!tick_error, "no tick error so far");
    tick = 1; @(negedge clk); tick = 0;
    repeat (5) @(negedge clk);
    tick = 1; @(negedge clk); tick = 0;
    chk(tick_error, "early tick sets tick_error");

    // Default-size controller: one tick over 256 x 256.
    begin
      int n = 0;
      big_tick = 1; @(negedge clk); big_tick = 0;
      while (big_busy) begin n++; @(negedge clk); end
      chk(n == 256 * 259 + 2, $sformatf("256x256 tick takes %0d cycles", n));
      chk(!big_err, "no error on full-size tick");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
