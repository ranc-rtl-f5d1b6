// packet_scheduler_tb: self-checking test of the spike scheduler.
//
// Drives random packets (random axon, random delivery offset including the
// too-late offset 0), together with the once-per-tick 'advance' and 'clear'
// pulses the controller produces, and compares the offered axon spikes, the
// current slot and the error flag with a reference model kept in the
// testbench every cycle. Also checks that a spike scheduled d ticks ahead
// appears exactly d ticks later and disappears after its slot is cleared.
module packet_scheduler_tb;
  localparam int NA = 32, NT = 16;
  logic clk = 0, rst_n = 0;
  logic pkt_valid, advance, clear;
  logic [4:0] pkt_axon;
  logic [3:0] pkt_tick_offset;
  logic [NA-1:0] axon_spikes;
  logic [3:0] current_slot;
  logic sched_error;
  int checks = 0, failures = 0;

  packet_scheduler #(.NUM_AXONS(NA), .NUM_TICKS(NT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit [NA-1:0] ref_slots [NT];
  int ref_cnt = 0;

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    int late = 0;
    pkt_valid = 0; advance = 0; clear = 0; pkt_axon = 0; pkt_tick_offset = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (ref_slots[t]) ref_slots[t] = '0;

    // Directed: axon 7 three ticks ahead.
    @(negedge clk); pkt_valid = 1; pkt_axon = 7; pkt_tick_offset = 3;
    chk(!sched_error, "offset 3 not late");
    @(negedge clk); pkt_valid = 0;
    for (int t = 1; t <= 4; t++) begin
      advance = 1; @(negedge clk); advance = 0;
      chk(axon_spikes[7] == (t == 3), $sformatf("directed spike visible only at tick 3 (t=%0d)", t));
      clear = 1; @(negedge clk); clear = 0;
      chk(axon_spikes == '0, "slot cleared");
    end
    repeat (2) @(negedge clk);
    // Directed: too-late packet.
    pkt_valid = 1; pkt_axon = 1; pkt_tick_offset = 0; #1;
    chk(sched_error, "offset 0 raises scheduler error");
    @(negedge clk); pkt_valid = 0;
    chk(axon_spikes[1] == 0, "late packet dropped");
    ref_cnt = int'(current_slot);

    // Random traffic against the model.
    for (int cyc = 0; cyc < 20000; cyc++) begin
      int tgt;
      pkt_valid = ($urandom_range(0, 1) == 1);
      pkt_axon = 5'($urandom_range(0, NA - 1));
      pkt_tick_offset = 4'($urandom_range(0, NT - 1));
      advance = ($urandom_range(0, 15) == 0);
      clear = !advance && ($urandom_range(0, 15) == 0);
      #1;
      tgt = (ref_cnt + int'(pkt_tick_offset)) % NT;
      chk(sched_error == (pkt_valid && tgt == ref_cnt), "error flag");
      chk(axon_spikes == ref_slots[ref_cnt], "axon spikes of current slot");
      chk(current_slot == 4'(ref_cnt), "current slot");
      @(posedge clk);
      if (clear) ref_slots[ref_cnt] = '0;
      if (pkt_valid && tgt != ref_cnt) begin ref_slots[tgt][pkt_axon] = 1'b1; end
      if (pkt_valid && tgt == ref_cnt) late++;
      if (advance) ref_cnt = (ref_cnt + 1) % NT;
      @(negedge clk);
    end
    chk(late > 0, "late packets exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
