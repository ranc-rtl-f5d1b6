// ranc_core_tb: self-checking test of one complete RANC core.
//
// A 16-axon x 8-neuron core is loaded with random neuron words through the
// configuration port. Before each tick the testbench injects a few packets on
// the west link (addressed to this core, random axon and delay). Neurons
// whose destination is this core (dx = dy = 0) feed their spikes back into
// its own scheduler; the others leave on the east/west/north/south links.
// An independent model (scheduler slots, LIF neuron rules, routing) predicts
// after every tick each neuron's stored potential, the multiset of packets
// on every output link, the number of late packets (scheduler error) and the
// core's busy time of N(n)*(N(a)+3)+2 cycles. It also fires one tick too
// early and expects the tick error flag.
module ranc_core_tb;
  import ranc_pkg::*;
  localparam int NA = 16, NN = 8, NW = 4, NT = 16, PV = 9, WW = 9, LW = 9;
  localparam int AW = 4, TW = 4, DXW = 9, DYW = 9, PW = DXW + DYW + AW + TW;
  localparam int WORD_W = NA + 5 * PV + NW * WW + LW + 1 + PW;
  localparam int PMAX = 255, PMIN = -256;

  logic clk = 0, rst_n = 0, tick = 0;
  logic cfg_we = 0;
  logic [2:0] cfg_addr = 0;
  logic [WORD_W-1:0] cfg_data = 0;
  logic [3:0] in_valid = 0, in_ren, out_valid, out_ren = 4'hf;
  logic [3:0][PW-1:0] in_pkt = '0, out_pkt;
  logic busy, tick_error, sched_error, local_overflow;
  int checks = 0, failures = 0;

  ranc_core #(.NUM_AXONS(NA), .NUM_NEURONS(NN), .NUM_WEIGHTS(NW), .NUM_TICKS(NT),
              .FIFO_DEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #50_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t %s", $time, msg); end
  endtask

  function automatic int sat(int v);
    return (v > PMAX) ? PMAX : (v < PMIN) ? PMIN : v;
  endfunction

  // model state
  typedef struct {
    bit [NA-1:0] syn; int pot, rp, rn; int w[NW]; int leak, vp, vn; bit mode;
    int dx, dy, axon, dtick;
  } neuron_t;
  neuron_t nrn [NN];
  bit [NA-1:0] slots [NT];
  int cnt = 0;
  int exp_out [4][$];          // expected packets per output link (as int of bits)
  logic [PW-1:0] got [4][$];
  int late_expected = 0, late_seen = 0;
  int n_loopback = 0, n_exported = 0, n_injected = 0, n_spikes = 0;

  function automatic logic [WORD_W-1:0] pack(input neuron_t n);
    logic [NW-1:0][WW-1:0] wv;
    for (int k = 0; k < NW; k++) wv[k] = WW'(n.w[k]);
    return {n.syn, PV'(n.pot), PV'(n.rp), PV'(n.rn), wv, LW'(n.leak), PV'(n.vp), PV'(n.vn),
            n.mode, DXW'(n.dx), DYW'(n.dy), AW'(n.axon), TW'(n.dtick)};
  endfunction

  always @(posedge clk) begin
    if (rst_n && sched_error) late_seen++;
    for (int k = 0; k < 4; k++) if (rst_n && out_valid[k] && out_ren[k]) got[k].push_back(out_pkt[k]);
  end

  function automatic logic [PW-1:0] hop(input int dx, input int dy, input int ax, input int dt,
                                        output int o);
    if (dx > 0) begin o = 0; dx--; end
    else if (dx < 0) begin o = 1; dx++; end
    else if (dy > 0) begin o = 2; dy--; end
    else begin o = 3; dy++; end
    return {DXW'(dx), DYW'(dy), AW'(ax), TW'(dt)};
  endfunction

  task automatic model_tick();
    bit [NA-1:0] sp;
    cnt = (cnt + 1) % NT;
    sp = slots[cnt];
    for (int j = 0; j < NN; j++) begin
      int v = nrn[j].pot;
      bit s;
      for (int i = 0; i < NA; i++) if (sp[i] && nrn[j].syn[i]) v = sat(v + nrn[j].w[i % NW]);
      v = sat(v + nrn[j].leak);
      s = v >= nrn[j].vp;
      if (s) v = nrn[j].mode ? sat(v - nrn[j].rp) : nrn[j].rp;
      else if (v <= nrn[j].vn) v = nrn[j].mode ? sat(v + nrn[j].rn) : nrn[j].rn;
      nrn[j].pot = v;
      if (s) begin
        n_spikes++;
        if (nrn[j].dx == 0 && nrn[j].dy == 0) begin
          int tgt = (cnt + nrn[j].dtick) % NT;
          n_loopback++;
          if (tgt == cnt) late_expected++;
          else slots[tgt][nrn[j].axon] = 1'b1;
        end else begin
          int o;
          logic [PW-1:0] p = hop(nrn[j].dx, nrn[j].dy, nrn[j].axon, nrn[j].dtick, o);
          exp_out[o].push_back(int'(p));
          n_exported++;
        end
      end
    end
    slots[cnt] = '0;
  endtask

  initial begin
    int busy_cycles;
    foreach (slots[t]) slots[t] = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // random configuration
    for (int j = 0; j < NN; j++) begin
      nrn[j].syn = NA'($urandom);
      nrn[j].pot = 0;
      for (int k = 0; k < NW; k++) nrn[j].w[k] = int'($urandom_range(0, 6)) - 1;
      nrn[j].leak = int'($urandom_range(0, 2)) - 1;
      nrn[j].vp = int'($urandom_range(1, 6));
      nrn[j].vn = -int'($urandom_range(0, 5));
      nrn[j].rp = int'($urandom_range(0, 2));
      nrn[j].rn = int'($urandom_range(0, 2));
      nrn[j].mode = 1'($urandom_range(0, 1));
      nrn[j].dx = (j < 4) ? 0 : int'($urandom_range(0, 2)) - 1;
      nrn[j].dy = (j < 4) ? 0 : int'($urandom_range(0, 2)) - 1;
      if (j >= 4 && nrn[j].dx == 0 && nrn[j].dy == 0) nrn[j].dx = 1;
      nrn[j].axon = int'($urandom_range(0, NA - 1));
      nrn[j].dtick = (j == 3) ? 0 : int'($urandom_range(1, 3));
      @(negedge clk); cfg_we = 1; cfg_addr = 3'(j); cfg_data = pack(nrn[j]);
    end
    @(negedge clk); cfg_we = 0;

    for (int t = 0; t < 40; t++) begin
      // inject external spikes from the west, addressed to this core
      for (int k = 0; k < 4; k++) begin
        int ax, dt;
        ax = $urandom_range(0, NA - 1);
        dt = $urandom_range(1, 4);
        @(negedge clk);
        in_valid[1] = 1; in_pkt[1] = {DXW'(0), DYW'(0), AW'(ax), TW'(dt)};
        #1;
        while (!in_ren[1]) begin @(negedge clk); #1; end
        @(posedge clk);
        #1 in_valid[1] = 0;
        slots[(cnt + dt) % NT][ax] = 1'b1;
        n_injected++;
      end
      repeat (8) @(negedge clk);
      tick = 1; @(negedge clk); tick = 0;
      busy_cycles = 0;
      while (busy) begin busy_cycles++; @(negedge clk); end
      repeat (10) @(negedge clk);   // let packets drain
      model_tick();
      chk(busy_cycles == NN * (NA + 3) + 2, $sformatf("busy cycles %0d", busy_cycles));
      for (int j = 0; j < NN; j++) begin
        logic [WORD_W-1:0] wd;
        wd = dut.u_csram.mem[j];
        chk(int'($signed(wd[WORD_W-NA-1 -: PV])) == nrn[j].pot,
            $sformatf("tick %0d neuron %0d potential %0d expected %0d", t, j,
                      $signed(wd[WORD_W-NA-1 -: PV]), nrn[j].pot));
      end
      for (int k = 0; k < 4; k++) begin
        chk(got[k].size() == exp_out[k].size(),
            $sformatf("tick %0d output %0d count %0d expected %0d", t, k, got[k].size(), exp_out[k].size()));
        foreach (got[k][n]) begin
          int idx[$];
          idx = exp_out[k].find_first_index(x) with (x == int'(got[k][n]));
          chk(idx.size() > 0, $sformatf("unexpected packet %h on output %0d", got[k][n], k));
          if (idx.size() > 0) exp_out[k].delete(idx[0]);
        end
        got[k].delete();
        exp_out[k].delete();
      end
      chk(late_seen == late_expected, $sformatf("late packets %0d expected %0d", late_seen, late_expected));
      chk(!tick_error && !local_overflow, "no tick error or overflow");
    end
    chk(n_loopback > 0 && n_exported > 0 && late_expected > 0, "loopback, export and late packet all exercised");
    // tick too early
    tick = 1; @(negedge clk); tick = 0; repeat (20) @(negedge clk);
    tick = 1; @(negedge clk); tick = 0;
    chk(tick_error, "early tick flagged");
    $display("core: spikes %0d loopback %0d exported %0d injected %0d late %0d",
             n_spikes, n_loopback, n_exported, n_injected, late_expected);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
