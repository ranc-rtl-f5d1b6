// ranc_grid_tb: end-to-end test of a small RANC mesh (3 x 2 cores of 8 axons
// x 8 neurons, FIFO depth 2).
//
// Phase A (exact): every core gets random neuron words through the
// configuration port; destinations span up to three hops in x and two in y,
// so spikes loop back, cross several cores, or leave the mesh at an edge.
// Before each tick random packets are injected at the west and south edges.
// The host side of the edge outputs is ready only part of the time, so
// packets wait in FIFOs (stalls). An independent model of all cores (LIF
// rules, scheduler slots, XY routing hop by hop) predicts, after every tick,
// each stored potential, the multiset of packets seen at every edge output,
// the late packets per core (scheduler error) and the busy time
// N(n)*(N(a)+3)+2.
// Phase B (overflow): two cores fire every neuron towards the east edge while
// the host blocks that edge; links inside the mesh stall and spikes are lost
// at the router. Exits plus overflow pulses must equal the spikes fired.
// Phase C: a tick before the mesh is idle must raise tick_error in every core.
// Each mechanism is counted; one that never happened counts as a failure.
module ranc_grid_tb;
  import ranc_pkg::*;
  localparam int DX = 3, DY = 2, NC = DX * DY;
  localparam int NA = 8, NN = 8, NW = 4, NT = 16, PV = 9, WW = 9, LW = 9;
  localparam int AW = 3, TW = 4, DXW = 9, DYW = 9, PW = DXW + DYW + AW + TW;
  localparam int WORD_W = NA + 5 * PV + NW * WW + LW + 1 + PW;
  localparam int EN = 3;
  localparam int PMAX = 255, PMIN = -256;
  localparam int E = 0, W = 1, N = 2, S = 3;

  logic clk = 0, rst_n = 0, tick = 0;
  logic cfg_we = 0;
  logic [1:0] cfg_x = 0;
  logic [0:0] cfg_y = 0;
  logic [2:0] cfg_addr = 0;
  logic [WORD_W-1:0] cfg_data = 0;
  logic [3:0][EN-1:0] edge_in_valid = '0, edge_in_ren, edge_out_valid, edge_out_ren = '1;
  logic [3:0][EN-1:0][PW-1:0] edge_in_pkt = '0, edge_out_pkt;
  logic [NC-1:0] core_busy, tick_error, sched_error, local_overflow;
  int checks = 0, failures = 0;

  ranc_grid #(.DIM_X(DX), .DIM_Y(DY), .NUM_AXONS(NA), .NUM_NEURONS(NN), .NUM_WEIGHTS(NW),
              .NUM_TICKS(NT), .FIFO_DEPTH(2)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100_000_000;
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

  // stored words of every core, read for the potential checks
  logic [WORD_W-1:0] mem_view [NC][NN];
  for (genvar gy = 0; gy < DY; gy++) begin : g_vy
    for (genvar gx = 0; gx < DX; gx++) begin : g_vx
      for (genvar j = 0; j < NN; j++) begin : g_vn
        assign mem_view[gy*DX+gx][j] = dut.g_row[gy].g_col[gx].u_core.u_csram.mem[j];
      end
    end
  end

  // ---- model -------------------------------------------------------------
  typedef struct {
    bit [NA-1:0] syn; int pot, rp, rn; int w[NW]; int leak, vp, vn; bit mode;
    int dx, dy, axon, dtick;
  } neuron_t;
  neuron_t nrn [NC][NN];
  bit [NA-1:0] slots [NC][NT];
  int cnt = 0;
  int exp_edge [4][EN][$];
  logic [PW-1:0] got_edge [4][EN][$];
  int late_exp [NC], late_seen [NC];
  int ovf_seen = 0;
  // mechanism counters
  int n_spikes = 0, n_loopback = 0, n_multihop = 0, n_edge_out = 0, n_injected = 0;
  int n_edge_stall = 0, n_link_stall = 0, n_late = 0, n_overflow = 0, n_tick_err = 0;

  function automatic logic [WORD_W-1:0] pack(input neuron_t n);
    logic [NW-1:0][WW-1:0] wv;
    for (int k = 0; k < NW; k++) wv[k] = WW'(n.w[k]);
    return {n.syn, PV'(n.pot), PV'(n.rp), PV'(n.rn), wv, LW'(n.leak), PV'(n.vp), PV'(n.vn),
            n.mode, DXW'(n.dx), DYW'(n.dy), AW'(n.axon), TW'(n.dtick)};
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      for (int c = 0; c < NC; c++) if (sched_error[c]) late_seen[c]++;
      for (int c = 0; c < NC; c++) if (local_overflow[c]) ovf_seen++;
      for (int d = 0; d < 4; d++)
        for (int k = 0; k < EN; k++) begin
          if (edge_out_valid[d][k] && edge_out_ren[d][k]) got_edge[d][k].push_back(edge_out_pkt[d][k]);
          if (edge_out_valid[d][k] && !edge_out_ren[d][k]) n_edge_stall++;
        end
      for (int c = 0; c < NC; c++)
        for (int d = 0; d < 4; d++)
          if (dut.c_out_valid[c][d] && !dut.c_out_ren[c][d]) begin
            // a link inside the mesh (not an edge) holding a packet
            automatic int x = c % DX, y = c / DX;
            if ((d == E && x < DX - 1) || (d == W && x > 0) || (d == N && y < DY - 1) ||
                (d == S && y > 0)) n_link_stall++;
          end
    end
  end

  // Route a packet that has arrived at core (x, y) with remaining (dx, dy).
  task automatic route(input int x, input int y, input int dx, input int dy,
                       input int ax, input int dt);
    int hops, d;
    hops = 0;
    forever begin
      if (dx == 0 && dy == 0) begin
        int c;
        c = y * DX + x;
        if (dt == 0) late_exp[c]++;
        else slots[c][(cnt + dt) % NT][ax] = 1'b1;
        break;
      end
      if (dx > 0) begin d = E; dx--; x++; end
      else if (dx < 0) begin d = W; dx++; x--; end
      else if (dy > 0) begin d = N; dy--; y++; end
      else begin d = S; dy++; y--; end
      hops++;
      if (x < 0 || x >= DX || y < 0 || y >= DY) begin
        logic [PW-1:0] p;
        p = {DXW'(dx), DYW'(dy), AW'(ax), TW'(dt)};
        exp_edge[d][(d == E || d == W) ? y : x].push_back(int'(p));
        n_edge_out++;
        break;
      end
    end
    if (hops >= 2) n_multihop++;
  endtask

  task automatic model_tick();
    bit [NA-1:0] sp [NC];
    bit fired [NC][NN];
    cnt = (cnt + 1) % NT;
    for (int c = 0; c < NC; c++) sp[c] = slots[c][cnt];
    for (int c = 0; c < NC; c++)
      for (int j = 0; j < NN; j++) begin
        int v;
        bit s;
        v = nrn[c][j].pot;
        for (int i = 0; i < NA; i++) if (sp[c][i] && nrn[c][j].syn[i]) v = sat(v + nrn[c][j].w[i % NW]);
        v = sat(v + nrn[c][j].leak);
        s = v >= nrn[c][j].vp;
        if (s) v = nrn[c][j].mode ? sat(v - nrn[c][j].rp) : nrn[c][j].rp;
        else if (v <= nrn[c][j].vn) v = nrn[c][j].mode ? sat(v + nrn[c][j].rn) : nrn[c][j].rn;
        nrn[c][j].pot = v;
        fired[c][j] = s;
      end
    for (int c = 0; c < NC; c++)
      for (int j = 0; j < NN; j++)
        if (fired[c][j]) begin
          n_spikes++;
          if (nrn[c][j].dx == 0 && nrn[c][j].dy == 0) n_loopback++;
          route(c % DX, c / DX, nrn[c][j].dx, nrn[c][j].dy, nrn[c][j].axon, nrn[c][j].dtick);
        end
    for (int c = 0; c < NC; c++) slots[c][cnt] = '0;
  endtask

  task automatic write_word(input int c, input int j, input logic [WORD_W-1:0] wd);
    @(negedge clk);
    cfg_we = 1; cfg_x = 2'(c % DX); cfg_y = 1'(c / DX); cfg_addr = 3'(j); cfg_data = wd;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic inject(input int side, input int pos, input logic [PW-1:0] p);
    @(negedge clk);
    edge_in_valid[side][pos] = 1; edge_in_pkt[side][pos] = p;
    #1;
    while (!edge_in_ren[side][pos]) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 edge_in_valid[side][pos] = 0;
    n_injected++;
  endtask

  task automatic fire_tick(output int busy_cycles);
    tick = 1; @(negedge clk); tick = 0;
    busy_cycles = 0;
    while (|core_busy) begin busy_cycles++; @(negedge clk); end
  endtask

  initial begin
    int busy_cycles, fired_b, exits_b;
    foreach (slots[c, t]) slots[c][t] = '0;
    foreach (late_exp[c]) begin late_exp[c] = 0; late_seen[c] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;

    // ---------------- phase A ----------------
    for (int c = 0; c < NC; c++)
      for (int j = 0; j < NN; j++) begin
        nrn[c][j].syn = NA'($urandom);
        nrn[c][j].pot = 0;
        for (int k = 0; k < NW; k++) nrn[c][j].w[k] = int'($urandom_range(0, 6)) - 1;
        nrn[c][j].leak = int'($urandom_range(0, 2)) - 1;
        nrn[c][j].vp = int'($urandom_range(1, 5));
        nrn[c][j].vn = -int'($urandom_range(0, 5));
        nrn[c][j].rp = int'($urandom_range(0, 2));
        nrn[c][j].rn = int'($urandom_range(0, 2));
        nrn[c][j].mode = 1'($urandom_range(0, 1));
        nrn[c][j].dx = int'($urandom_range(0, 6)) - 3;
        nrn[c][j].dy = int'($urandom_range(0, 4)) - 2;
        if (j == 0) begin nrn[c][j].dx = 0; nrn[c][j].dy = 0; end
        nrn[c][j].axon = int'($urandom_range(0, NA - 1));
        nrn[c][j].dtick = ($urandom_range(0, 15) == 0) ? 0 : int'($urandom_range(1, 3));
        // one neuron that fires every tick with delay 0: always late
        if (c == 0 && j == 1) begin
          nrn[c][j].leak = 1; nrn[c][j].vp = 1; nrn[c][j].dtick = 0; nrn[c][j].dx = 0; nrn[c][j].dy = 0;
        end
        write_word(c, j, pack(nrn[c][j]));
      end

    for (int t = 0; t < 30; t++) begin
      for (int k = 0; k < 3; k++) begin
        int side, pos, dx, dy, ax, dt, x0, y0;
        side = ($urandom_range(0, 1) == 0) ? W : S;
        pos = (side == W) ? $urandom_range(0, DY - 1) : $urandom_range(0, DX - 1);
        dx = int'($urandom_range(0, 3)) - 1;
        dy = int'($urandom_range(0, 2)) - 1;
        ax = $urandom_range(0, NA - 1);
        dt = $urandom_range(1, 3);
        x0 = (side == W) ? 0 : pos;
        y0 = (side == W) ? pos : 0;
        inject(side, pos, {DXW'(dx), DYW'(dy), AW'(ax), TW'(dt)});
        route(x0, y0, dx, dy, ax, dt);
      end
      repeat (20) @(negedge clk);
      fork
        fire_tick(busy_cycles);
        begin
          while (busy_cycles == 0 || |core_busy) begin
            edge_out_ren = '1;
            for (int d = 0; d < 4; d++)
              for (int k = 0; k < EN; k++) edge_out_ren[d][k] = ($urandom_range(0, 2) == 0);
            @(negedge clk);
          end
        end
      join
      edge_out_ren = '1;
      repeat (40) @(negedge clk);
      model_tick();
      chk(busy_cycles == NN * (NA + 3) + 2, $sformatf("tick %0d busy cycles %0d", t, busy_cycles));
      for (int c = 0; c < NC; c++)
        for (int j = 0; j < NN; j++)
          chk(int'($signed(mem_view[c][j][WORD_W-NA-1 -: PV])) == nrn[c][j].pot,
              $sformatf("tick %0d core %0d neuron %0d potential %0d expected %0d", t, c, j,
                        $signed(mem_view[c][j][WORD_W-NA-1 -: PV]), nrn[c][j].pot));
      for (int d = 0; d < 4; d++)
        for (int k = 0; k < EN; k++) begin
          chk(got_edge[d][k].size() == exp_edge[d][k].size(),
              $sformatf("tick %0d edge %0d/%0d count %0d expected %0d", t, d, k,
                        got_edge[d][k].size(), exp_edge[d][k].size()));
          foreach (got_edge[d][k][n]) begin
            int idx[$];
            idx = exp_edge[d][k].find_first_index(v) with (v == int'(got_edge[d][k][n]));
            chk(idx.size() > 0, $sformatf("unexpected packet %h at edge %0d/%0d", got_edge[d][k][n], d, k));
            if (idx.size() > 0) exp_edge[d][k].delete(idx[0]);
          end
          got_edge[d][k].delete();
          exp_edge[d][k].delete();
        end
      for (int c = 0; c < NC; c++)
        chk(late_seen[c] == late_exp[c], $sformatf("core %0d late %0d expected %0d", c, late_seen[c], late_exp[c]));
      chk(ovf_seen == 0 && tick_error == '0, "no overflow or tick error in phase A");
    end
    foreach (late_exp[c]) n_late += late_exp[c];

    // ---------------- phase B ----------------
    // cores (0,0) and (1,0): every neuron fires every tick towards the east edge
    for (int c = 0; c < NC; c++)
      for (int j = 0; j < NN; j++) begin
        neuron_t q;
        q = nrn[c][j];
        q.syn = '0; q.pot = 0; q.rp = 0; q.rn = 0; q.mode = 0; q.vn = PMIN;
        if (c < 2) begin q.leak = 1; q.vp = 1; q.dx = 3; q.dy = 0; q.dtick = 1; end
        else begin q.leak = 0; q.vp = PMAX; end
        write_word(c, j, pack(q));
      end
    repeat (5) @(negedge clk);
    ovf_seen = 0;
    foreach (got_edge[d, k]) got_edge[d][k].delete();
    edge_out_ren = '0;
    fire_tick(busy_cycles);
    repeat (20) @(negedge clk);
    edge_out_ren = '1;
    repeat (40) @(negedge clk);
    fired_b = 2 * NN;
    exits_b = got_edge[E][0].size();
    n_overflow = ovf_seen;
    $display("phase B: fired %0d exits %0d lost %0d", fired_b, exits_b, ovf_seen);
    chk(exits_b + ovf_seen == fired_b, "every spike either left the mesh or was counted lost");
    chk(exits_b >= 2 * 2 + 2 && ovf_seen > 0, "blocked edge filled the FIFOs and overflowed");
    foreach (got_edge[d, k]) chk(!(got_edge[d][k].size() > 0 && !(d == E && k == 0)),
                                 $sformatf("phase B packet at edge %0d/%0d", d, k));

    // ---------------- phase C ----------------
    tick = 1; @(negedge clk); tick = 0;
    repeat (10) @(negedge clk);
    tick = 1; @(negedge clk); tick = 0;
    chk(&tick_error, "tick during processing flagged by every core");
    if (&tick_error) n_tick_err++;

    $display("mechanisms: spikes %0d loopback %0d multihop %0d edge_out %0d injected %0d",
             n_spikes, n_loopback, n_multihop, n_edge_out, n_injected);
    $display("            edge_stall %0d link_stall %0d late %0d overflow %0d tick_error %0d",
             n_edge_stall, n_link_stall, n_late, n_overflow, n_tick_err);
    chk(n_spikes > 0, "spikes happened");
    chk(n_loopback > 0, "loopback happened");
    chk(n_multihop > 0, "multi-hop routing happened");
    chk(n_edge_out > 0, "edge output happened");
    chk(n_injected > 0, "edge injection happened");
    chk(n_edge_stall > 0, "edge stall happened");
    chk(n_link_stall > 0, "stall inside the mesh happened");
    chk(n_late > 0, "late packet happened");
    chk(n_overflow > 0, "overflow happened");
    chk(n_tick_err > 0, "tick error happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
