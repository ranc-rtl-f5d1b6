// vmm_example_tb: a two-core vector-matrix product on the mesh at its default
// size (4 x 4 cores of 256 axons x 256 neurons).
//
// The product is [1, 3, 2, 1] . [2, 1, 4, 12] = 25. The vector arrives as
// rate-coded spikes: axon i of core (0,0) receives v_i spikes, one on each of
// ticks 1 .. v_i (injected at the west edge before the first tick, with
// delivery offsets 1 .. v_i). Core (0,0) holds the matrix in binary: neuron j
// stands for bit weight 8 >> j, and axon i connects to neuron j when that bit
// of m_i is set (m = 2, 1, 4, 12). All its weights are +1, the threshold is 1
// and the reset is linear by 1, so neuron j fires sum_i v_i * bit_j(m_i)
// times: [1, 3, 1, 3]. Each of its spikes goes to axon j of core (1,0) one tick
// later. There neuron 0 weighs axon j by 8 >> j (axon type = axon index mod 4
// selects the weight), again with threshold 1 and linear reset by 1: it
// integrates 15, 4+1 and 4+1 on ticks 2, 3 and 4 and then fires once per tick
// until its potential is spent, 25 spikes in all, each sent three hops east
// and out of the mesh. The test checks the potentials tick by tick
// (core (1,0) neuron 0: 14, 18, 22, 21, ..., 0; core (0,0) neuron 1: 1, 1, 0),
// one output packet per tick on ticks 2 .. 26 with the configured axon and
// delay fields, 25 in total, the busy time of every tick, and no error flag.
// All other neurons are configured never to fire.
module vmm_example_tb;
  import ranc_pkg::*;
  localparam int DX = 4, DY = 4, NC = DX * DY;
  localparam int NA = 256, NN = 256, NW = 4, PV = 9, WW = 9, LW = 9;
  localparam int AW = 8, TW = 4, DXW = 9, DYW = 9, PW = DXW + DYW + AW + TW;
  localparam int WORD_W = NA + 5 * PV + NW * WW + LW + 1 + PW;
  localparam int NTICKS = 28;
  localparam int OUT_AXON = 5, OUT_DELAY = 2;

  logic clk = 0, rst_n = 0, tick = 0;
  logic cfg_we = 0;
  logic [1:0] cfg_x = 0, cfg_y = 0;
  logic [7:0] cfg_addr = 0;
  logic [WORD_W-1:0] cfg_data = 0;
  logic [3:0][3:0] edge_in_valid = '0, edge_in_ren, edge_out_valid, edge_out_ren = '1;
  logic [3:0][3:0][PW-1:0] edge_in_pkt = '0, edge_out_pkt;
  logic [NC-1:0] core_busy, tick_error, sched_error, local_overflow;
  int checks = 0, failures = 0;
  int n_err = 0, n_out = 0, n_bad = 0;

  ranc_grid dut (.*);
  always #5 clk = ~clk;

  initial begin
    #40_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t %s", $time, msg); end
  endtask

  always @(posedge clk) begin
    if (rst_n) begin
      if (|sched_error || |local_overflow) n_err++;
      for (int d = 0; d < 4; d++)
        for (int k = 0; k < 4; k++)
          if (edge_out_valid[d][k] && edge_out_ren[d][k]) begin
            if (d == int'(DIR_EAST) && k == 0 &&
                edge_out_pkt[d][k] == {DXW'(0), DYW'(0), AW'(OUT_AXON), TW'(OUT_DELAY)}) n_out++;
            else n_bad++;
          end
    end
  end

  // One neuron word: synapses, potential, r+, r-, weights, leak, v+, v-,
  // reset mode, dx, dy, axon, delay.
  function automatic logic [WORD_W-1:0] word(input logic [NA-1:0] syn,
                                             input logic [NW-1:0][WW-1:0] w,
                                             input int vp, input bit linear,
                                             input int dx, input int axon, input int delay);
    return {syn, PV'(0), PV'(1), PV'(0), w, LW'(0), PV'(vp), PV'(-256), linear,
            DXW'(dx), DYW'(0), AW'(axon), TW'(delay)};
  endfunction

  function automatic int pot(input int c, input int j);
    logic [WORD_W-1:0] wd;
    case (c)
      0: wd = dut.g_row[0].g_col[0].u_core.u_csram.mem[j];
      default: wd = dut.g_row[0].g_col[1].u_core.u_csram.mem[j];
    endcase
    return int'($signed(wd[WORD_W-NA-1 -: PV]));
  endfunction

  initial begin
    int vec [4];
    int mat [4];
    int busy_cycles, prev_out, exp_c2;
    logic [NW-1:0][WW-1:0] ones, bitw;
    vec = '{1, 3, 2, 1};
    mat = '{2, 1, 4, 12};
    for (int k = 0; k < NW; k++) begin ones[k] = WW'(1); bitw[k] = WW'(8 >> k); end
    repeat (3) @(posedge clk); rst_n = 1;

    // configuration: every neuron silent unless set below
    for (int c = 0; c < NC; c++)
      for (int j = 0; j < NN; j++) begin
        logic [NA-1:0] syn;
        logic [WORD_W-1:0] wd;
        syn = '0;
        wd = word('0, '0, 255, 1'b0, 0, 0, 1);
        if (c == 0 && j < 4) begin
          for (int i = 0; i < 4; i++) syn[i] = mat[i][3 - j];
          wd = word(syn, ones, 1, 1'b1, 1, j, 1);
        end
        if (c == 1 && j == 0) wd = word(NA'(4'hf), bitw, 1, 1'b1, 3, OUT_AXON, OUT_DELAY);
        @(negedge clk);
        cfg_we = 1; cfg_x = 2'(c % DX); cfg_y = 2'(c / DX); cfg_addr = 8'(j); cfg_data = wd;
      end
    @(negedge clk); cfg_we = 0;

    // the vector, rate coded: axon i gets a spike on ticks 1 .. vec[i]
    for (int i = 0; i < 4; i++)
      for (int t = 1; t <= vec[i]; t++) begin
        @(negedge clk);
        edge_in_valid[int'(DIR_WEST)][0] = 1;
        edge_in_pkt[int'(DIR_WEST)][0] = {DXW'(0), DYW'(0), AW'(i), TW'(t)};
        #1;
        while (!edge_in_ren[int'(DIR_WEST)][0]) begin @(negedge clk); #1; end
        @(posedge clk);
        #1 edge_in_valid[int'(DIR_WEST)][0] = 0;
      end
    repeat (10) @(negedge clk);

    exp_c2 = 0;
    for (int t = 1; t <= NTICKS; t++) begin
      prev_out = n_out;
      tick = 1; @(negedge clk); tick = 0;
      busy_cycles = 0;
      while (|core_busy) begin busy_cycles++; @(negedge clk); end
      repeat (20) @(negedge clk);
      chk(busy_cycles == NN * (NA + 3) + 2, $sformatf("tick %0d busy %0d cycles", t, busy_cycles));
      // expected potential of core (1,0) neuron 0 after tick t
      case (t)
        1: exp_c2 = 0;
        2: exp_c2 = 15 - 1;
        3, 4: exp_c2 = exp_c2 + 5 - 1;
        default: exp_c2 = (exp_c2 > 0) ? exp_c2 - 1 : 0;
      endcase
      chk(pot(1, 0) == exp_c2, $sformatf("tick %0d core 1 neuron 0 potential %0d expected %0d",
                                         t, pot(1, 0), exp_c2));
      if (t <= 3) chk(pot(0, 1) == ((t < 3) ? 1 : 0),
                      $sformatf("tick %0d core 0 neuron 1 potential %0d", t, pot(0, 1)));
      chk(n_out - prev_out == ((t >= 2 && t <= 26) ? 1 : 0),
          $sformatf("tick %0d: %0d output spikes", t, n_out - prev_out));
    end
    $display("product = %0d output spikes", n_out);
    chk(n_out == 25, "product is 25");
    chk(n_bad == 0 && n_err == 0 && tick_error == '0, "no stray packet or error flag");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
