// ranc_grid_full_tb: the mesh at its default size (4 x 4 cores, each 256
// axons x 256 neurons, 16 tick slots), run through complete ticks.
//
// Every row of cores is configured as a relay line: neuron j of core (x, y)
// listens to axon j only (all four weights +1, threshold 1, absolute reset to
// 0, no leak) and sends its spike to axon j of the core to its east, one tick
// later (dx = +1, delay 1). The eastmost core thus sends off the east edge.
// Before the first tick a random set of axons is injected at the west edge of
// each row. On tick k the spikes are in column k-1, so after DIM_X ticks
// exactly the injected axons leave the east edge of their row, as packets
// {dx = 0, dy = 0, axon, delay 1}. The test checks, after every tick, the
// set of axons that has left each row (empty before tick DIM_X, the injected
// set from then on), one exit per injected spike and no other packet, the
// busy time of N(n)*(N(a)+3)+2 = 66,306 cycles per tick, that a relay neuron
// is back at potential 0, and that no error flag is raised.
module ranc_grid_full_tb;
  import ranc_pkg::*;
  localparam int DX = 4, DY = 4, NC = DX * DY;
  localparam int NA = 256, NN = 256, NW = 4, PV = 9, WW = 9, LW = 9;
  localparam int AW = 8, TW = 4, DXW = 9, DYW = 9, PW = DXW + DYW + AW + TW;
  localparam int WORD_W = NA + 5 * PV + NW * WW + LW + 1 + PW;
  localparam int INJ_PER_ROW = 12;

  logic clk = 0, rst_n = 0, tick = 0;
  logic cfg_we = 0;
  logic [1:0] cfg_x = 0, cfg_y = 0;
  logic [7:0] cfg_addr = 0;
  logic [WORD_W-1:0] cfg_data = 0;
  logic [3:0][3:0] edge_in_valid = '0, edge_in_ren, edge_out_valid, edge_out_ren = '1;
  logic [3:0][3:0][PW-1:0] edge_in_pkt = '0, edge_out_pkt;
  logic [NC-1:0] core_busy, tick_error, sched_error, local_overflow;
  int checks = 0, failures = 0;
  int n_sched_err = 0, n_ovf = 0;

  ranc_grid dut (.*);
  always #5 clk = ~clk;

  initial begin
    #20_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t %s", $time, msg); end
  endtask

  bit [NA-1:0] injected [DY];
  bit [NA-1:0] exited [4][4];
  int n_exit = 0, n_other = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (|sched_error) n_sched_err++;
      if (|local_overflow) n_ovf++;
      for (int d = 0; d < 4; d++)
        for (int k = 0; k < 4; k++)
          if (edge_out_valid[d][k] && edge_out_ren[d][k]) begin
            if (d == int'(DIR_EAST) && edge_out_pkt[d][k] == {DXW'(0), DYW'(0), edge_out_pkt[d][k][TW +: AW], TW'(1)}) begin
              exited[d][k][edge_out_pkt[d][k][TW +: AW]] = 1'b1;
              n_exit++;
            end else n_other++;
          end
    end
  end

  function automatic logic [WORD_W-1:0] relay_word(input int j);
    logic [NA-1:0] syn;
    logic [NW-1:0][WW-1:0] wv;
    syn = '0; syn[j] = 1'b1;
    for (int k = 0; k < NW; k++) wv[k] = WW'(1);
    // synapses, potential, r+, r-, weights, leak, v+, v-, mode, dx, dy, axon, delay
    return {syn, PV'(0), PV'(0), PV'(0), wv, LW'(0), PV'(1), PV'(-256), 1'b0,
            DXW'(1), DYW'(0), AW'(j), TW'(1)};
  endfunction

  initial begin
    int busy_cycles;
    repeat (3) @(posedge clk); rst_n = 1;
    foreach (exited[d, k]) exited[d][k] = '0;
    // configure all 4096 neurons
    for (int c = 0; c < NC; c++)
      for (int j = 0; j < NN; j++) begin
        @(negedge clk);
        cfg_we = 1; cfg_x = 2'(c % DX); cfg_y = 2'(c / DX); cfg_addr = 8'(j);
        cfg_data = relay_word(j);
      end
    @(negedge clk); cfg_we = 0;
    // inject at the west edge of every row, destined to column 0 (dx = dy = 0)
    for (int y = 0; y < DY; y++) begin
      injected[y] = '0;
      for (int k = 0; k < INJ_PER_ROW; k++) begin
        int ax;
        ax = $urandom_range(0, NA - 1);
        injected[y][ax] = 1'b1;
        @(negedge clk);
        edge_in_valid[int'(DIR_WEST)][y] = 1;
        edge_in_pkt[int'(DIR_WEST)][y] = {DXW'(0), DYW'(0), AW'(ax), TW'(1)};
        #1;
        while (!edge_in_ren[int'(DIR_WEST)][y]) begin @(negedge clk); #1; end
        @(posedge clk);
        #1 edge_in_valid[int'(DIR_WEST)][y] = 0;
      end
    end
    repeat (10) @(negedge clk);
    for (int t = 1; t <= DX + 1; t++) begin
      tick = 1; @(negedge clk); tick = 0;
      busy_cycles = 0;
      while (|core_busy) begin busy_cycles++; @(negedge clk); end
      repeat (20) @(negedge clk);
      chk(busy_cycles == NN * (NA + 3) + 2, $sformatf("tick %0d busy %0d cycles", t, busy_cycles));
      for (int y = 0; y < DY; y++) begin
        // after tick DX the spikes have crossed the whole row
        chk(exited[int'(DIR_EAST)][y] == ((t >= DX) ? injected[y] : '0),
            $sformatf("tick %0d row %0d exit set wrong", t, y));
      end
      $display("tick %0d done: %0d cycles, %0d packets out", t, busy_cycles, n_exit);
    end
    chk(n_exit == $countones(injected[0]) + $countones(injected[1]) +
                  $countones(injected[2]) + $countones(injected[3]), "one exit per injected spike");
    chk(n_other == 0, "no packet left by another edge or with other fields");
    chk(n_sched_err == 0 && n_ovf == 0 && tick_error == '0, "no error flags");
    // potentials: every relay neuron fired and reset to 0
    chk(dut.g_row[3].g_col[3].u_core.u_csram.mem[0][WORD_W-NA-1 -: PV] == '0, "potential reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
