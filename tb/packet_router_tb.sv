// packet_router_tb: self-checking test of the XY router.
//
// Random packets enter on all four mesh inputs and from the local neurons
// while each neighbour output is randomly blocked. A scoreboard computes the
// expected output port and hop-adjusted dx/dy of every packet independently
// (dx first, east positive, then dy, north positive) and checks that each
// packet leaves exactly once on that port, that local packets are delivered
// with their axon/tick payload, that a blocked output stalls its inputs
// (back-pressure: the input FIFO is not popped), that order is kept per
// input/output pair, and that a spike offered to a full local FIFO is
// reported through local_overflow. Also counts how often stalls, overflows
// and every output port occurred.
module packet_router_tb;
  import ranc_pkg::*;
  localparam int DXW = 9, DYW = 9, PLW = 12, PW = DXW + DYW + PLW;
  logic clk = 0, rst_n = 0;
  logic [3:0] in_valid, in_ren, out_valid, out_ren;
  logic [3:0][PW-1:0] in_pkt, out_pkt;
  logic spike_valid, local_overflow, deliver_valid;
  logic [PW-1:0] spike_pkt;
  logic [PLW-1:0] deliver_payload;
  int checks = 0, failures = 0;

  packet_router #(.DX_W(DXW), .DY_W(DYW), .PAYLOAD_W(PLW), .FIFO_DEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #20_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected output queues, one per (output, input) pair to check ordering.
  logic [PW-1:0] exp_q [5][5][$];
  logic [PW-1:0] src_q [4][$];
  int id_counter = 0;

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t %s", $time, msg); end
  endtask

  function automatic logic [PW-1:0] mk_pkt();
    logic signed [DXW-1:0] dx = DXW'(int'($urandom_range(0, 6)) - 3);
    logic signed [DYW-1:0] dy = DYW'(int'($urandom_range(0, 6)) - 3);
    if ($urandom_range(0, 3) == 0) dx = 0;
    return {dx, dy, PLW'($urandom)};
  endfunction

  // Independent routing decision: returns output index, next packet.
  function automatic int route(input logic [PW-1:0] p, output logic [PW-1:0] nxt);
    int dx = $signed(p[PW-1 -: DXW]);
    int dy = $signed(p[PW-DXW-1 -: DYW]);
    int o;
    if (dx > 0)      begin o = 0; dx--; end
    else if (dx < 0) begin o = 1; dx++; end
    else if (dy > 0) begin o = 2; dy--; end
    else if (dy < 0) begin o = 3; dy++; end
    else o = 4;
    nxt = {DXW'(dx), DYW'(dy), p[PLW-1:0]};
    return o;
  endfunction

  int n_out [5];
  int stalls = 0, overflows = 0, sent = 0, received = 0;

  task automatic drive_inputs();
    for (int i = 0; i < 4; i++) begin
      in_valid[i] = src_q[i].size() > 0;
      in_pkt[i]   = in_valid[i] ? src_q[i][0] : '0;
    end
  endtask

  initial begin
    logic [PW-1:0] nx;
    int o;
    spike_valid = 0; spike_pkt = 0; out_ren = 0;
    drive_inputs();
    repeat (3) @(posedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 30000 || (cyc < 40000 && received < sent); cyc++) begin
      bit phase_block;
      phase_block = (cyc % 2000) < 300;   // periods of heavy back-pressure
      @(negedge clk);
      // new traffic into neighbour sources
      for (int i = 0; i < 4; i++)
        if (cyc < 28000 && src_q[i].size() < 3 && $urandom_range(0, 3) == 0) begin
          logic [PW-1:0] p;
          p = mk_pkt();
          src_q[i].push_back(p);
          o = route(p, nx);
          exp_q[o][i].push_back(nx);
          sent++;
        end
      spike_valid = cyc < 28000 && ($urandom_range(0, 4) == 0 || phase_block);
      spike_pkt = mk_pkt();
      out_ren = phase_block ? 4'b0 : 4'($urandom);
      drive_inputs();
      #1;
      if (spike_valid) begin
        if (local_overflow) overflows++;
        else begin
          o = route(spike_pkt, nx);
          exp_q[o][4].push_back(nx);
          sent++;
        end
      end
      @(posedge clk);
      // sample handshakes at the clock edge
      for (int i = 0; i < 4; i++) begin
        if (in_ren[i]) begin
          chk(src_q[i].size() > 0, "pop only a valid input");
          void'(src_q[i].pop_front());
        end else if (in_valid[i]) stalls++;
      end
      for (int k = 0; k < 4; k++)
        if (out_valid[k] && out_ren[k]) begin
          bit found;
          found = 0;
          for (int i = 0; i < 5 && !found; i++)
            if (exp_q[k][i].size() > 0 && exp_q[k][i][0] == out_pkt[k]) begin
              void'(exp_q[k][i].pop_front()); found = 1;
            end
          chk(found, $sformatf("packet %h on output %0d expected (in order)", out_pkt[k], k));
          n_out[k]++; received++;
        end
      if (deliver_valid) begin
        bit found;
          found = 0;
        for (int i = 0; i < 5 && !found; i++)
          if (exp_q[4][i].size() > 0 && exp_q[4][i][0][PLW-1:0] == deliver_payload) begin
            void'(exp_q[4][i].pop_front()); found = 1;
          end
        chk(found, $sformatf("local payload %h expected", deliver_payload));
        n_out[4]++; received++;
      end
    end
    for (int k = 0; k < 5; k++)
      for (int i = 0; i < 5; i++)
        chk(exp_q[k][i].size() == 0, $sformatf("output %0d from %0d drained", k, i));
    chk(received == sent, $sformatf("every packet delivered once (%0d/%0d)", received, sent));
    for (int k = 0; k < 5; k++) chk(n_out[k] > 0, $sformatf("output %0d used", k));
    chk(stalls > 0, "back-pressure stalls happened");
    chk(overflows > 0, "local overflow happened");
    $display("router: sent %0d, stalls %0d, overflows %0d, per output %p", sent, stalls, overflows, n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
