// packet_router: dimension-order (XY) router of one RANC core.
//
// A spike packet is {dx, dy, axon, tick_offset}, with dx/dy the signed offset
// of the destination core relative to the current one. Routing first removes
// dx, then dy, one hop at a time:
//   dx > 0 -> east, dx-1     dx < 0 -> west, dx+1
//   dx = 0, dy > 0 -> north, dy-1   dy < 0 -> south, dy+1
//   dx = dy = 0 -> local core (the scheduler), dx/dy dropped
// (The paper's text states "north and east are positive"; its pseudo-code
// sends dx < 0 east. This design follows the text.)
//
// Buffering: one FIFO per output (east, west, north, south, local) and one
// for packets produced by the local neurons. Inputs 0..3 are the heads of the
// neighbours' output FIFOs facing this core (in_valid/in_pkt); this router
// pops them with in_ren, i.e. the receiving core controls the read enable of
// the sending core's FIFO. A packet is taken only when its output FIFO has
// room, so a full FIFO stalls its senders and back-pressure spreads through
// the mesh, as the paper describes. Each output accepts at most one packet per
// cycle, granted round-robin among the inputs that want it. The local output
// FIFO drains into the scheduler every cycle. The neuron side cannot be
// stalled (the controller has no wait state), so a spike arriving at a full
// local-input FIFO is dropped and flags 'local_overflow' for one cycle.
// FIFO depth, arbitration and the overflow flag are this design's choices.
module packet_router
  import ranc_pkg::*;
#(
  parameter int unsigned DX_W       = DEF_DX_W,
  parameter int unsigned DY_W       = DEF_DY_W,
  parameter int unsigned PAYLOAD_W  = 12,   // axon index + tick offset
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned PKT_W     = DX_W + DY_W + PAYLOAD_W
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  // packets from the four neighbours (index by dir_t: E, W, N, S)
  input  logic [NUM_MESH_DIRS-1:0]                in_valid,
  input  logic [NUM_MESH_DIRS-1:0][PKT_W-1:0]     in_pkt,
  output logic [NUM_MESH_DIRS-1:0]                in_ren,
  // packets to the four neighbours; they drive out_ren
  output logic [NUM_MESH_DIRS-1:0]                out_valid,
  output logic [NUM_MESH_DIRS-1:0][PKT_W-1:0]     out_pkt,
  input  logic [NUM_MESH_DIRS-1:0]                out_ren,
  // local neurons -> router
  input  logic                                    spike_valid,
  input  logic [PKT_W-1:0]                        spike_pkt,
  output logic                                    local_overflow,
  // router -> local scheduler
  output logic                                    deliver_valid,
  output logic [PAYLOAD_W-1:0]                    deliver_payload
);

  localparam int unsigned NIN = NUM_PORTS;  // E, W, N, S, local

  // ---- local input FIFO -------------------------------------------------
  logic             lin_full, lin_valid, lin_ren;
  logic [PKT_W-1:0] lin_pkt;

  packet_fifo #(.WIDTH(PKT_W), .DEPTH(FIFO_DEPTH)) u_local_in (
    .clk, .rst_n,
    .wen(spike_valid && !lin_full), .wdata(spike_pkt), .full(lin_full),
    .ren(lin_ren), .rdata(lin_pkt), .valid(lin_valid)
  );
  assign local_overflow = spike_valid && lin_full;

  // ---- route computation for every input head ----------------------------
  logic [NIN-1:0]            head_valid;
  logic [NIN-1:0][PKT_W-1:0] head_pkt;
  dir_t                      head_dir [NIN];
  logic [NIN-1:0][PKT_W-1:0] head_next;   // packet with the hop applied

  always_comb begin
    for (int i = 0; i < NUM_MESH_DIRS; i++) begin
      head_valid[i] = in_valid[i];
      head_pkt[i]   = in_pkt[i];
    end
    head_valid[DIR_LOCAL] = lin_valid;
    head_pkt[DIR_LOCAL]   = lin_pkt;
    for (int i = 0; i < NIN; i++) begin
      logic signed [DX_W-1:0] dx;
      logic signed [DY_W-1:0] dy;
      logic [PAYLOAD_W-1:0]   pl;
      {dx, dy, pl} = head_pkt[i];
      if (dx > 0) begin
        head_dir[i] = DIR_EAST;  dx = dx - 1'b1;
      end else if (dx < 0) begin
        head_dir[i] = DIR_WEST;  dx = dx + 1'b1;
      end else if (dy > 0) begin
        head_dir[i] = DIR_NORTH; dy = dy - 1'b1;
      end else if (dy < 0) begin
        head_dir[i] = DIR_SOUTH; dy = dy + 1'b1;
      end else begin
        head_dir[i] = DIR_LOCAL;
      end
      head_next[i] = {dx, dy, pl};
    end
  end

  // ---- per-output round-robin arbitration --------------------------------
  logic [NIN-1:0]            ofifo_full;
  logic [NIN-1:0]            ofifo_wen;
  logic [NIN-1:0][PKT_W-1:0] ofifo_wdata;
  logic [NIN-1:0][2:0]       rr_ptr;
  logic [NIN-1:0][2:0]       grant_idx;
  logic [NIN-1:0]            grant_any;
  logic [NIN-1:0]            pop;

  always_comb begin
    pop         = '0;
    ofifo_wen   = '0;
    ofifo_wdata = '0;
    grant_idx   = '0;
    grant_any   = '0;
    for (int o = 0; o < NIN; o++) begin
      for (int k = 0; k < NIN; k++) begin
        int unsigned i;
        i = (int'(rr_ptr[o]) + k) % NIN;
        if (!grant_any[o] && head_valid[i] && head_dir[i] == dir_t'(o)) begin
          grant_any[o] = 1'b1;
          grant_idx[o] = 3'(i);
        end
      end
      if (grant_any[o] && !ofifo_full[o]) begin
        ofifo_wen[o]           = 1'b1;
        ofifo_wdata[o]         = head_next[grant_idx[o]];
        pop[grant_idx[o]]      = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rr_ptr <= '0;
    end else begin
      for (int o = 0; o < NIN; o++)
        if (ofifo_wen[o]) rr_ptr[o] <= (grant_idx[o] == 3'(NIN - 1)) ? '0 : grant_idx[o] + 1'b1;
    end
  end

  assign in_ren  = pop[NUM_MESH_DIRS-1:0];
  assign lin_ren = pop[DIR_LOCAL];

  // ---- output FIFOs ------------------------------------------------------
  logic [NIN-1:0]            ofifo_valid;
  logic [NIN-1:0][PKT_W-1:0] ofifo_rdata;
  logic [NIN-1:0]            ofifo_ren;

  for (genvar o = 0; o < NIN; o++) begin : g_out
    packet_fifo #(.WIDTH(PKT_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .wen(ofifo_wen[o]), .wdata(ofifo_wdata[o]), .full(ofifo_full[o]),
      .ren(ofifo_ren[o]), .rdata(ofifo_rdata[o]), .valid(ofifo_valid[o])
    );
  end

  always_comb begin
    for (int o = 0; o < NUM_MESH_DIRS; o++) begin
      out_valid[o]    = ofifo_valid[o];
      out_pkt[o]      = ofifo_rdata[o];
      ofifo_ren[o]    = out_ren[o] && ofifo_valid[o];
    end
    ofifo_ren[DIR_LOCAL] = ofifo_valid[DIR_LOCAL];
    deliver_valid        = ofifo_valid[DIR_LOCAL];
    deliver_payload      = ofifo_rdata[DIR_LOCAL][PAYLOAD_W-1:0];
  end

endmodule
