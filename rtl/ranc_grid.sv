// ranc_grid: the top of the design, a DIM_X x DIM_Y two-dimensional mesh of
// RANC cores that all advance on one global tick.
//
// Core (x, y) sits in column x and row y; x grows to the east and y to the
// north, matching the packet convention that positive dx/dy travel east/
// north. Each core's east output feeds the west input of core (x+1, y) and
// so on; the receiving router pops the sender's FIFO, so back-pressure crosses
// core boundaries. Links that leave the mesh are brought out as ports so a
// host interface (the paper uses AXI4 on the FPGA) can inject input spikes
// and collect output spikes:
//   edge_in_*  [side][k]   packets entering core k of that side
//                          (side W/E: k = row y; side N/S: k = column x);
//                          edge_in_ren pops the external source
//   edge_out_* [side][k]   packets leaving the mesh; the host pops with
//                          edge_out_ren
// Sides are indexed by dir_t (E, W, N, S). A packet injected on the west edge
// of row y is routed from core (0, y) by its dx/dy, exactly as if a core west
// of the mesh had sent it. The configuration port writes word cfg_addr of
// the CSRAM of core (cfg_x, cfg_y); use it while the mesh is idle.
// Status vectors are indexed y*DIM_X + x. The mesh size is not fixed by the
// paper (its FPGA sweep spans 1x1 to 24x23 cores); 4x4 is this design's
// default.
module ranc_grid
  import ranc_pkg::*;
#(
  parameter int unsigned DIM_X       = 4,
  parameter int unsigned DIM_Y       = 4,
  parameter int unsigned NUM_AXONS   = DEF_NUM_AXONS,
  parameter int unsigned NUM_NEURONS = DEF_NUM_NEURONS,
  parameter int unsigned NUM_WEIGHTS = DEF_NUM_WEIGHTS,
  parameter int unsigned NUM_TICKS   = DEF_NUM_TICKS,
  parameter int unsigned WEIGHT_W    = DEF_WEIGHT_W,
  parameter int unsigned POT_W       = DEF_POT_W,
  parameter int unsigned LEAK_W      = DEF_LEAK_W,
  parameter int unsigned DX_W        = DEF_DX_W,
  parameter int unsigned DY_W        = DEF_DY_W,
  parameter int unsigned FIFO_DEPTH  = 4,
  localparam int unsigned NCORES     = DIM_X * DIM_Y,
  localparam int unsigned EDGE_N     = (DIM_X > DIM_Y) ? DIM_X : DIM_Y,
  localparam int unsigned AXON_W     = (NUM_AXONS > 1) ? $clog2(NUM_AXONS) : 1,
  localparam int unsigned NEURON_W   = (NUM_NEURONS > 1) ? $clog2(NUM_NEURONS) : 1,
  localparam int unsigned TICK_W     = (NUM_TICKS > 1) ? $clog2(NUM_TICKS) : 1,
  localparam int unsigned PKT_W      = DX_W + DY_W + AXON_W + TICK_W,
  localparam int unsigned WORD_W     = NUM_AXONS + 5 * POT_W + NUM_WEIGHTS * WEIGHT_W
                                       + LEAK_W + 1 + PKT_W,
  localparam int unsigned CX_W       = (DIM_X > 1) ? $clog2(DIM_X) : 1,
  localparam int unsigned CY_W       = (DIM_Y > 1) ? $clog2(DIM_Y) : 1
) (
  input  logic                                          clk,
  input  logic                                          rst_n,
  input  logic                                          tick,
  // CSRAM configuration
  input  logic                                          cfg_we,
  input  logic [CX_W-1:0]                               cfg_x,
  input  logic [CY_W-1:0]                               cfg_y,
  input  logic [NEURON_W-1:0]                           cfg_addr,
  input  logic [WORD_W-1:0]                             cfg_data,
  // mesh edge links, [side][position]
  input  logic [NUM_MESH_DIRS-1:0][EDGE_N-1:0]            edge_in_valid,
  input  logic [NUM_MESH_DIRS-1:0][EDGE_N-1:0][PKT_W-1:0] edge_in_pkt,
  output logic [NUM_MESH_DIRS-1:0][EDGE_N-1:0]            edge_in_ren,
  output logic [NUM_MESH_DIRS-1:0][EDGE_N-1:0]            edge_out_valid,
  output logic [NUM_MESH_DIRS-1:0][EDGE_N-1:0][PKT_W-1:0] edge_out_pkt,
  input  logic [NUM_MESH_DIRS-1:0][EDGE_N-1:0]            edge_out_ren,
  // status, index y*DIM_X + x
  output logic [NCORES-1:0]                             core_busy,
  output logic [NCORES-1:0]                             tick_error,
  output logic [NCORES-1:0]                             sched_error,
  output logic [NCORES-1:0]                             local_overflow
);

  localparam int E = int'(DIR_EAST);
  localparam int W = int'(DIR_WEST);
  localparam int N = int'(DIR_NORTH);
  localparam int S = int'(DIR_SOUTH);

  // Per-core link wires, [core][dir].
  logic [NCORES-1:0][NUM_MESH_DIRS-1:0]            c_in_valid, c_in_ren;
  logic [NCORES-1:0][NUM_MESH_DIRS-1:0][PKT_W-1:0] c_in_pkt;
  logic [NCORES-1:0][NUM_MESH_DIRS-1:0]            c_out_valid, c_out_ren;
  logic [NCORES-1:0][NUM_MESH_DIRS-1:0][PKT_W-1:0] c_out_pkt;

  for (genvar y = 0; y < DIM_Y; y++) begin : g_row
    for (genvar x = 0; x < DIM_X; x++) begin : g_col
      localparam int C = y * DIM_X + x;

      ranc_core #(
        .NUM_AXONS(NUM_AXONS), .NUM_NEURONS(NUM_NEURONS), .NUM_WEIGHTS(NUM_WEIGHTS),
        .NUM_TICKS(NUM_TICKS), .WEIGHT_W(WEIGHT_W), .POT_W(POT_W), .LEAK_W(LEAK_W),
        .DX_W(DX_W), .DY_W(DY_W), .FIFO_DEPTH(FIFO_DEPTH)
      ) u_core (
        .clk, .rst_n, .tick,
        .cfg_we(cfg_we && cfg_x == CX_W'(x) && cfg_y == CY_W'(y)),
        .cfg_addr, .cfg_data,
        .in_valid(c_in_valid[C]), .in_pkt(c_in_pkt[C]), .in_ren(c_in_ren[C]),
        .out_valid(c_out_valid[C]), .out_pkt(c_out_pkt[C]), .out_ren(c_out_ren[C]),
        .busy(core_busy[C]), .tick_error(tick_error[C]),
        .sched_error(sched_error[C]), .local_overflow(local_overflow[C])
      );

      // West side: input from the core to the west (its east output).
      if (x > 0) begin : g_w
        assign c_in_valid[C][W] = c_out_valid[C-1][E];
        assign c_in_pkt[C][W]   = c_out_pkt[C-1][E];
        assign c_out_ren[C][W]  = c_in_ren[C-1][E];
      end else begin : g_w_edge
        assign c_in_valid[C][W]    = edge_in_valid[W][y];
        assign c_in_pkt[C][W]      = edge_in_pkt[W][y];
        assign edge_in_ren[W][y]   = c_in_ren[C][W];
        assign edge_out_valid[W][y] = c_out_valid[C][W];
        assign edge_out_pkt[W][y]   = c_out_pkt[C][W];
        assign c_out_ren[C][W]     = edge_out_ren[W][y];
      end
      if (x < DIM_X - 1) begin : g_e
        assign c_in_valid[C][E] = c_out_valid[C+1][W];
        assign c_in_pkt[C][E]   = c_out_pkt[C+1][W];
        assign c_out_ren[C][E]  = c_in_ren[C+1][W];
      end else begin : g_e_edge
        assign c_in_valid[C][E]    = edge_in_valid[E][y];
        assign c_in_pkt[C][E]      = edge_in_pkt[E][y];
        assign edge_in_ren[E][y]   = c_in_ren[C][E];
        assign edge_out_valid[E][y] = c_out_valid[C][E];
        assign edge_out_pkt[E][y]   = c_out_pkt[C][E];
        assign c_out_ren[C][E]     = edge_out_ren[E][y];
      end
      if (y > 0) begin : g_s
        assign c_in_valid[C][S] = c_out_valid[C-DIM_X][N];
        assign c_in_pkt[C][S]   = c_out_pkt[C-DIM_X][N];
        assign c_out_ren[C][S]  = c_in_ren[C-DIM_X][N];
      end else begin : g_s_edge
        assign c_in_valid[C][S]     = edge_in_valid[S][x];
        assign c_in_pkt[C][S]       = edge_in_pkt[S][x];
        assign edge_in_ren[S][x]    = c_in_ren[C][S];
        assign edge_out_valid[S][x] = c_out_valid[C][S];
        assign edge_out_pkt[S][x]   = c_out_pkt[C][S];
        assign c_out_ren[C][S]      = edge_out_ren[S][x];
      end
      if (y < DIM_Y - 1) begin : g_n
        assign c_in_valid[C][N] = c_out_valid[C+DIM_X][S];
        assign c_in_pkt[C][N]   = c_out_pkt[C+DIM_X][S];
        assign c_out_ren[C][N]  = c_in_ren[C+DIM_X][S];
      end else begin : g_n_edge
        assign c_in_valid[C][N]     = edge_in_valid[N][x];
        assign c_in_pkt[C][N]       = edge_in_pkt[N][x];
        assign edge_in_ren[N][x]    = c_in_ren[C][N];
        assign edge_out_valid[N][x] = c_out_valid[C][N];
        assign edge_out_pkt[N][x]   = c_out_pkt[C][N];
        assign c_out_ren[C][N]      = edge_out_ren[N][x];
      end
    end
  end

  // Edge positions beyond a non-square mesh's side length are unused.
  for (genvar k = 0; k < EDGE_N; k++) begin : g_unused
    if (k >= DIM_Y) begin : g_ew
      assign edge_in_ren[W][k]    = 1'b0;
      assign edge_in_ren[E][k]    = 1'b0;
      assign edge_out_valid[W][k] = 1'b0;
      assign edge_out_valid[E][k] = 1'b0;
      assign edge_out_pkt[W][k]   = '0;
      assign edge_out_pkt[E][k]   = '0;
    end
    if (k >= DIM_X) begin : g_ns
      assign edge_in_ren[N][k]    = 1'b0;
      assign edge_in_ren[S][k]    = 1'b0;
      assign edge_out_valid[N][k] = 1'b0;
      assign edge_out_valid[S][k] = 1'b0;
      assign edge_out_pkt[N][k]   = '0;
      assign edge_out_pkt[S][k]   = '0;
    end
  end

endmodule
