// core_sram: the per-core configuration and state memory (CSRAM).
//
// NUM_NEURONS words of WORD_W bits; word j holds everything neuron j needs
// for one tick (synaptic connections, potential, reset values, weights, leak,
// thresholds, reset mode and spike destination), so the controller reads each
// neuron once and writes it back once per tick. The field layout is defined by
// ranc_core. It is a simple dual-port memory: one synchronous read port (data
// appears the cycle after re/raddr) and one write port. A read and a write to
// the same address in one cycle return the old word. The array can be
// preloaded from a hex file (INIT_FILE, path relative to the simulator's
// working directory) the way an FPGA build bakes the configuration into block
// RAM; otherwise it starts at zero and is filled through the write port.
module core_sram #(
  parameter int unsigned NUM_NEURONS = 256,
  parameter int unsigned WORD_W      = 377,
  parameter string       INIT_FILE   = "",
  localparam int unsigned ADDR_W     = (NUM_NEURONS > 1) ? $clog2(NUM_NEURONS) : 1
) (
  input  logic              clk,
  input  logic              re,
  input  logic [ADDR_W-1:0] raddr,
  output logic [WORD_W-1:0] rdata,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [WORD_W-1:0] wdata
);

  logic [WORD_W-1:0] mem [NUM_NEURONS];

  initial begin
    for (int i = 0; i < NUM_NEURONS; i++) mem[i] = '0;
    if (INIT_FILE != "") $readmemh(INIT_FILE, mem);
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
