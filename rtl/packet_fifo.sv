// packet_fifo: small synchronous FIFO used for every router buffer.
//
// DEPTH entries of WIDTH bits. The writer sees 'full'; the reader sees
// 'valid' (not empty) and the head word 'rdata', and pops with 'ren'. In the
// mesh the reader is the neighbouring router, so the receiving core controls
// the read enable of the sending core's FIFO: that is how back-pressure moves
// from core to core. A push into a full FIFO or a pop from an empty one is a
// protocol error and is caught by assertions. Pointers reset to empty.
module packet_fifo #(
  parameter int unsigned WIDTH = 30,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wen,
  input  logic [WIDTH-1:0] wdata,
  output logic             full,
  input  logic             ren,
  output logic [WIDTH-1:0] rdata,
  output logic             valid
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PTR_W-1:0] rptr, wptr;
  logic [PTR_W:0]   count;

  function automatic logic [PTR_W-1:0] next_ptr(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  assign full  = (count == (PTR_W + 1)'(DEPTH));
  assign valid = (count != '0);
  assign rdata = mem[rptr];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rptr  <= '0;
      wptr  <= '0;
      count <= '0;
    end else begin
      if (wen) wptr <= next_ptr(wptr);
      if (ren) rptr <= next_ptr(rptr);
      case ({wen, ren})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (wen) mem[wptr] <= wdata;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) wen |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) ren |-> valid);

endmodule
