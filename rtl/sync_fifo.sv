// sync_fifo: single-clock first-word-fall-through FIFO, used for the two 500 x 1141 frame
// buffers of the TDSCAN test firmware (one in front of the TDSCAN core, one behind it).
//
// The storage is a plain array written at the tail; the head word is always visible on dout
// while empty is low (first-word fall-through), and pop removes it. DEPTH need not be a power
// of two: the pointers wrap at DEPTH. count gives the fill level. The paper gives the depth and
// width (500 x 1141); the single clock and the fall-through read are this design's choices
// (the paper's firmware also has clock-domain crossings that its diagram leaves out).
//
// Timing: a word pushed at edge e is visible on dout after e. push while full and pop while
// empty are ignored, and flagged by assertions.
module sync_fifo #(
  parameter int unsigned WIDTH = 1142,   // 1141 frame bits + tlast
  parameter int unsigned DEPTH = 500,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CNTW = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  output logic             full,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic [CNTW-1:0]  count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             do_push, do_pop;

  assign full    = (count == CNTW'(DEPTH));
  assign empty   = (count == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rd_ptr];

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= next_ptr(wr_ptr);
      if (do_pop)  rd_ptr <= next_ptr(rd_ptr);
      count <= count + CNTW'(do_push) - CNTW'(do_pop);
    end
  end

  assert property (@(posedge clk) disable iff (rst) !(push && full));
  assert property (@(posedge clk) disable iff (rst) !(pop && empty));

endmodule
