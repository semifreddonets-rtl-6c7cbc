// sf_fifo: synchronous first-in first-out buffer with show-ahead output.
//
// Used in two places: as the input buffer of every 3x3 window generator and
// on the identity half of a regular block, and as the core-sync buffer that
// holds a trainable core's stream until the frozen core reaches the same
// pixel (the paper keeps the cores "in synch with each other in the
// pipeline" but does not say how; a FIFO is this design's choice).
//
// Interface: push/din write at the clock edge when not full; dout shows the
// oldest entry whenever empty = 0 and pop removes it at the clock edge.
// Push and pop may happen in the same cycle. A push into a full FIFO is
// dropped and sets the sticky overflow flag; a pop from an empty FIFO sets
// the sticky underflow flag. level is the number of entries held.
module sf_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [WIDTH-1:0]           din,
  input  logic                       pop,
  output logic [WIDTH-1:0]           dout,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] level,
  output logic                       overflow,
  output logic                       underflow
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic             do_push, do_pop;

  assign empty   = (level == 0);
  assign full    = (level == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);
  assign dout    = mem[rptr];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr      <= '0;
      rptr      <= '0;
      level     <= '0;
      overflow  <= 1'b0;
      underflow <= 1'b0;
    end else begin
      if (do_push) wptr <= inc(wptr);
      if (do_pop)  rptr <= inc(rptr);
      level <= level + (do_push ? 1'b1 : 1'b0) - (do_pop ? 1'b1 : 1'b0);
      if (push && !do_push) overflow  <= 1'b1;
      if (pop && empty)     underflow <= 1'b1;
    end
  end
endmodule
