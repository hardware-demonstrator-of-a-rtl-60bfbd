// hit_fifo: the per-chamber "DT Hits FIFO". Hit rows (one hit per tube layer
// and clock) are written as they arrive and wait here until the segment
// finder has received the pre-trigger seed and asks for them.
// The paper names the FIFO and says it is built from block RAM; depth, width
// and the drop-on-full policy are this design's choice.
// Interface: synchronous push/pop, first-word-fall-through read (`rd_data`
// shows the oldest row whenever `empty` is low; `pop` removes it). A push while
// full is dropped and raises the sticky `overflow` flag until reset. Storage
// is a plain array with a registered write, suitable for block RAM inference
// of the memory with an output register added if needed.
module hit_fifo #(
  parameter int WIDTH = 258,
  parameter int DEPTH = 64
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             push,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             pop,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [$clog2(DEPTH):0] count,
  output logic             overflow
);
  localparam int AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             do_push, do_pop;

  assign empty   = (count == 0);
  assign full    = (count == (AW+1)'(DEPTH));
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign rd_data = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr   <= '0;
      rd_ptr   <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_push) wr_ptr <= wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= rd_ptr + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
      if (push && full) overflow <= 1'b1;
    end
  end

  property p_no_pop_when_empty;
    @(posedge clk) disable iff (rst) pop |-> !empty;
  endproperty
  a_no_pop_when_empty: assert property (p_no_pop_when_empty)
    else $error("hit_fifo: pop while empty");
endmodule
