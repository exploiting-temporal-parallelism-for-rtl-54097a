// stream_fifo -- the FIFO queue that joins every pair of dataflow modules.
//
// A synchronous first-word-fall-through FIFO with valid/ready handshakes on
// both sides. A word pushed in cycle n is visible at out_data in cycle n+1.
// Push and pop may happen in the same cycle, also when the FIFO is full
// (in_ready then follows out_ready), so a chain of these FIFOs sustains one
// word per cycle. Storage is a plain array of DEPTH words indexed by
// wrapping read and write pointers, which maps onto LUT-RAM or block RAM.
//
// The paper states only that modules communicate exclusively through FIFO
// queues; width, depth, handshake and the full-and-pop pass are this
// design's choices. Reset (active low, synchronous) empties the FIFO.
module stream_fifo #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic [AW:0]      count;
  logic             push, pop;

  assign out_valid = (count != 0);
  assign out_data  = mem[rd_ptr];
  assign in_ready  = (count < (AW+1)'(DEPTH)) || out_ready;
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] next_ptr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // A valid word must stay put until it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n) (out_valid && !out_ready) |=> (out_valid && $stable(out_data));
  endproperty
  a_hold: assert property (p_hold);
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));

endmodule
