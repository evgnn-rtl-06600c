// sync_fifo: single-clock first-word-fall-through FIFO. Used as the
// candidate-events buffer between spatial and temporal neighbor search, as the
// neighbor buffer in front of the graph convolution, and as the new-event
// FIFO behind the host registers. The head entry is visible on rdata while
// empty is low; a pop removes it at the clock edge. Push into a full FIFO and
// pop from an empty one are ignored (and flagged by assertions). flush
// empties the FIFO in one cycle. Depth must be a power of two.
// Lint note: rst_n resets the flops asynchronously and also disables the
// assertions (disable iff), which a linter reports as a net used both
// synchronously and asynchronously; the assertions only sample it, so this
// warning stands.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             flush,
  input  logic             push,
  input  logic [WIDTH-1:0] wdata,
  input  logic             pop,
  output logic [WIDTH-1:0] rdata,
  output logic             empty,
  output logic             full,
  output logic             almost_full,   // at most one free slot left
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;

  assign empty       = (count == 0);
  assign full        = (count == (AW+1)'(DEPTH));
  assign almost_full = (count >= (AW+1)'(DEPTH - 1));
  assign rdata       = mem[rptr];

  wire do_push = push && !full;
  wire do_pop  = pop && !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else if (flush) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_push) wptr <= wptr + 1'b1;
      if (do_pop)  rptr <= rptr + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push && !flush) mem[wptr] <= wdata;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !flush));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty && !flush));
endmodule
