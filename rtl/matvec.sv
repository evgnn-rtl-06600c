// matvec: the output-parallel MatVec unit. COUT multiply-accumulate engines,
// one per output channel, each with its partial-sum register. Every enabled
// cycle all engines take the same input element x and their own weight
// w[m], and add x*w[m] to their partial sum; with first high the partial sum
// restarts at x*w[m]. A matrix-vector product with a length-N input thus takes
// N enabled cycles (C_in + 2 per neighbor in a GNN layer, 1792 in the FC
// head). acc[m] is valid the cycle after the last enabled cycle.
// Structure follows the published design; the 32-bit accumulator is this
// design's own choice (no overflow for 1792 products of two INT8 values).
module matvec #(
  parameter int unsigned COUT  = 32,
  parameter int unsigned ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    first,
  input  logic signed [7:0]       x,
  input  logic signed [7:0]       w   [COUT],
  output logic signed [ACC_W-1:0] acc [COUT]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < COUT; m++) acc[m] <= '0;
    end else if (en) begin
      for (int m = 0; m < COUT; m++)
        acc[m] <= (first ? ACC_W'(0) : acc[m]) + ACC_W'(x * w[m]);
    end
  end
endmodule
