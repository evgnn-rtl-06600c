// aggregator: max aggregation over neighbors, one max-register per output
// channel. init (start of a new event) empties it; each en pulse (once per
// neighbor, when the MatVec unit holds that neighbor's messages) keeps the
// larger of stored and new message per channel. agg[m] is the running
// maximum, or 0 while no neighbor has been seen: an event without neighbors
// aggregates to 0, as max-aggregation libraries commonly define the empty
// case (this design's choice; the published design does not say).
module aggregator #(
  parameter int unsigned COUT  = 32,
  parameter int unsigned ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    init,
  input  logic                    en,
  input  logic signed [ACC_W-1:0] msg [COUT],
  output logic signed [ACC_W-1:0] agg [COUT]
);
  logic signed [ACC_W-1:0] mx [COUT];
  logic                    seen;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seen <= 1'b0;
      for (int m = 0; m < COUT; m++) mx[m] <= '0;
    end else if (init) begin
      seen <= 1'b0;
    end else if (en) begin
      seen <= 1'b1;
      for (int m = 0; m < COUT; m++)
        if (!seen || msg[m] > mx[m]) mx[m] <= msg[m];
    end
  end

  always_comb
    for (int m = 0; m < COUT; m++) agg[m] = seen ? mx[m] : '0;
endmodule
