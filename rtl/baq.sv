// baq: bias, activation, quantization of one layer's aggregated output.
// Per channel: v = agg + bias; ReLU; arithmetic right shift by shift (the
// requantization scale, a power of two set per layer); saturate to 127.
// Result is an INT8 feature in 0..127. Purely combinational.
// The bias-ReLU-INT8 sequence follows the published design; the
// power-of-two scale and the saturation are this design's own choices.
module baq #(
  parameter int unsigned COUT  = 32,
  parameter int unsigned ACC_W = 32
) (
  input  logic signed [ACC_W-1:0] agg  [COUT],
  input  logic signed [ACC_W-1:0] bias [COUT],
  input  logic [4:0]              shift,
  output logic signed [7:0]       y    [COUT]
);
  always_comb begin
    for (int m = 0; m < COUT; m++) begin
      logic signed [ACC_W:0] v;
      v = (ACC_W+1)'(agg[m]) + (ACC_W+1)'(bias[m]);
      if (v < 0) v = '0;
      v = v >>> shift;
      y[m] = (v > 127) ? 8'sd127 : 8'(v);
    end
  end
endmodule
