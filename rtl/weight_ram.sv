// weight_ram: weight memory of one layer (a block RAM on an FPGA). Word k
// holds column k of the layer's weight matrix, the COUT INT8 weights that
// multiply input element k, so the MatVec unit gets all the weights it needs
// for one accumulation step in a single read. Writes come from the host one
// weight at a time (lane m of word k), which suits loading through 32-bit
// registers. Read is synchronous: rdata follows raddr by one cycle.
// The per-layer BRAM follows the published design; the column-per-word
// organisation and single-weight writes are this design's own choices.
module weight_ram #(
  parameter int unsigned DEPTH = 34,   // C_in + 2
  parameter int unsigned COUT  = 32
) (
  input  logic                              clk,
  input  logic                              we,
  input  logic [$clog2(DEPTH)-1:0]          waddr,
  input  logic [$clog2(COUT > 1 ? COUT : 2)-1:0] wlane,
  input  logic signed [7:0]                 wdata,
  input  logic                              re,
  input  logic [$clog2(DEPTH)-1:0]          raddr,
  output logic signed [7:0]                 rdata [COUT]
);
  logic [COUT*8-1:0] mem [DEPTH];
  logic [COUT*8-1:0] rword;

  always_ff @(posedge clk) begin
    if (we) mem[waddr][wlane*8 +: 8] <= wdata;
    if (re) rword <= mem[raddr];
  end

  always_comb
    for (int m = 0; m < COUT; m++) rdata[m] = rword[m*8 +: 8];
endmodule
