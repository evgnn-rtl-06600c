// graph_readout: grid-based graph readout. The 120x100 sensor is cut into
// 16x16-pixel cells, an 8x7 grid (the right column and bottom row are
// partial). For every cell and each of the 32 last-layer channels it keeps
// the maximum feature over all events that fell into the cell. Past
// events' features never change, so the maximum is updated incrementally:
// upd with the new event's (x, y) and its last-layer features folds them
// into cell (x/16, y/16) in one cycle. clear sets every cell to 0 (features
// are non-negative after ReLU, so 0 is also the value of an empty cell).
// The FC head reads the flattened 56*32 vector through a synchronous port,
// element k = cell*32 + channel, cell = (y/16)*8 + x/16.
// Grid size follows the published design; the incremental update, the zero
// initial value and the flattening order are this design's own choices.
// Lint note: rst_n resets the flops asynchronously and also disables the
// assertions (disable iff), which a linter reports as a net used both
// synchronously and asynchronously; the assertions only sample it, so this
// warning stands.
module graph_readout
  import evgnn_pkg::*;
#(
  parameter int unsigned NCH = COUT3
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic                        upd,
  input  logic [XW-1:0]               x,
  input  logic [YW-1:0]               y,
  input  logic signed [7:0]           feat  [NCH],
  input  logic [$clog2(NCELLS*NCH)-1:0] raddr,
  output logic signed [7:0]           rdata
);
  localparam int unsigned CA = $clog2(NCELLS);
  localparam int unsigned MA = $clog2(NCH);

  logic signed [7:0] grid [NCELLS][NCH];
  logic [CA-1:0]     cidx;

  assign cidx = CA'(y >> CELL_LOG2) * CA'(GRID_X) + CA'(x >> CELL_LOG2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NCELLS; c++)
        for (int m = 0; m < NCH; m++) grid[c][m] <= '0;
    end else if (clear) begin
      for (int c = 0; c < NCELLS; c++)
        for (int m = 0; m < NCH; m++) grid[c][m] <= '0;
    end else if (upd) begin
      for (int m = 0; m < NCH; m++)
        if (feat[m] > grid[cidx][m]) grid[cidx][m] <= feat[m];
    end
  end

  always_ff @(posedge clk)
    rdata <= grid[raddr[CA+MA-1:MA]][raddr[MA-1:0]];

  a_cell_range: assert property (@(posedge clk) disable iff (!rst_n) upd |-> cidx < CA'(NCELLS));
endmodule
