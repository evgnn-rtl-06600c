// evgnn_pkg: sizes, field widths and record types shared by the EvGNN
// accelerator. The sensor size (120x100), queue depth (16 entries of 32 bit),
// neighbor limit (16), the four layer shapes (1+2->16, 16+2->32, 32+2->32,
// 32+2->32), the 8x7 readout grid of 16x16-pixel cells and the 56*32->2 FC
// head follow the published design. The split of the 32-bit queue entry into
// timestamp, polarity and event index, the feature layout in DRAM and the
// register map are choices of this implementation.
package evgnn_pkg;

  // Sensor and event-queue geometry
  localparam int unsigned IMG_W   = 120;
  localparam int unsigned IMG_H   = 100;
  localparam int unsigned QDEPTH  = 16;
  localparam int unsigned XW      = 7;    // x coordinate bits (0..127)
  localparam int unsigned YW      = 7;    // y coordinate bits (0..127)
  localparam int unsigned TW      = 17;   // timestamp bits, 1 us LSB (131 ms range)
  localparam int unsigned NW      = 14;   // event index bits
  localparam int unsigned DW      = 4;    // |dx|, |dy| bits
  localparam int unsigned RSW     = 3;    // spatial radius register bits

  // Neighbor buffer
  localparam int unsigned DMAX    = 16;

  // GNN shape
  localparam int unsigned NLAYERS = 4;
  localparam int unsigned CIN0 = 1,  COUT0 = 16;
  localparam int unsigned CIN1 = 16, COUT1 = 32;
  localparam int unsigned CIN2 = 32, COUT2 = 32;
  localparam int unsigned CIN3 = 32, COUT3 = 32;
  localparam int unsigned MAX_STEPS = CIN3 + 2;   // longest layer: 34 MAC steps

  // Features of one event in DRAM: L0 out (16 B), L1 out (32 B), L2 out (32 B),
  // L3 out (32 B) = 112 B, padded to a 128-byte stride.
  localparam int unsigned FETCH_BYTES = COUT0 + COUT1 + COUT2;           // 80
  localparam int unsigned STORE_BYTES = COUT0 + COUT1 + COUT2 + COUT3;   // 112

  // Readout and FC head
  localparam int unsigned CELL_LOG2 = 4;            // 16x16-pixel cells
  localparam int unsigned GRID_X = 8;
  localparam int unsigned GRID_Y = 7;
  localparam int unsigned NCELLS = GRID_X * GRID_Y; // 56
  localparam int unsigned FC_IN  = NCELLS * COUT3;  // 1792
  localparam int unsigned NCLASS = 2;

  typedef struct packed {
    logic [TW-1:0] t;
    logic          p;
    logic [NW-1:0] n;
  } evq_entry_t;                                    // 32 bits

  typedef struct packed {
    logic [XW-1:0] x;
    logic [YW-1:0] y;
    logic [TW-1:0] t;
    logic          p;
  } event_t;

  typedef struct packed {
    evq_entry_t    e;
    logic [DW-1:0] adx;
    logic [DW-1:0] ady;
  } cand_t;

  typedef struct packed {
    logic [NW-1:0] n;
    logic          p;
    logic [DW-1:0] adx;
    logic [DW-1:0] ady;
  } nbr_t;

  typedef enum logic [3:0] {
    ST_IDLE    = 4'd0,
    ST_CLEAR   = 4'd1,
    ST_BUILD   = 4'd2,
    ST_CONV    = 4'd3,
    ST_READOUT = 4'd4,
    ST_FC      = 4'd5
  } stage_e;

endpackage
