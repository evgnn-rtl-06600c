// conv_layer: one simplified PointNet graph-convolution layer,
//   x_i^{l+1} = BAQ( max_{j in N(i)} Theta_l^T (x_j^l, |dx_ij|, |dy_ij|) ),
// built from message generation (weight RAM + MatVec unit), aggregation
// (running max per output channel) and BAQ (bias, ReLU, INT8).
//
// Timing, per neighbor: the caller presents step s = 0 .. CIN+1 with the
// matching input element x (features first, then |dx|, |dy|) and step_valid,
// first on s = 0, and nb_end on the caller's last step of the neighbor.
// The weight column is read in the same cycle and the MAC fires one cycle
// later; the aggregator takes the finished messages two cycles after nb_end.
// Steps with s >= CIN+2 are ignored, so several layers of different width
// can follow one common step counter (layer-parallel execution). ev_start
// clears the aggregator for a new event; y is valid three cycles after the
// last nb_end (or right after ev_start for an event without neighbors).
// While ext_sel is high the MatVec unit is lent out: its engines take
// ext_en/ext_first/ext_x/ext_w and the sums appear on mv_acc (the FC head
// uses layer 3's engines this way); the aggregator and y are untouched.
module conv_layer #(
  parameter int unsigned CIN   = 32,
  parameter int unsigned COUT  = 32,
  parameter int unsigned ACC_W = 32,
  parameter int unsigned SW    = 6    // width of the step index
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    ev_start,
  input  logic                    step_valid,
  input  logic [SW-1:0]           step,
  input  logic                    first,
  input  logic                    nb_end,
  input  logic signed [7:0]       x,
  // configuration
  input  logic                    w_we,
  input  logic [11:0]             w_idx,    // k*COUT + m
  input  logic signed [7:0]       w_data,
  input  logic signed [ACC_W-1:0] bias [COUT],
  input  logic [4:0]              shift,
  output logic signed [7:0]       y    [COUT],
  // shared use of the MatVec unit by another client (the FC head) while
  // the layer is idle: with ext_sel high the MAC engines take ext_en,
  // ext_first, ext_x and ext_w instead of the layer's own schedule
  input  logic                    ext_sel,
  input  logic                    ext_en,
  input  logic                    ext_first,
  input  logic signed [7:0]       ext_x,
  input  logic signed [7:0]       ext_w [COUT],
  output logic signed [ACC_W-1:0] mv_acc [COUT]
);
  localparam int unsigned DEPTH = CIN + 2;
  localparam int unsigned KA    = $clog2(DEPTH);
  localparam int unsigned MA    = $clog2(COUT);

  logic signed [7:0]       w_col [COUT];
  logic signed [ACC_W-1:0] msg   [COUT];
  logic signed [ACC_W-1:0] agg   [COUT];
  logic                    v_d, first_d, end_d, end_dd;
  logic signed [7:0]       x_d;

  wire in_range = step_valid && (step < SW'(DEPTH));

  weight_ram #(.DEPTH(DEPTH), .COUT(COUT)) u_w (
    .clk, .we(w_we), .waddr(KA'(w_idx >> MA)), .wlane(MA'(w_idx)), .wdata(w_data),
    .re(in_range), .raddr(KA'(step)), .rdata(w_col)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_d <= 1'b0; first_d <= 1'b0; end_d <= 1'b0; end_dd <= 1'b0; x_d <= '0;
    end else begin
      v_d     <= in_range;
      first_d <= first;
      x_d     <= x;
      end_d   <= nb_end && step_valid;
      end_dd  <= end_d;
    end
  end

  logic signed [7:0] mv_w [COUT];
  always_comb
    for (int m = 0; m < COUT; m++) mv_w[m] = ext_sel ? ext_w[m] : w_col[m];

  matvec #(.COUT(COUT), .ACC_W(ACC_W)) u_mv (
    .clk, .rst_n,
    .en(ext_sel ? ext_en : v_d), .first(ext_sel ? ext_first : first_d),
    .x(ext_sel ? ext_x : x_d), .w(mv_w), .acc(msg)
  );
  assign mv_acc = msg;

  aggregator #(.COUT(COUT), .ACC_W(ACC_W)) u_ag (
    .clk, .rst_n, .init(ev_start), .en(end_dd), .msg, .agg
  );

  baq #(.COUT(COUT), .ACC_W(ACC_W)) u_baq (.agg, .bias, .shift, .y);
endmodule
