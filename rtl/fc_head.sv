// fc_head: the FC prediction head, 56*32 -> 2. It streams the flattened
// readout vector element by element into a MatVec unit, using one MAC
// engine per class, so a prediction takes FC_IN = 1792 accumulation steps
// plus 3 cycles. The MatVec unit is not its own: while busy, mv_sel claims
// the engines of the graph convolution's layer-3 unit (idle at that time)
// and drives them through mv_en, mv_first, mv_x and mv_w; the sums come back
// on mv_acc. Logits are the 32-bit sums plus a 32-bit bias per class; the
// predicted class is the larger logit (ties give class 0).
// Interface: start pulse -> readout read addresses k = 0..1791 (rd_addr,
// data one cycle later on rd_data) -> done pulse with logits and pred.
// Weights are loaded by the host one at a time (w_idx = k*2 + class) into
// the FC head's own weight RAM.
// The layer shape and the reuse of the graph convolution's MatVec unit
// follow the published design; the borrowing handshake (a select signal
// while the lender is idle) is this design's own choice.
module fc_head
  import evgnn_pkg::*;
#(
  parameter int unsigned NIN   = FC_IN,
  parameter int unsigned NOUT  = NCLASS,
  parameter int unsigned ACC_W = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  output logic                        done,
  output logic                        busy,
  output logic [$clog2(NIN)-1:0]      rd_addr,
  input  logic signed [7:0]           rd_data,
  input  logic                        w_we,
  input  logic [12:0]                 w_idx,
  input  logic signed [7:0]           w_data,
  input  logic                        b_we,
  input  logic [$clog2(NOUT)-1:0]     b_idx,
  input  logic signed [ACC_W-1:0]     b_data,
  output logic signed [ACC_W-1:0]     logits [NOUT],
  output logic [$clog2(NOUT)-1:0]     pred,
  // MatVec unit on loan from the graph convolution (one engine per class)
  output logic                        mv_sel,
  output logic                        mv_en,
  output logic                        mv_first,
  output logic signed [7:0]           mv_x,
  output logic signed [7:0]           mv_w   [NOUT],
  input  logic signed [ACC_W-1:0]     mv_acc [NOUT]
);
  localparam int unsigned KA = $clog2(NIN);
  localparam int unsigned MA = $clog2(NOUT);

  logic signed [7:0]       w_col [NOUT];
  logic signed [ACC_W-1:0] acc   [NOUT];
  logic signed [ACC_W-1:0] bias  [NOUT];
  logic [KA-1:0]           k;
  logic                    run, v_d, first_d, last_d, fin;

  weight_ram #(.DEPTH(NIN), .COUT(NOUT)) u_w (
    .clk, .we(w_we), .waddr(KA'(w_idx >> MA)), .wlane(MA'(w_idx)), .wdata(w_data),
    .re(run), .raddr(k), .rdata(w_col)
  );

  assign mv_sel   = busy;
  assign mv_en    = v_d;
  assign mv_first = first_d;
  assign mv_x     = rd_data;
  assign mv_w     = w_col;
  assign acc      = mv_acc;

  assign rd_addr = k;
  assign busy    = run || v_d || fin;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NOUT; c++) bias[c] <= '0;
    end else if (b_we) bias[b_idx] <= b_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k <= '0; run <= 1'b0; v_d <= 1'b0; first_d <= 1'b0; last_d <= 1'b0;
      fin <= 1'b0; done <= 1'b0; pred <= '0;
      for (int c = 0; c < NOUT; c++) logits[c] <= '0;
    end else begin
      done    <= 1'b0;
      v_d     <= run;
      first_d <= run && (k == '0);
      last_d  <= run && (k == KA'(NIN - 1));
      fin     <= last_d;
      if (start && !busy) begin
        run <= 1'b1;
        k   <= '0;
      end else if (run) begin
        if (k == KA'(NIN - 1)) run <= 1'b0;
        else k <= k + 1'b1;
      end
      if (fin) begin
        logic [MA-1:0] best;
        best = '0;
        for (int c = 0; c < NOUT; c++) begin
          logits[c] <= acc[c] + bias[c];
          if (acc[c] + bias[c] > acc[best] + bias[best]) best = MA'(c);
        end
        pred <= best;
        done <= 1'b1;
      end
    end
  end
endmodule
