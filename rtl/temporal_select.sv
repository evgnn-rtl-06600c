// temporal_select: second step of the neighbor search. It takes candidates
// from the candidate-events buffer, forms dt = t_i - t_j (modulo 2^TW, so a
// timestamp wrap between the two events is handled) and keeps a candidate
// only if dt <= rt. Kept candidates become neighbors {n, p, |dx|, |dy|} and
// are written to the neighbor buffer. When DMAX neighbors have been found,
// full rises and stays high until the next start; it is the early-stop signal
// for the spatial search and blocks further pops.
// One candidate per cycle, purely combinational from candidate to neighbor;
// only the neighbor counter is a register. Comparison and early stop follow
// the published design; the modulo-difference is this design's own choice.
// Lint note: rst_n resets the flops asynchronously and also disables the
// assertions (disable iff), which a linter reports as a net used both
// synchronously and asynchronously; the assertions only sample it, so this
// warning stands.
module temporal_select
  import evgnn_pkg::*;
#(
  parameter int unsigned D_MAX = DMAX
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,     // new event: reset the count
  input  logic [TW-1:0]            t_i,
  input  logic [TW-1:0]            rt,
  // candidate buffer read side
  input  logic                     cand_empty,
  input  cand_t                    cand_data,
  output logic                     cand_pop,
  // neighbor buffer write side
  output logic                     nb_push,
  output nbr_t                     nb_data,
  output logic                     full,
  output logic [$clog2(D_MAX):0]   nb_count
);
  logic [TW-1:0] dt;

  assign full     = (nb_count == ($clog2(D_MAX)+1)'(D_MAX));
  assign cand_pop = !cand_empty && !full;
  assign dt       = t_i - cand_data.e.t;
  assign nb_push  = cand_pop && (dt <= rt);
  assign nb_data  = '{n: cand_data.e.n, p: cand_data.e.p, adx: cand_data.adx, ady: cand_data.ady};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       nb_count <= '0;
    else if (start)   nb_count <= '0;
    else if (nb_push) nb_count <= nb_count + 1'b1;
  end

  a_count_bound: assert property (@(posedge clk) disable iff (!rst_n) nb_count <= ($clog2(D_MAX)+1)'(D_MAX));
endmodule
