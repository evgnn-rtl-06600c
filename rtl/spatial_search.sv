// spatial_search: first step of the neighbor search. For a new event at
// (x_i, y_i) it visits every pixel queue with |dx| + |dy| <= rs (L1 ball, the
// spatial part of the prism search range), skipping positions outside the
// sensor, and copies the valid entries of each queue, newest first, into the
// candidate-events buffer together with |dx| and |dy|.
//
// Visiting order: dy from -rs to +rs, and for each dy, dx from -(rs-|dy|) to
// +(rs-|dy|). Per queue: one cycle to issue the state read, one to see
// {count, head}, then one entry read per cycle while the candidate buffer has
// room (cand_afull low). Entry data arrive one cycle after their address and
// are pushed then. stop (the neighbor buffer is full) ends the walk early.
// done pulses once, after the last read has been pushed. The L1 ball,
// out-of-bound skipping and early stop follow the published design; the order
// and the cycle schedule are this design's own choices.
// Lint note: rst_n resets the flops asynchronously and also disables the
// assertions (disable iff), which a linter reports as a net used both
// synchronously and asynchronously; the assertions only sample it, so this
// warning stands.
// The 16-bit linear queue index has two spare top bits at 120x100, left
// unused.
module spatial_search
  import evgnn_pkg::*;
#(
  parameter int unsigned W      = IMG_W,
  parameter int unsigned H      = IMG_H,
  parameter int unsigned DEPTH  = QDEPTH,
  parameter int unsigned RS_MAX = 7
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [XW-1:0]                 x_i,
  input  logic [YW-1:0]                 y_i,
  input  logic [RSW-1:0]                rs,
  input  logic                          stop,
  // event-queue buffer read ports
  output logic [$clog2(W*H)-1:0]        st_raddr,
  input  logic [$clog2(DEPTH):0]        st_count,
  input  logic [$clog2(DEPTH)-1:0]      st_head,
  output logic [$clog2(W*H*DEPTH)-1:0]  ent_raddr,
  input  evq_entry_t                    ent_rdata,
  // candidate buffer write side
  output logic                          cand_push,
  output cand_t                         cand_data,
  input  logic                          cand_afull,
  output logic                          busy,
  output logic                          done
);
  localparam int unsigned QA = $clog2(W*H);
  localparam int unsigned SA = $clog2(DEPTH);

  typedef enum logic [2:0] {S_IDLE, S_POS, S_STATE, S_ENT, S_DRAIN} state_e;
  state_e st;

  logic signed [4:0] dx, dy, span;         // offsets, |.| <= RS_MAX
  logic signed [9:0] px, py;
  logic [QA-1:0]     q;
  logic [SA:0]       cnt, k;
  logic [SA-1:0]     head;
  logic              rd_pend;
  logic [DW-1:0]     pend_adx, pend_ady;
  logic [RSW-1:0]    rs_r;
  logic [XW-1:0]     xr;
  logic [YW-1:0]     yr;

  function automatic logic signed [4:0] absv(input logic signed [4:0] v);
    return (v < 0) ? -v : v;
  endfunction

  assign px = 10'(signed'({1'b0, xr})) + 10'(dx);
  assign py = 10'(signed'({1'b0, yr})) + 10'(dy);
  wire in_bounds = (px >= 0) && (px < 10'(W)) && (py >= 0) && (py < 10'(H));
  logic [15:0] qlin;
  assign qlin = 16'(py[7:0]) * 16'(W) + 16'(px[7:0]);
  wire [QA-1:0] cur_q = qlin[QA-1:0];
  wire last_pos = (dx == span) && (dy == 5'(signed'({1'b0, rs_r})));

  assign st_raddr  = cur_q;
  assign ent_raddr = {q, SA'(head - 1'b1 - SA'(k))};
  assign busy      = (st != S_IDLE);

  // data of an entry read issued in the previous cycle
  assign cand_push      = rd_pend;
  assign cand_data.e    = ent_rdata;
  assign cand_data.adx  = pend_adx;
  assign cand_data.ady  = pend_ady;

  // the walk moves to the next offset when the current position is
  // finished: out of bounds, empty queue, or last entry read issued
  wire adv = !stop && (((st == S_POS) && !in_bounds) ||
                       ((st == S_STATE) && (st_count == 0)) ||
                       ((st == S_ENT) && !cand_afull && (k + 1'b1 == cnt)));
  wire signed [4:0] rs_s = 5'(signed'({1'b0, rs_r}));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dx <= '0; dy <= '0; span <= '0;
    end else if (st == S_IDLE) begin
      if (start) begin
        dy   <= -5'(signed'({1'b0, rs}));
        dx   <= '0;
        span <= '0;
      end
    end else if (adv && !last_pos) begin
      if (dx == span) begin
        dy   <= dy + 1'b1;
        span <= rs_s - absv(dy + 1'b1);
        dx   <= -(rs_s - absv(dy + 1'b1));
      end else begin
        dx <= dx + 1'b1;
      end
    end
  end


  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= S_IDLE;
      q <= '0; cnt <= '0; k <= '0; head <= '0;
      rd_pend  <= 1'b0;
      pend_adx <= '0; pend_ady <= '0;
      rs_r <= '0; xr <= '0; yr <= '0;
      done     <= 1'b0;
    end else begin
      done    <= 1'b0;
      rd_pend <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          rs_r <= rs; xr <= x_i; yr <= y_i;
          st   <= S_POS;
        end
        S_POS: begin
          if (stop) st <= S_DRAIN;
          else if (in_bounds) begin
            q  <= cur_q;                   // state read issued this cycle
            st <= S_STATE;
            pend_adx <= DW'(absv(dx));
            pend_ady <= DW'(absv(dy));
          end else st <= last_pos ? S_DRAIN : S_POS;
        end
        S_STATE: begin
          cnt  <= st_count;
          head <= st_head;
          k    <= '0;
          if (stop) st <= S_DRAIN;
          else if (st_count == 0) st <= last_pos ? S_DRAIN : S_POS;
          else st <= S_ENT;
        end
        S_ENT: begin
          if (stop) st <= S_DRAIN;
          else if (!cand_afull) begin
            rd_pend <= 1'b1;               // entry read issued this cycle
            k <= k + 1'b1;
            if (k + 1'b1 == cnt) st <= last_pos ? S_DRAIN : S_POS;
          end
        end
        S_DRAIN: begin                     // last read (if any) lands now
          st   <= S_IDLE;
          done <= 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_rs_range: assert property (@(posedge clk) disable iff (!rst_n) start |-> rs <= RSW'(RS_MAX));
endmodule
