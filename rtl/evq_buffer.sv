// evq_buffer: the global event-queues buffer. One queue per sensor pixel
// (W x H queues), each holding the last QDEPTH events seen at that pixel as
// 32-bit entries {t, p, n}. The pixel position itself is the queue index, so
// no coordinates are stored. Pushing into a full queue overwrites the oldest
// entry; every entry can be read on its own.
//
// Storage is two arrays: the entries (W*H*QDEPTH words) and a per-queue
// state word {count, head}, where head is the slot the next push writes and
// the newest entry sits at head-1. Both read ports are synchronous (data one
// cycle after the address). A push takes two cycles (state read, then entry
// and state write) and must not overlap another push or a clear. clear walks
// all W*H state words and zeroes them, one per cycle, with busy high; entries
// are left as they are since a zero count hides them.
// Geometry and entry width follow the published design; the head/count
// organisation and the sweep clear are this design's own choices.
// Lint note: rst_n resets the flops asynchronously and also disables the
// assertions (disable iff), which a linter reports as a net used both
// synchronously and asynchronously; the assertions only sample it, so this
// warning stands.
module evq_buffer
  import evgnn_pkg::*;
#(
  parameter int unsigned W     = IMG_W,
  parameter int unsigned H     = IMG_H,
  parameter int unsigned DEPTH = QDEPTH
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // state read port (used by the spatial search)
  input  logic [$clog2(W*H)-1:0]        st_raddr,
  output logic [$clog2(DEPTH):0]        st_count,
  output logic [$clog2(DEPTH)-1:0]      st_head,
  // entry read port
  input  logic [$clog2(W*H*DEPTH)-1:0]  ent_raddr,
  output evq_entry_t                    ent_rdata,
  // push of a new event
  input  logic                          push,
  input  logic [$clog2(W*H)-1:0]        push_q,
  input  evq_entry_t                    push_entry,
  // clear of all queues
  input  logic                          clear,
  output logic                          busy
);
  localparam int unsigned NQ  = W * H;
  localparam int unsigned QA  = $clog2(NQ);
  localparam int unsigned SA  = $clog2(DEPTH);
  localparam int unsigned CW  = SA + 1;

  evq_entry_t        entries [NQ*DEPTH];
  logic [CW+SA-1:0]  state   [NQ];         // {count, head}

  // read ports
  always_ff @(posedge clk) begin
    {st_count, st_head} <= state[st_raddr];
    ent_rdata           <= entries[ent_raddr];
  end

  // push and clear sequencing
  typedef enum logic [1:0] {S_IDLE, S_PUSH, S_CLEAR} mode_e;
  mode_e             mode;
  logic [QA-1:0]     pq, clr_q;
  evq_entry_t        pe;
  logic [CW+SA-1:0]  pstate;
  logic [CW-1:0]     pcount;
  logic [SA-1:0]     phead;

  always_ff @(posedge clk) pstate <= state[push_q];
  assign {pcount, phead} = pstate;
  assign busy = (mode != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode  <= S_IDLE;
      pq    <= '0;
      pe    <= '0;
      clr_q <= '0;
    end else begin
      unique case (mode)
        S_IDLE: begin
          if (clear) begin
            mode  <= S_CLEAR;
            clr_q <= '0;
          end else if (push) begin
            mode <= S_PUSH;
            pq   <= push_q;
            pe   <= push_entry;
          end
        end
        S_PUSH:  mode <= S_IDLE;
        S_CLEAR: begin
          if (clr_q == QA'(NQ - 1)) mode <= S_IDLE;
          clr_q <= clr_q + 1'b1;
        end
        default: mode <= S_IDLE;
      endcase
    end
  end

  // memory writes
  always_ff @(posedge clk) begin
    if (mode == S_PUSH) begin
      entries[{pq, phead}] <= pe;
      state[pq] <= {(pcount == CW'(DEPTH)) ? pcount : pcount + 1'b1, phead + 1'b1};
    end else if (mode == S_CLEAR) begin
      state[clr_q] <= '0;
    end
  end

  a_push_when_idle: assert property (@(posedge clk) disable iff (!rst_n) push |-> mode == S_IDLE);
endmodule
