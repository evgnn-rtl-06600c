// graph_build: the graph-building module. For every new event it builds the
// event's 1-hop directed neighborhood among past events and then stores the
// event: (1) spatial search over the pixel queues in the L1 ball of radius
// rs, (2) temporal selection dt <= rt on the candidates, pipelined with (1)
// through a small candidate buffer, with early stop at DMAX neighbors,
// (3) push of {t, p, n} into the event's own pixel queue. Because the event
// is stored only after the search, it is never its own neighbor and all
// edges point from past to new events; no edge is ever stored.
//
// Interface: ev_valid/ev_ready handshake for the new event; neighbors leave
// on nb_push/nb_data (the neighbor buffer sits in the graph convolution);
// done pulses with nb_count and the event index n given to the event
// (a counter of accepted events, reset by clear). clear empties all queues
// (W*H cycles) and resets the index; ev_ready is low meanwhile.
// Latency per event: about 2 cycles per in-bound queue plus one per stored
// entry read, plus 4 cycles of start, drain and store.
// Lint note: rst_n resets the flops asynchronously and also disables the
// assertions (disable iff), which a linter reports as a net used both
// synchronously and asynchronously; the assertions only sample it, so this
// warning stands.
// The 16-bit linear queue index has two spare top bits at 120x100, left
// unused.
module graph_build
  import evgnn_pkg::*;
#(
  parameter int unsigned W      = IMG_W,
  parameter int unsigned H      = IMG_H,
  parameter int unsigned DEPTH  = QDEPTH,
  parameter int unsigned RS_MAX = 7,
  parameter int unsigned D_MAX  = DMAX,
  parameter int unsigned CAND_DEPTH = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    ev_valid,
  input  event_t                  ev,
  output logic                    ev_ready,
  input  logic [RSW-1:0]          rs,
  input  logic [TW-1:0]           rt,
  output logic                    nb_push,
  output nbr_t                    nb_data,
  output logic                    done,
  output logic [$clog2(D_MAX):0]  nb_count,
  output logic [NW-1:0]           ev_n,
  output logic                    busy
);
  localparam int unsigned QA = $clog2(W*H);
  localparam int unsigned SA = $clog2(DEPTH);

  typedef enum logic [2:0] {G_IDLE, G_SEARCH, G_STORE, G_WAIT, G_DONE} gstate_e;
  gstate_e gs;

  event_t         evr;
  logic [NW-1:0]  n_next, n_cur;
  logic           sp_start, sp_done, sp_busy, sp_finished;
  logic           nb_full;

  // event-queue buffer
  logic [QA-1:0]       st_raddr;
  logic [SA:0]         st_count;
  logic [SA-1:0]       st_head;
  logic [QA+SA-1:0]    ent_raddr;
  evq_entry_t          ent_rdata;
  logic                q_push, q_busy;
  logic [15:0]         qlin;
  assign qlin = 16'(evr.y) * 16'(W) + 16'(evr.x);

  evq_buffer #(.W(W), .H(H), .DEPTH(DEPTH)) u_evq (
    .clk, .rst_n,
    .st_raddr, .st_count, .st_head,
    .ent_raddr, .ent_rdata,
    .push(q_push), .push_q(qlin[QA-1:0]),
    .push_entry('{t: evr.t, p: evr.p, n: n_cur}),
    .clear, .busy(q_busy)
  );

  // candidate-events buffer
  logic  c_push, c_pop, c_empty, c_afull, c_flush;
  cand_t c_wdata, c_rdata;
  sync_fifo #(.WIDTH($bits(cand_t)), .DEPTH(CAND_DEPTH)) u_cand (
    .clk, .rst_n, .flush(c_flush),
    .push(c_push), .wdata(c_wdata),
    .pop(c_pop), .rdata(c_rdata),
    .empty(c_empty), .full(), .almost_full(c_afull), .count()
  );

  spatial_search #(.W(W), .H(H), .DEPTH(DEPTH), .RS_MAX(RS_MAX)) u_sp (
    .clk, .rst_n, .start(sp_start), .x_i(ev.x), .y_i(ev.y), .rs,
    .stop(nb_full),
    .st_raddr, .st_count, .st_head, .ent_raddr, .ent_rdata,
    .cand_push(c_push), .cand_data(c_wdata), .cand_afull(c_afull),
    .busy(sp_busy), .done(sp_done)
  );

  temporal_select #(.D_MAX(D_MAX)) u_tp (
    .clk, .rst_n, .start(sp_start), .t_i(evr.t), .rt,
    .cand_empty(c_empty), .cand_data(c_rdata), .cand_pop(c_pop),
    .nb_push, .nb_data, .full(nb_full), .nb_count
  );

  assign ev_ready = (gs == G_IDLE) && !q_busy && !clear;
  assign sp_start = (gs == G_IDLE) && ev_valid && ev_ready;
  assign c_flush  = sp_start || (gs == G_STORE);
  assign q_push   = (gs == G_STORE);
  assign busy     = (gs != G_IDLE) || q_busy;
  assign ev_n     = n_cur;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gs          <= G_IDLE;
      evr         <= '0;
      n_next      <= '0;
      n_cur       <= '0;
      sp_finished <= 1'b0;
      done        <= 1'b0;
    end else begin
      done <= 1'b0;
      if (clear) n_next <= '0;
      unique case (gs)
        G_IDLE: if (sp_start) begin
          evr         <= ev;
          n_cur       <= n_next;
          sp_finished <= 1'b0;
          gs          <= G_SEARCH;
        end
        G_SEARCH: begin
          if (sp_done) sp_finished <= 1'b1;
          // search is over once the walk has ended and every candidate has
          // been judged, or as soon as the neighbor buffer is full
          if ((sp_finished && c_empty) || (nb_full && !sp_busy)) gs <= G_STORE;
        end
        G_STORE: gs <= G_WAIT;              // evq push, candidate flush
        G_WAIT:  if (!q_busy) begin
          gs   <= G_DONE;
        end
        G_DONE: begin
          done   <= 1'b1;
          gs     <= G_IDLE;
        end
        default: gs <= G_IDLE;
      endcase
      if (gs == G_DONE) n_next <= n_next + 1'b1;
    end
  end
endmodule
