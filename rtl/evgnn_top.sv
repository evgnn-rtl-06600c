// evgnn_top: the EvGNN accelerator. Every event from a dynamic vision sensor
// is turned, on arrival, into a node of a directed event graph and run
// through a four-layer graph neural network, and the whole-graph prediction
// (car / background) is refreshed, all within microseconds per event.
//
// Blocks: ctrl_config (AXI4-Lite registers, new-event FIFO, weight load),
// graph_build (event queues, spatial and temporal neighbor search),
// graph_conv (neighbor buffer, DRAM feature fetch, four layers in parallel,
// feature write-back), graph_readout (8x7 max grid), fc_head (1792 -> 2, on
// two engines borrowed from layer 3's MatVec unit),
// axi_mm_master (AXI4 link to the host DRAM that holds per-event features).
//
// The per-event sequence is run by a small FSM: IDLE -> BUILD (neighbor
// search and queue store) -> CONV (fetch, compute, write-back) -> READOUT
// (fold the new last-layer features into the grid, one cycle) -> FC
// (1795 cycles) -> IDLE. Events are handled one at a time: the next event
// may have the current one as a neighbor, so its search must wait until the
// current features are in DRAM and the event is in its queue. A clear
// request is carried out in IDLE (W*H cycles); one is pending out of
// reset, because the queue state words are memory and have no reset. The FSM stage and the
// counters are visible in the STATUS register.
// Lint note: rst_n resets the flops asynchronously and also disables the
// assertions (disable iff), which a linter reports as a net used both
// synchronously and asynchronously; the assertions only sample it, so this
// warning stands.
// The busy outputs of graph_conv and fc_head are unused: the FSM tracks
// their done pulses instead.
module evgnn_top
  import evgnn_pkg::*;
#(
  parameter int unsigned W      = IMG_W,
  parameter int unsigned H      = IMG_H,
  parameter int unsigned DEPTH  = QDEPTH,
  parameter int unsigned RS_MAX = 7,
  parameter int unsigned D_MAX  = DMAX
) (
  input  logic         clk,
  input  logic         rst_n,
  // AXI4-Lite slave from the host
  input  logic [19:0]  s_axil_awaddr,
  input  logic         s_axil_awvalid,
  output logic         s_axil_awready,
  input  logic [31:0]  s_axil_wdata,
  input  logic         s_axil_wvalid,
  output logic         s_axil_wready,
  output logic [1:0]   s_axil_bresp,
  output logic         s_axil_bvalid,
  input  logic         s_axil_bready,
  input  logic [19:0]  s_axil_araddr,
  input  logic         s_axil_arvalid,
  output logic         s_axil_arready,
  output logic [31:0]  s_axil_rdata,
  output logic [1:0]   s_axil_rresp,
  output logic         s_axil_rvalid,
  input  logic         s_axil_rready,
  // AXI4 master to the host DRAM
  output logic [31:0]  m_axi_awaddr,
  output logic [7:0]   m_axi_awlen,
  output logic [2:0]   m_axi_awsize,
  output logic [1:0]   m_axi_awburst,
  output logic         m_axi_awvalid,
  input  logic         m_axi_awready,
  output logic [31:0]  m_axi_wdata,
  output logic [3:0]   m_axi_wstrb,
  output logic         m_axi_wlast,
  output logic         m_axi_wvalid,
  input  logic         m_axi_wready,
  input  logic [1:0]   m_axi_bresp,
  input  logic         m_axi_bvalid,
  output logic         m_axi_bready,
  output logic [31:0]  m_axi_araddr,
  output logic [7:0]   m_axi_arlen,
  output logic [2:0]   m_axi_arsize,
  output logic [1:0]   m_axi_arburst,
  output logic         m_axi_arvalid,
  input  logic         m_axi_arready,
  input  logic [31:0]  m_axi_rdata,
  input  logic [1:0]   m_axi_rresp,
  input  logic         m_axi_rlast,
  input  logic         m_axi_rvalid,
  output logic         m_axi_rready
);
  localparam int unsigned KW = $clog2(D_MAX) + 1;

  stage_e st;

  // control / configuration
  logic          ev_valid, ev_pop, clr_req, clr_pend;
  event_t        ev;
  logic [RSW-1:0] rs;
  logic [TW-1:0] rt;
  logic [4:0]    shift [NLAYERS];
  logic [31:0]   feat_base;
  logic          cw_we, fw_we, cb_we, fb_we, fb_idx;
  logic [1:0]    cw_layer;
  logic [11:0]   cw_idx;
  logic [12:0]   fw_idx;
  logic signed [7:0]  w_data;
  logic [6:0]    cb_idx;
  logic signed [31:0] b_data;
  logic [15:0]   ev_done_cnt;
  logic          pred_valid, dram_err;
  logic          pred;
  logic signed [31:0] logits [NCLASS];

  // datapath handshakes
  logic          gb_ready, gb_done, gb_busy, gb_clear;
  nbr_t          nb_data;
  logic          nb_push;
  logic [KW-1:0] nb_count;
  logic [NW-1:0] ev_n;
  logic          gc_start, gc_done, gc_busy;
  logic signed [7:0] l3_feat [COUT3];
  logic          mem_req, mem_we, mem_ack;
  logic [31:0]   mem_addr, mem_wdata, mem_rdata;
  logic          ro_upd, ro_clear;
  logic [$clog2(FC_IN)-1:0] ro_raddr;
  logic signed [7:0] ro_rdata;
  logic          fc_start, fc_done, fc_busy;
  logic          fc_pred;
  // FC head's use of the graph convolution's MatVec unit
  logic          mv_sel, mv_en, mv_first;
  logic signed [7:0]  mv_x;
  logic signed [7:0]  mv_w   [NCLASS];
  logic signed [31:0] mv_acc [NCLASS];
  logic signed [31:0] fc_logits [NCLASS];
  logic [XW-1:0] cur_x;
  logic [YW-1:0] cur_y;

  ctrl_config u_ctrl (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready, .s_axil_wdata, .s_axil_wvalid,
    .s_axil_wready, .s_axil_bresp, .s_axil_bvalid, .s_axil_bready, .s_axil_araddr,
    .s_axil_arvalid, .s_axil_arready, .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid,
    .s_axil_rready,
    .ev_valid, .ev, .ev_pop,
    .clear(clr_req), .rs, .rt, .shift, .feat_base,
    .cw_we, .cw_layer, .cw_idx, .fw_we, .fw_idx, .w_data,
    .cb_we, .cb_idx, .fb_we, .fb_idx, .b_data,
    .stage(st), .busy(st != ST_IDLE), .dram_err, .ev_done_cnt,
    .pred_valid, .pred, .logit0(logits[0]), .logit1(logits[1])
  );

  assign gb_clear = (st == ST_IDLE) && clr_pend;
  assign ro_clear = gb_clear;
  wire   gb_ev_valid = (st == ST_IDLE) && !clr_pend && ev_valid;
  assign ev_pop   = gb_ev_valid && gb_ready;

  graph_build #(.W(W), .H(H), .DEPTH(DEPTH), .RS_MAX(RS_MAX), .D_MAX(D_MAX)) u_gb (
    .clk, .rst_n, .clear(gb_clear),
    .ev_valid(gb_ev_valid), .ev, .ev_ready(gb_ready),
    .rs, .rt, .nb_push, .nb_data, .done(gb_done), .nb_count, .ev_n, .busy(gb_busy)
  );

  assign gc_start = (st == ST_BUILD) && gb_done;

  graph_conv #(.D_MAX(D_MAX)) u_gc (
    .clk, .rst_n, .nb_push, .nb_data,
    .start(gc_start), .nb_count, .ev_n, .done(gc_done), .busy(gc_busy), .l3_feat,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_ack, .mem_rdata,
    .feat_base, .shift,
    .w_we(cw_we), .w_layer(cw_layer), .w_idx(cw_idx), .w_data,
    .b_we(cb_we), .b_idx(cb_idx), .b_data,
    .comp_cycles(),
    .fc_sel(mv_sel), .fc_en(mv_en), .fc_first(mv_first), .fc_x(mv_x), .fc_w(mv_w), .fc_acc(mv_acc)
  );

  axi_mm_master u_axi (
    .clk, .rst_n, .clear(gb_clear),
    .req(mem_req), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata),
    .ack(mem_ack), .rdata(mem_rdata), .err(dram_err),
    .m_axi_awaddr, .m_axi_awlen, .m_axi_awsize, .m_axi_awburst, .m_axi_awvalid,
    .m_axi_awready, .m_axi_wdata, .m_axi_wstrb, .m_axi_wlast, .m_axi_wvalid,
    .m_axi_wready, .m_axi_bresp, .m_axi_bvalid, .m_axi_bready, .m_axi_araddr,
    .m_axi_arlen, .m_axi_arsize, .m_axi_arburst, .m_axi_arvalid, .m_axi_arready,
    .m_axi_rdata, .m_axi_rresp, .m_axi_rlast, .m_axi_rvalid, .m_axi_rready
  );

  assign ro_upd = (st == ST_READOUT);

  graph_readout u_ro (
    .clk, .rst_n, .clear(ro_clear), .upd(ro_upd), .x(cur_x), .y(cur_y),
    .feat(l3_feat), .raddr(ro_raddr), .rdata(ro_rdata)
  );

  assign fc_start = (st == ST_READOUT);

  fc_head u_fc (
    .clk, .rst_n, .start(fc_start), .done(fc_done), .busy(fc_busy),
    .rd_addr(ro_raddr), .rd_data(ro_rdata),
    .w_we(fw_we), .w_idx(fw_idx), .w_data,
    .b_we(fb_we), .b_idx(fb_idx), .b_data,
    .logits(fc_logits), .pred(fc_pred),
    .mv_sel, .mv_en, .mv_first, .mv_x, .mv_w, .mv_acc
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= ST_IDLE;
      clr_pend <= 1'b1;              // queues are memories: clear them after reset
      cur_x <= '0; cur_y <= '0;
      ev_done_cnt <= '0;
      pred_valid <= 1'b0;
      pred <= 1'b0;
      for (int c = 0; c < NCLASS; c++) logits[c] <= '0;
    end else begin
      if (clr_req) clr_pend <= 1'b1;
      unique case (st)
        ST_IDLE: begin
          if (clr_pend) begin
            clr_pend    <= clr_req;
            ev_done_cnt <= '0;
            pred_valid  <= 1'b0;
            st          <= ST_CLEAR;
          end else if (ev_pop) begin
            cur_x <= ev.x;
            cur_y <= ev.y;
            st    <= ST_BUILD;
          end
        end
        ST_CLEAR:   if (!gb_busy) st <= ST_IDLE;
        ST_BUILD:   if (gb_done) st <= ST_CONV;
        ST_CONV:    if (gc_done) st <= ST_READOUT;
        ST_READOUT: st <= ST_FC;
        ST_FC: if (fc_done) begin
          logits      <= fc_logits;
          pred        <= fc_pred;
          pred_valid  <= 1'b1;
          ev_done_cnt <= ev_done_cnt + 1'b1;
          st          <= ST_IDLE;
        end
        default: st <= ST_IDLE;
      endcase
    end
  end
endmodule
