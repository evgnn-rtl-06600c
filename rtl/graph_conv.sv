// graph_conv: the graph-convolution module with layer-parallel execution.
//
// Because edges only point from past events to the new one, the features of
// past events never change. Each past event's outputs of every layer are
// kept in DRAM, so all four layers of the new event can be computed at once
// from its neighbors' stored features: layer l only needs x_j^l, which is
// layer l-1's output for neighbor j (polarity p_j for layer 0). The latency
// of the convolution is then that of the widest layer instead of the sum.
//
// Flow per event (start pulse, with the neighbor count from graph building):
//  1. FETCH: the neighbor counter pops the neighbor buffer one entry at a
//     time; the event index n_j is mapped to the DRAM address
//     feat_base + n_j*128 and the 80 bytes of layer-0..2 outputs are read
//     (20 single-word transfers) into the neighbors' features buffer.
//  2. COMPUTE: for each neighbor a common step counter runs s = 0..33 and
//     each layer l takes its own input element (C_in^l features, |dx|, |dy|);
//     the four conv_layer instances run in parallel, so one neighbor costs
//     34 cycles whatever the layer count.
//  3. WRITE: after 3 cycles of pipeline drain the four BAQ outputs (16, 32,
//     32, 32 bytes) are written to feat_base + n_i*128 (28 words).
//  4. done pulses; l3_feat holds the last layer's output for the readout.
// fc_*: while fc_sel is high (only between events) the FC head drives the
// first NCLASS engines of layer 3's MatVec unit and reads their sums.
// Memory port: mem_req held until the one-cycle mem_ack; 32-bit words,
// byte b of a word at bits 8b+7..8b. Biases live here as registers, loaded by
// the host (b_we, index layer*32 + channel). The step schedule, the DRAM
// layout and the fetch-all-then-compute order are this design's own choices;
// the published design allows these stages to overlap.
// Lint note: rst_n resets the flops asynchronously and also disables the
// assertions (disable iff), which a linter reports as a net used both
// synchronously and asynchronously; the assertions only sample it, so this
// warning stands.
module graph_conv
  import evgnn_pkg::*;
#(
  parameter int unsigned D_MAX = DMAX,
  parameter int unsigned ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // neighbors from graph building
  input  logic                    nb_push,
  input  nbr_t                    nb_data,
  // per-event command
  input  logic                    start,
  input  logic [$clog2(D_MAX):0]  nb_count,
  input  logic [NW-1:0]           ev_n,
  output logic                    done,
  output logic                    busy,
  output logic signed [7:0]       l3_feat [COUT3],
  // DRAM access through the AXI master
  output logic                    mem_req,
  output logic                    mem_we,
  output logic [31:0]             mem_addr,
  output logic [31:0]             mem_wdata,
  input  logic                    mem_ack,
  input  logic [31:0]             mem_rdata,
  // configuration
  input  logic [31:0]             feat_base,
  input  logic [4:0]              shift [NLAYERS],
  input  logic                    w_we,
  input  logic [1:0]              w_layer,
  input  logic [11:0]             w_idx,
  input  logic signed [7:0]       w_data,
  input  logic                    b_we,
  input  logic [6:0]              b_idx,
  input  logic signed [31:0]      b_data,
  // cycles spent in the layer-parallel compute phase of the last event
  output logic [15:0]             comp_cycles,
  // the FC head borrows the first NCLASS MAC engines of layer 3's MatVec
  // unit while this module is idle
  input  logic                    fc_sel,
  input  logic                    fc_en,
  input  logic                    fc_first,
  input  logic signed [7:0]       fc_x,
  input  logic signed [7:0]       fc_w   [NCLASS],
  output logic signed [ACC_W-1:0] fc_acc [NCLASS]
);
  localparam int unsigned KW   = $clog2(D_MAX) + 1;
  localparam int unsigned SW   = 6;
  localparam int unsigned FW   = FETCH_BYTES / 4;   // 20 words
  localparam int unsigned SWDS = STORE_BYTES / 4;   // 28 words
  localparam int unsigned OFF1 = 0, OFF2 = COUT0, OFF3 = COUT0 + COUT1;

  typedef enum logic [2:0] {C_IDLE, C_POP, C_FETCH, C_COMP, C_DRAIN, C_WRITE, C_DONE} cstate_e;
  cstate_e cs;

  // neighbor buffer
  logic nbf_pop, nbf_empty;
  nbr_t nbf_head;
  sync_fifo #(.WIDTH($bits(nbr_t)), .DEPTH(D_MAX)) u_nbuf (
    .clk, .rst_n, .flush(1'b0), .push(nb_push), .wdata(nb_data),
    .pop(nbf_pop), .rdata(nbf_head), .empty(nbf_empty),
    .full(), .almost_full(), .count()
  );

  // neighbors' features buffer
  logic [7:0]    fbuf  [D_MAX][FETCH_BYTES];
  logic          nb_p  [D_MAX];
  logic [DW-1:0] nb_dx [D_MAX];
  logic [DW-1:0] nb_dy [D_MAX];
  logic [NW-1:0] cur_n;

  logic [KW-1:0] cnt, k;
  logic [4:0]    w;
  logic [SW-1:0] s;
  logic [1:0]    drain;
  logic [NW-1:0] n_i;

  // biases
  logic signed [ACC_W-1:0] b0 [COUT0];
  logic signed [ACC_W-1:0] b1 [COUT1];
  logic signed [ACC_W-1:0] b2 [COUT2];
  logic signed [ACC_W-1:0] b3 [COUT3];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < COUT0; m++) b0[m] <= '0;
      for (int m = 0; m < 32; m++) begin b1[m] <= '0; b2[m] <= '0; b3[m] <= '0; end
    end else if (b_we) begin
      unique case (b_idx[6:5])
        2'd0: b0[b_idx[3:0]] <= b_data;
        2'd1: b1[b_idx[4:0]] <= b_data;
        2'd2: b2[b_idx[4:0]] <= b_data;
        default: b3[b_idx[4:0]] <= b_data;
      endcase
    end
  end

  // layer inputs for the current step
  logic [KW-2:0]    kk;
  assign kk = k[KW-2:0];
  logic signed [7:0] x0, x1, x2, x3;

  function automatic logic [7:0] pick(input int unsigned cin, input int unsigned off,
                                      input logic [SW-1:0] st, input logic [7:0] fb [FETCH_BYTES],
                                      input logic [DW-1:0] adx, input logic [DW-1:0] ady);
    if (int'(st) < int'(cin))        return fb[off + int'(st)];
    else if (int'(st) == int'(cin))  return 8'(adx);
    else                             return 8'(ady);
  endfunction

  always_comb begin
    x0 = (s == 0) ? 8'(nb_p[kk]) : (s == 1) ? 8'(nb_dx[kk]) : 8'(nb_dy[kk]);
    x1 = pick(CIN1, OFF1, s, fbuf[kk], nb_dx[kk], nb_dy[kk]);
    x2 = pick(CIN2, OFF2, s, fbuf[kk], nb_dx[kk], nb_dy[kk]);
    x3 = pick(CIN3, OFF3, s, fbuf[kk], nb_dx[kk], nb_dy[kk]);
  end

  wire ev_start   = (cs == C_IDLE) && start;
  wire step_valid = (cs == C_COMP);
  wire first      = (s == 0);
  wire nb_end     = (s == SW'(MAX_STEPS - 1));

  logic signed [7:0] y0 [COUT0];
  logic signed [7:0] y1 [COUT1];
  logic signed [7:0] y2 [COUT2];
  logic signed [7:0] y3 [COUT3];

  // MatVec sharing: layers 0..2 never lend theirs, layer 3 lends its engines
  logic signed [7:0]       zw0 [COUT0];
  logic signed [7:0]       zw1 [COUT1];
  logic signed [7:0]       zw2 [COUT2];
  logic signed [7:0]       ew3 [COUT3];
  logic signed [ACC_W-1:0] acc3 [COUT3];
  always_comb begin
    for (int m = 0; m < COUT0; m++) zw0[m] = '0;
    for (int m = 0; m < COUT1; m++) zw1[m] = '0;
    for (int m = 0; m < COUT2; m++) zw2[m] = '0;
    for (int m = 0; m < COUT3; m++) ew3[m] = (m < NCLASS) ? fc_w[m] : 8'sd0;
    for (int c = 0; c < NCLASS; c++) fc_acc[c] = acc3[c];
  end

  conv_layer #(.CIN(CIN0), .COUT(COUT0), .ACC_W(ACC_W), .SW(SW)) u_l0 (
    .clk, .rst_n, .ev_start, .step_valid, .step(s), .first, .nb_end, .x(x0),
    .w_we(w_we && w_layer == 2'd0), .w_idx, .w_data, .bias(b0), .shift(shift[0]), .y(y0),
    .ext_sel(1'b0), .ext_en(1'b0), .ext_first(1'b0), .ext_x(8'sd0), .ext_w(zw0), .mv_acc());
  conv_layer #(.CIN(CIN1), .COUT(COUT1), .ACC_W(ACC_W), .SW(SW)) u_l1 (
    .clk, .rst_n, .ev_start, .step_valid, .step(s), .first, .nb_end, .x(x1),
    .w_we(w_we && w_layer == 2'd1), .w_idx, .w_data, .bias(b1), .shift(shift[1]), .y(y1),
    .ext_sel(1'b0), .ext_en(1'b0), .ext_first(1'b0), .ext_x(8'sd0), .ext_w(zw1), .mv_acc());
  conv_layer #(.CIN(CIN2), .COUT(COUT2), .ACC_W(ACC_W), .SW(SW)) u_l2 (
    .clk, .rst_n, .ev_start, .step_valid, .step(s), .first, .nb_end, .x(x2),
    .w_we(w_we && w_layer == 2'd2), .w_idx, .w_data, .bias(b2), .shift(shift[2]), .y(y2),
    .ext_sel(1'b0), .ext_en(1'b0), .ext_first(1'b0), .ext_x(8'sd0), .ext_w(zw2), .mv_acc());
  conv_layer #(.CIN(CIN3), .COUT(COUT3), .ACC_W(ACC_W), .SW(SW)) u_l3 (
    .clk, .rst_n, .ev_start, .step_valid, .step(s), .first, .nb_end, .x(x3),
    .w_we(w_we && w_layer == 2'd3), .w_idx, .w_data, .bias(b3), .shift(shift[3]), .y(y3),
    .ext_sel(fc_sel), .ext_en(fc_en), .ext_first(fc_first), .ext_x(fc_x), .ext_w(ew3), .mv_acc(acc3));

  // new-event features, in DRAM byte order
  logic [7:0] obytes [STORE_BYTES];
  always_comb begin
    for (int m = 0; m < COUT0; m++) obytes[m]                 = y0[m];
    for (int m = 0; m < COUT1; m++) obytes[OFF2 + m]          = y1[m];
    for (int m = 0; m < COUT2; m++) obytes[OFF3 + m]          = y2[m];
    for (int m = 0; m < COUT3; m++) obytes[FETCH_BYTES + m]   = y3[m];
  end

  assign nbf_pop   = (cs == C_POP);
  assign mem_req   = (cs == C_FETCH) || (cs == C_WRITE);
  assign mem_we    = (cs == C_WRITE);
  assign mem_addr  = feat_base + {11'd0, ((cs == C_WRITE) ? n_i : cur_n), 7'd0} + {25'd0, w, 2'b00};
  assign mem_wdata = {obytes[4*w+3], obytes[4*w+2], obytes[4*w+1], obytes[4*w]};
  assign busy      = (cs != C_IDLE);
  assign l3_feat   = y3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs <= C_IDLE;
      cnt <= '0; k <= '0; w <= '0; s <= '0; drain <= '0;
      n_i <= '0; cur_n <= '0;
      done <= 1'b0;
      comp_cycles <= '0;
    end else begin
      done <= 1'b0;
      unique case (cs)
        C_IDLE: if (start) begin
          cnt <= nb_count;
          n_i <= ev_n;
          k   <= '0;
          w   <= '0;
          s   <= '0;
          comp_cycles <= '0;
          drain <= '0;
          cs  <= (nb_count == 0) ? C_DRAIN : C_POP;
        end
        C_POP: begin
          cur_n      <= nbf_head.n;
          nb_p[kk]   <= nbf_head.p;
          nb_dx[kk]  <= nbf_head.adx;
          nb_dy[kk]  <= nbf_head.ady;
          w          <= '0;
          cs         <= C_FETCH;
        end
        C_FETCH: if (mem_ack) begin
          for (int b = 0; b < 4; b++) fbuf[kk][4*w + b] <= mem_rdata[8*b +: 8];
          w <= w + 1'b1;
          if (w == 5'(FW - 1)) begin
            if (k == cnt - 1'b1) begin
              k  <= '0;
              s  <= '0;
              cs <= C_COMP;
            end else begin
              k  <= k + 1'b1;
              cs <= C_POP;
            end
          end
        end
        C_COMP: begin
          comp_cycles <= comp_cycles + 1'b1;
          if (nb_end) begin
            s <= '0;
            if (k == cnt - 1'b1) begin
              drain <= '0;
              cs    <= C_DRAIN;
            end else k <= k + 1'b1;
          end else s <= s + 1'b1;
        end
        C_DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 2'd2) begin
            w  <= '0;
            cs <= C_WRITE;
          end
        end
        C_WRITE: if (mem_ack) begin
          w <= w + 1'b1;
          if (w == 5'(SWDS - 1)) cs <= C_DONE;
        end
        C_DONE: begin
          done <= 1'b1;
          cs   <= C_IDLE;
        end
        default: cs <= C_IDLE;
      endcase
    end
  end

  a_pop_nonempty: assert property (@(posedge clk) disable iff (!rst_n) nbf_pop |-> !nbf_empty);
endmodule
