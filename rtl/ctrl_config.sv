// ctrl_config: control and configuration block. An AXI4-Lite slave (32-bit
// data, one transfer at a time, full-word writes) through which the host
// feeds events, sets parameters, loads weights and reads results.
//
// Register map (byte addresses):
//   0x00 CTRL      W  bit0: clear (empty event queues, readout grid, counters)
//   0x04 STATUS    R  bit0 busy, bit1 event FIFO full, bit2 event FIFO empty,
//                     bit3 DRAM error, bits7:4 FSM stage, bits31:16 events done
//   0x08 EV_XY     RW bits6:0 x, bits14:8 y
//   0x0C EV_T      RW timestamp (us)
//   0x10 EV_P      W  bit0 polarity; this write pushes {x, y, t, p} into the
//                     new-event FIFO (dropped if the FIFO is full)
//   0x14 RS        RW spatial radius r_s (L1, pixels)
//   0x18 RT        RW temporal radius r_t (us)
//   0x1C SHIFT     RW requantization shifts, layer l in bits 8l+4..8l
//   0x20 FEAT_BASE RW DRAM byte address of the feature area
//   0x24 PRED      R  bit0 predicted class, bit31 a prediction exists
//   0x28 LOGIT0    R  0x2C LOGIT1 R
//   0x1xxxx        W  conv weight: addr[15:14] layer, addr[13:2] k*C_out+m
//   0x2xxxx        W  FC weight: addr[14:2] k*2+class
//   0x3xxxx        W  bias: addr[9:2] = layer*32+channel (0..127), 128+class
// Event fields, parameters and status registers follow the published block
// diagram (x,y / time stamp / polarity / FSM stage / HW status / params);
// addresses, widths and reset values are this design's own choices.
// Lint note: rst_n resets the flops asynchronously and also disables the
// assertions (disable iff), which a linter reports as a net used both
// synchronously and asynchronously; the assertions only sample it, so this
// warning stands.
module ctrl_config
  import evgnn_pkg::*;
#(
  parameter int unsigned EVQ_DEPTH = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // AXI4-Lite slave
  input  logic [19:0]          s_axil_awaddr,
  input  logic                 s_axil_awvalid,
  output logic                 s_axil_awready,
  input  logic [31:0]          s_axil_wdata,
  input  logic                 s_axil_wvalid,
  output logic                 s_axil_wready,
  output logic [1:0]           s_axil_bresp,
  output logic                 s_axil_bvalid,
  input  logic                 s_axil_bready,
  input  logic [19:0]          s_axil_araddr,
  input  logic                 s_axil_arvalid,
  output logic                 s_axil_arready,
  output logic [31:0]          s_axil_rdata,
  output logic [1:0]           s_axil_rresp,
  output logic                 s_axil_rvalid,
  input  logic                 s_axil_rready,
  // new events to the datapath
  output logic                 ev_valid,
  output event_t               ev,
  input  logic                 ev_pop,
  // control and parameters
  output logic                 clear,
  output logic [RSW-1:0]       rs,
  output logic [TW-1:0]        rt,
  output logic [4:0]           shift [NLAYERS],
  output logic [31:0]          feat_base,
  // weight and bias loading
  output logic                 cw_we,
  output logic [1:0]           cw_layer,
  output logic [11:0]          cw_idx,
  output logic                 fw_we,
  output logic [12:0]          fw_idx,
  output logic signed [7:0]    w_data,
  output logic                 cb_we,
  output logic [6:0]           cb_idx,
  output logic                 fb_we,
  output logic                 fb_idx,
  output logic signed [31:0]   b_data,
  // status from the datapath
  input  stage_e               stage,
  input  logic                 busy,
  input  logic                 dram_err,
  input  logic [15:0]          ev_done_cnt,
  input  logic                 pred_valid,
  input  logic                 pred,
  input  logic signed [31:0]   logit0,
  input  logic signed [31:0]   logit1
);
  logic [XW-1:0] ev_x;
  logic [YW-1:0] ev_y;
  logic [TW-1:0] ev_t;
  logic          f_push, f_empty, f_full;
  event_t        f_wdata;

  // write channel: address and data are taken together
  wire wr_fire = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_awready = wr_fire;
  assign s_axil_wready  = wr_fire;
  assign s_axil_bresp   = 2'b00;
  wire [19:0] wa = s_axil_awaddr;
  wire [31:0] wd = s_axil_wdata;

  assign f_push  = wr_fire && (wa == 20'h00010);
  assign f_wdata = '{x: ev_x, y: ev_y, t: ev_t, p: wd[0]};

  sync_fifo #(.WIDTH($bits(event_t)), .DEPTH(EVQ_DEPTH)) u_evfifo (
    .clk, .rst_n, .flush(1'b0),
    .push(f_push), .wdata(f_wdata),
    .pop(ev_pop), .rdata(ev), .empty(f_empty), .full(f_full),
    .almost_full(), .count()
  );
  assign ev_valid = !f_empty;

  // weight / bias load strobes (combinational from the write handshake)
  assign cw_we    = wr_fire && (wa[19:16] == 4'h1);
  assign cw_layer = wa[15:14];
  assign cw_idx   = wa[13:2];
  assign fw_we    = wr_fire && (wa[19:16] == 4'h2);
  assign fw_idx   = wa[14:2];
  assign w_data   = wd[7:0];
  assign cb_we    = wr_fire && (wa[19:16] == 4'h3) && !wa[9];
  assign cb_idx   = wa[8:2];
  assign fb_we    = wr_fire && (wa[19:16] == 4'h3) && wa[9];
  assign fb_idx   = wa[2];
  assign b_data   = wd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axil_bvalid <= 1'b0;
      clear <= 1'b0;
      ev_x <= '0; ev_y <= '0; ev_t <= '0;
      rs <= RSW'(3);
      rt <= TW'(10000);
      for (int l = 0; l < NLAYERS; l++) shift[l] <= 5'd8;
      feat_base <= '0;
    end else begin
      clear <= 1'b0;
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
      if (wr_fire) begin
        s_axil_bvalid <= 1'b1;
        unique case (wa)
          20'h00000: clear <= wd[0];
          20'h00008: begin ev_x <= wd[XW-1:0]; ev_y <= wd[8 +: YW]; end
          20'h0000C: ev_t <= wd[TW-1:0];
          20'h00014: rs <= wd[RSW-1:0];
          20'h00018: rt <= wd[TW-1:0];
          20'h0001C: for (int l = 0; l < NLAYERS; l++) shift[l] <= wd[8*l +: 5];
          20'h00020: feat_base <= wd;
          default: ;
        endcase
      end
    end
  end

  // read channel
  logic [31:0] rmux;
  always_comb begin
    rmux = '0;
    unique case (s_axil_araddr)
      20'h00004: rmux = {ev_done_cnt, 8'd0, stage, dram_err, f_empty, f_full, busy};
      20'h00008: rmux = {16'd0, 1'b0, ev_y, 1'b0, ev_x};
      20'h0000C: rmux = 32'(ev_t);
      20'h00014: rmux = 32'(rs);
      20'h00018: rmux = 32'(rt);
      20'h0001C: rmux = {3'd0, shift[3], 3'd0, shift[2], 3'd0, shift[1], 3'd0, shift[0]};
      20'h00020: rmux = feat_base;
      20'h00024: rmux = {pred_valid, 30'd0, pred};
      20'h00028: rmux = logit0;
      20'h0002C: rmux = logit1;
      default:   rmux = '0;
    endcase
  end

  assign s_axil_arready = !s_axil_rvalid;
  assign s_axil_rresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
    end else begin
      if (s_axil_arvalid && s_axil_arready) begin
        s_axil_rvalid <= 1'b1;
        s_axil_rdata  <= rmux;
      end else if (s_axil_rvalid && s_axil_rready) begin
        s_axil_rvalid <= 1'b0;
      end
    end
  end

  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid);
endmodule
