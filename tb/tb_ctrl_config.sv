// tb_ctrl_config: AXI4-Lite writes and reads of every register; event
// writes must reach the new-event FIFO as {x, y, t, p} in order; weight and
// bias writes must produce one strobe with the decoded layer, index and
// data; status inputs must appear in STATUS, PRED and LOGIT registers.
// No ports; AXI4-Lite transfers are driven on negative edges with random
// BREADY delay. Register contents follow the published block diagram; the
// address map is this design's choice.
module tb_ctrl_config;
  import evgnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [19:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata; logic [1:0] bresp, rresp;
  logic ev_valid, ev_pop, clear, cw_we, fw_we, cb_we, fb_we, fb_idx;
  event_t ev;
  logic [RSW-1:0] rs; logic [TW-1:0] rt; logic [4:0] shift [4]; logic [31:0] feat_base;
  logic [1:0] cw_layer; logic [11:0] cw_idx; logic [12:0] fw_idx; logic signed [7:0] w_data;
  logic [6:0] cb_idx; logic signed [31:0] b_data;
  stage_e stage; logic busy, dram_err, pred_valid, pred; logic [15:0] ev_done_cnt;
  logic signed [31:0] logit0, logit1;
  int n_cw, n_fw, n_cb, n_fb, n_clr;
  logic [1:0] l_cw_layer; logic [11:0] l_cw_idx; logic [12:0] l_fw_idx; logic [6:0] l_cb_idx;
  logic l_fb_idx; logic signed [7:0] l_w; logic signed [31:0] l_b;

  ctrl_config dut (.clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready), .s_axil_wdata(wdata),
    .s_axil_wvalid(wvalid), .s_axil_wready(wready), .s_axil_bresp(bresp), .s_axil_bvalid(bvalid),
    .s_axil_bready(bready), .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .ev_valid, .ev, .ev_pop, .clear, .rs, .rt, .shift, .feat_base, .cw_we, .cw_layer, .cw_idx,
    .fw_we, .fw_idx, .w_data, .cb_we, .cb_idx, .fb_we, .fb_idx, .b_data, .stage, .busy, .dram_err,
    .ev_done_cnt, .pred_valid, .pred, .logit0, .logit1);

  always @(posedge clk) if (rst_n) begin
    if (cw_we) begin n_cw++; l_cw_layer = cw_layer; l_cw_idx = cw_idx; l_w = w_data; end
    if (fw_we) begin n_fw++; l_fw_idx = fw_idx; l_w = w_data; end
    if (cb_we) begin n_cb++; l_cb_idx = cb_idx; l_b = b_data; end
    if (fb_we) begin n_fb++; l_fb_idx = fb_idx; l_b = b_data; end
    if (clear) n_clr++;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  task automatic wr(input logic [19:0] a, input logic [31:0] d);
    @(negedge clk); awaddr = a; wdata = d; awvalid = 1; wvalid = 1; bready = 0;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk); awvalid = 0; wvalid = 0;
    chk(bvalid, "bvalid after write");
    repeat ($urandom_range(0, 2)) @(negedge clk);
    chk(bvalid, "bvalid held");
    bready = 1; @(negedge clk); bready = 0;
    chk(!bvalid, "bvalid dropped");
  endtask
  task automatic rd(input logic [19:0] a, output logic [31:0] d);
    @(negedge clk); araddr = a; arvalid = 1; rready = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(negedge clk); rready = 0;
  endtask

  initial begin
    logic [31:0] r;
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0; awaddr = 0; araddr = 0; wdata = 0;
    ev_pop = 0; stage = ST_CONV; busy = 1; dram_err = 0; ev_done_cnt = 16'd1234;
    pred_valid = 1; pred = 1; logit0 = -77; logit1 = 99;
    n_cw = 0; n_fw = 0; n_cb = 0; n_fb = 0; n_clr = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    wr(20'h14, 5); wr(20'h18, 1234); wr(20'h1C, 32'h0a090807); wr(20'h20, 32'h8000_0000);
    chk(rs == 5 && rt == 1234, "rs/rt outputs");
    chk(shift[0] == 7 && shift[1] == 8 && shift[2] == 9 && shift[3] == 10, "shift outputs");
    chk(feat_base == 32'h8000_0000, "feat_base output");
    rd(20'h14, r); chk(r == 5, "RS read");
    rd(20'h18, r); chk(r == 1234, "RT read");
    rd(20'h1C, r); chk(r == 32'h0a090807, "SHIFT read");
    rd(20'h04, r); chk(r[31:16] == 1234 && r[7:4] == 4'(ST_CONV) && r[0] && r[2], "STATUS read");
    rd(20'h24, r); chk(r == 32'h8000_0001, "PRED read");
    rd(20'h28, r); chk(int'(r) == -77, "LOGIT0 read");
    rd(20'h2C, r); chk(int'(r) == 99, "LOGIT1 read");
    // events
    for (int i = 0; i < 5; i++) begin
      wr(20'h08, 32'(((i + 3) << 8) | (100 + i)));
      wr(20'h0C, 32'(1000 * i));
      wr(20'h10, 32'(i % 2));
    end
    rd(20'h04, r); chk(!r[2], "FIFO not empty");
    for (int i = 0; i < 5; i++) begin
      @(negedge clk);
      chk(ev_valid && ev.x == XW'(100 + i) && ev.y == YW'(i + 3) && ev.t == TW'(1000 * i) && ev.p == 1'(i % 2),
          $sformatf("event %0d", i));
      ev_pop = 1; @(negedge clk); ev_pop = 0;
    end
    chk(!ev_valid, "FIFO drained");
    // loading strobes
    wr(20'h10000 | (2 << 14) | (123 << 2), 32'hffff_fff9);
    chk(n_cw == 1 && l_cw_layer == 2 && l_cw_idx == 123 && l_w == -7, "conv weight strobe");
    wr(20'h20000 | (3000 << 2), 32'd5);
    chk(n_fw == 1 && l_fw_idx == 3000 && l_w == 5, "FC weight strobe");
    wr(20'h30000 | (97 << 2), -32'sd4000);
    chk(n_cb == 1 && l_cb_idx == 97 && l_b == -4000, "conv bias strobe");
    wr(20'h30200 | (1 << 2), 32'd777);
    chk(n_fb == 1 && l_fb_idx == 1 && l_b == 777, "FC bias strobe");
    wr(20'h00, 1);
    chk(n_clr == 1, "clear pulse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
