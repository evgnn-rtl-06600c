// tb_ncars_sample: one N-CARS-sized sample run through the accelerator at
// its default size and default radii (r_s = 3, r_t = 10 ms from the reset
// values of the registers). The sample is synthetic: 100 ms of events from a
// bar-shaped object (a car edge) sweeping across the 120x100 sensor, plus
// uniform background noise, 2,000 events in time order. The
// timestamps start at 100 ms so they wrap around the 17-bit timestamp
// counter inside the sample. Random INT8 weights are loaded; every event's
// DRAM features, logits and prediction are compared with the reference
// model, the same one as in the top-level test.
// No ports; the host model uses AXI4-Lite one transfer at a time and a
// watchdog ends a hung run. Sample length and sensor size follow the
// evaluated dataset; the event statistics and weights are this test's own.
module tb_ncars_sample;
  import evgnn_pkg::*;

  localparam int NSAMPLE = 2000;   // events in the sample
  localparam int T0 = 100_000;     // first timestamp (us)
  localparam int TSPAN = 100_000;  // sample length (us)
  localparam int FEAT_BASE = 32'h0000_1000;
  localparam int COUTS [4] = '{16, 32, 32, 32};
  localparam int CINS  [4] = '{1, 16, 32, 32};
  localparam int OFFS  [4] = '{0, 0, 16, 48};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // AXI4-Lite
  logic [19:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [1:0] bresp, rresp;
  // AXI4
  logic [31:0] m_awaddr, m_wdata, m_araddr, m_rdata;
  logic [7:0] m_awlen, m_arlen;
  logic [2:0] m_awsize, m_arsize;
  logic [1:0] m_awburst, m_arburst, m_bresp, m_rresp;
  logic [3:0] m_wstrb;
  logic m_awvalid, m_awready, m_wlast, m_wvalid, m_wready, m_bvalid, m_bready;
  logic m_arvalid, m_arready, m_rlast, m_rvalid, m_rready;

  evgnn_top dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .m_axi_awaddr(m_awaddr), .m_axi_awlen(m_awlen), .m_axi_awsize(m_awsize),
    .m_axi_awburst(m_awburst), .m_axi_awvalid(m_awvalid), .m_axi_awready(m_awready),
    .m_axi_wdata(m_wdata), .m_axi_wstrb(m_wstrb), .m_axi_wlast(m_wlast),
    .m_axi_wvalid(m_wvalid), .m_axi_wready(m_wready), .m_axi_bresp(m_bresp),
    .m_axi_bvalid(m_bvalid), .m_axi_bready(m_bready), .m_axi_araddr(m_araddr),
    .m_axi_arlen(m_arlen), .m_axi_arsize(m_arsize), .m_axi_arburst(m_arburst),
    .m_axi_arvalid(m_arvalid), .m_axi_arready(m_arready), .m_axi_rdata(m_rdata),
    .m_axi_rresp(m_rresp), .m_axi_rlast(m_rlast), .m_axi_rvalid(m_rvalid),
    .m_axi_rready(m_rready)
  );

  axi_dram_model #(.WORDS(65536), .RANDOM_STALL(1'b1)) dram (
    .clk, .rst_n,
    .awaddr(m_awaddr), .awvalid(m_awvalid), .awready(m_awready),
    .wdata(m_wdata), .wvalid(m_wvalid), .wready(m_wready),
    .bresp(m_bresp), .bvalid(m_bvalid), .bready(m_bready),
    .araddr(m_araddr), .arvalid(m_arvalid), .arready(m_arready),
    .rdata(m_rdata), .rresp(m_rresp), .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready)
  );

  // watchdog
  initial begin
    repeat (30_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- host bus tasks ----------------
  task automatic axil_write(input logic [19:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; wdata = d; awvalid = 1'b1; wvalid = 1'b1; bready = 1'b1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk);
    awvalid = 1'b0; wvalid = 1'b0;
    while (!bvalid) @(negedge clk);
    @(posedge clk);
    @(negedge clk);
    bready = 1'b0;
  endtask

  task automatic axil_read(input logic [19:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1'b1; rready = 1'b1;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 1'b0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(posedge clk);
    @(negedge clk);
    rready = 1'b0;
  endtask

  // ---------------- reference model ----------------
  int wl [4][34][32];
  int bl [4][32];
  int fcw [FC_IN][2];
  int fcb [2];
  int shf [4];
  int rs_m, rt_m;

  int ev_x [4096], ev_y [4096], ev_t [4096], ev_p [4096];
  int feat [4096][STORE_BYTES];
  int q_ids [IMG_W*IMG_H][$];
  int grid [NCELLS][32];
  int nev;                           // events since the last clear
  int exp_logit [2];
  int exp_pred;

  // mechanism counters
  int c_early, c_empty, c_border, c_overflow, c_treject, c_backlog, c_clear, c_rs_change, c_wrap;

  function automatic int sat_q(input longint v, input int sh);
    longint r;
    r = (v < 0) ? 0 : v;
    r = r >>> sh;
    return (r > 127) ? 127 : int'(r);
  endfunction

  task automatic model_clear();
    for (int q = 0; q < IMG_W*IMG_H; q++) q_ids[q].delete();
    for (int c = 0; c < NCELLS; c++) for (int m = 0; m < 32; m++) grid[c][m] = 0;
    nev = 0;
  endtask

  task automatic model_event(input int x, input int y, input int t, input int p);
    int nb [$];
    int nadx [$], nady [$];
    int i;
    bit stop;
    i = nev;
    ev_x[i] = x; ev_y[i] = y; ev_t[i] = t; ev_p[i] = p;
    stop = 1'b0;
    if (x < rs_m || y < rs_m || x + rs_m >= IMG_W || y + rs_m >= IMG_H) c_border++;
    for (int dy = -rs_m; dy <= rs_m && !stop; dy++) begin
      int span;
      span = rs_m - ((dy < 0) ? -dy : dy);
      for (int dx = -span; dx <= span && !stop; dx++) begin
        int px, py, q;
        px = x + dx; py = y + dy;
        if (px < 0 || py < 0 || px >= IMG_W || py >= IMG_H) continue;
        q = py * IMG_W + px;
        for (int e = q_ids[q].size() - 1; e >= 0 && !stop; e--) begin
          int j, dt;
          j  = q_ids[q][e];
          dt = (t - ev_t[j]) & ((1 << TW) - 1);
          if (dt <= rt_m) begin
            nb.push_back(j);
            nadx.push_back(dx < 0 ? -dx : dx);
            nady.push_back(dy < 0 ? -dy : dy);
            if (nb.size() == DMAX) stop = 1'b1;
          end else c_treject++;
        end
      end
    end
    if (stop) c_early++;
    if (nb.size() == 0) c_empty++;
    // four layers, each from the neighbors' stored features
    for (int l = 0; l < 4; l++) begin
      for (int m = 0; m < COUTS[l]; m++) begin
        longint best;
        best = 0;
        for (int k = 0; k < nb.size(); k++) begin
          longint acc;
          int j;
          j = nb[k];
          acc = 0;
          for (int c = 0; c < CINS[l] + 2; c++) begin
            int xin;
            if (c < CINS[l]) xin = (l == 0) ? ev_p[j] : feat[j][OFFS[l] + c];
            else if (c == CINS[l]) xin = nadx[k];
            else xin = nady[k];
            acc += longint'(xin) * longint'(wl[l][c][m]);
          end
          if (k == 0 || acc > best) best = acc;
        end
        feat[i][((l == 0) ? 0 : (l == 1) ? 16 : (l == 2) ? 48 : 80) + m] = sat_q(best + bl[l][m], shf[l]);
      end
    end
    // store in queue
    if (q_ids[y*IMG_W + x].size() == QDEPTH) begin
      void'(q_ids[y*IMG_W + x].pop_front());
      c_overflow++;
    end
    q_ids[y*IMG_W + x].push_back(i);
    // readout and FC
    begin
      int cidx;
      cidx = (y / 16) * GRID_X + (x / 16);
      for (int m = 0; m < 32; m++)
        if (feat[i][80 + m] > grid[cidx][m]) grid[cidx][m] = feat[i][80 + m];
    end
    for (int c = 0; c < 2; c++) begin
      longint acc;
      acc = fcb[c];
      for (int cc = 0; cc < NCELLS; cc++)
        for (int m = 0; m < 32; m++) acc += longint'(grid[cc][m]) * longint'(fcw[cc*32 + m][c]);
      exp_logit[c] = int'(acc);
    end
    exp_pred = (exp_logit[1] > exp_logit[0]) ? 1 : 0;
    nev++;
  endtask

  // ---------------- stimulus helpers ----------------
  task automatic send_event(input int x, input int y, input int t, input int p);
    axil_write(20'h00008, 32'((y << 8) | x));
    axil_write(20'h0000C, 32'(t));
    axil_write(20'h00010, 32'(p));
  endtask

  task automatic wait_done(input int target);
    logic [31:0] st;
    int guard;
    guard = 0;
    do begin
      axil_read(20'h00004, st);
      guard++;
    end while (st[31:16] != 16'(target) && guard < 100000);
    check(st[31:16] == 16'(target), "event count reached");
  endtask

  task automatic check_event_out(input int i);
    logic [31:0] r;
    int bad;
    bad = 0;
    for (int b = 0; b < STORE_BYTES; b++) begin
      logic [31:0] wv;
      wv = dram.mem[(FEAT_BASE >> 2) + i*32 + b/4];
      if (int'(wv[8*(b%4) +: 8]) != feat[i][b]) bad++;
    end
    check(bad == 0, $sformatf("DRAM features of event %0d (%0d bytes differ)", i, bad));
  endtask

  task automatic check_pred();
    logic [31:0] r0, r1, rp;
    axil_read(20'h00028, r0);
    axil_read(20'h0002C, r1);
    axil_read(20'h00024, rp);
    check(int'(r0) == exp_logit[0] && int'(r1) == exp_logit[1],
          $sformatf("logits %0d %0d, expected %0d %0d", int'(r0), int'(r1), exp_logit[0], exp_logit[1]));
    check(rp[31] && int'(rp[0]) == exp_pred, "prediction");
  endtask


  initial begin
    logic [31:0] r;
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    awaddr = 0; araddr = 0; wdata = 0;
    c_early = 0; c_empty = 0; c_border = 0; c_overflow = 0; c_treject = 0;
    c_backlog = 0; c_clear = 0; c_rs_change = 0; c_wrap = 0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;

    // parameters
    rs_m = 3; rt_m = 10000;                 // register reset values
    shf = '{3, 7, 7, 7};
    axil_write(20'h0001C, 32'((shf[3] << 24) | (shf[2] << 16) | (shf[1] << 8) | shf[0]));
    axil_write(20'h00020, FEAT_BASE);
    axil_read(20'h00018, r);
    check(r == 32'(rt_m), "RT register read-back");

    // weights and biases
    for (int l = 0; l < 4; l++)
      for (int k = 0; k < CINS[l] + 2; k++)
        for (int m = 0; m < COUTS[l]; m++) begin
          wl[l][k][m] = $urandom_range(0, 15) - 6;
          axil_write(20'h10000 | 20'(l << 14) | 20'((k*COUTS[l] + m) << 2), 32'(wl[l][k][m]));
        end
    for (int l = 0; l < 4; l++)
      for (int m = 0; m < COUTS[l]; m++) begin
        bl[l][m] = $urandom_range(0, 200) - 60;
        axil_write(20'h30000 | 20'((l*32 + m) << 2), 32'(bl[l][m]));
      end
    for (int k = 0; k < FC_IN; k++)
      for (int c = 0; c < 2; c++) begin
        fcw[k][c] = $urandom_range(0, 7) - 4;
        axil_write(20'h20000 | 20'((k*2 + c) << 2), 32'(fcw[k][c]));
      end
    for (int c = 0; c < 2; c++) begin
      fcb[c] = $urandom_range(0, 2000) - 1000;
      axil_write(20'h30200 | 20'(c << 2), 32'(fcb[c]));
    end

    model_clear();
    for (int e = 0; e < NSAMPLE; e++) begin
      int x, y, p, t;
      t = T0 + (e * TSPAN) / NSAMPLE + $urandom_range(0, 30);
      if ($urandom_range(0, 99) < 15) begin               // background noise
        x = $urandom_range(0, IMG_W - 1); y = $urandom_range(0, IMG_H - 1);
        p = $urandom_range(0, 1);
      end else begin                                       // moving bar
        int bx;
        bx = 10 + ((t - T0) * 100) / TSPAN;
        x = bx + $urandom_range(0, 3) - 1; y = $urandom_range(40, 60);
        p = (x >= bx) ? 1 : 0;
      end
      if (t >= (1 << TW) && t - 30 < (1 << TW) + TSPAN / NSAMPLE) c_wrap++;
      model_event(x, y, t, p);
      send_event(x, y, t, p);
      wait_done(nev);
      check_event_out(nev - 1);
      check_pred();
    end
    axil_read(20'h00004, r);
    check(r[3] == 1'b0, "no DRAM error");
    $display("mechanisms: early_stop=%0d empty=%0d border=%0d overflow=%0d t_reject=%0d wrap=%0d",
             c_early, c_empty, c_border, c_overflow, c_treject, c_wrap);
    check(c_early > 0,    "early stop happened");
    check(c_empty > 0,    "empty neighborhood happened");
    check(c_treject > 0,  "temporal reject happened");
    check(c_wrap > 0,     "timestamp wrap happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
