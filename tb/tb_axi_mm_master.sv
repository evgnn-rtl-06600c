// tb_axi_mm_master: random word reads and writes through the AXI4 master
// into the DRAM model with random ready stalls; read data must match a
// shadow copy, every request must be acknowledged once, and an access
// outside the model's range must set the error flag.
// No ports; the request side is driven on negative edges and held until ack.
// The AXI4 link is from the published design; the single-beat protocol and
// error flag are this design's choices.
module tb_axi_mm_master;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clear, req, we, ack, err;
  logic [31:0] addr, wdata, rdata;
  logic [31:0] awaddr, m_wdata, araddr, m_rdata;
  logic [7:0] awlen, arlen; logic [2:0] awsize, arsize; logic [1:0] awburst, arburst, bresp, rresp;
  logic [3:0] wstrb;
  logic awvalid, awready, wlast, wvalid, wready, bvalid, bready, arvalid, arready, rlast, rvalid, rready;
  logic [31:0] shadow [1024];

  axi_mm_master dut (.clk, .rst_n, .clear, .req, .we, .addr, .wdata, .ack, .rdata, .err,
    .m_axi_awaddr(awaddr), .m_axi_awlen(awlen), .m_axi_awsize(awsize), .m_axi_awburst(awburst),
    .m_axi_awvalid(awvalid), .m_axi_awready(awready), .m_axi_wdata(m_wdata), .m_axi_wstrb(wstrb),
    .m_axi_wlast(wlast), .m_axi_wvalid(wvalid), .m_axi_wready(wready), .m_axi_bresp(bresp),
    .m_axi_bvalid(bvalid), .m_axi_bready(bready), .m_axi_araddr(araddr), .m_axi_arlen(arlen),
    .m_axi_arsize(arsize), .m_axi_arburst(arburst), .m_axi_arvalid(arvalid), .m_axi_arready(arready),
    .m_axi_rdata(m_rdata), .m_axi_rresp(rresp), .m_axi_rlast(rlast), .m_axi_rvalid(rvalid),
    .m_axi_rready(rready));
  axi_dram_model #(.WORDS(1024), .RANDOM_STALL(1'b1)) mem (.clk, .rst_n, .awaddr, .awvalid, .awready,
    .wdata(m_wdata), .wvalid, .wready, .bresp, .bvalid, .bready, .araddr, .arvalid, .arready,
    .rdata(m_rdata), .rresp, .rlast, .rvalid, .rready);

  int n_aw = 0, n_w = 0, n_ar = 0;
  always @(posedge clk) begin
    if (awvalid && awready) n_aw++;
    if (wvalid && wready) n_w++;
    if (arvalid && arready) n_ar++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  task automatic access(input bit w, input int a, input logic [31:0] d, output logic [31:0] r);
    int aw0, w0, ar0;
    aw0 = n_aw; w0 = n_w; ar0 = n_ar;
    @(negedge clk); req = 1; we = w; addr = a; wdata = d;
    while (!ack) @(negedge clk);
    r = rdata;
    @(negedge clk); req = 0;
    chk(!ack, "single ack");
    chk(n_aw - aw0 == int'(w) && n_w - w0 == int'(w) && n_ar - ar0 == int'(!w), "one handshake per channel per access");
  endtask
  initial begin
    logic [31:0] r;
    clear = 0; req = 0; we = 0; addr = 0; wdata = 0;
    for (int i = 0; i < 1024; i++) shadow[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      int a; a = $urandom_range(0, 63);
      if ($urandom_range(0, 1)) begin
        logic [31:0] d; d = $urandom;
        access(1, a*4, d, r); shadow[a] = d;
      end else begin
        access(0, a*4, 0, r);
        chk(r == shadow[a], $sformatf("read %0d", a));
      end
    end
    chk(!err, "no error in range");
    chk(awlen == 0 && arlen == 0 && awsize == 2 && wstrb == 4'hf, "single-beat word bursts");
    access(0, 32'h10000, 0, r);
    chk(err, "error flag on SLVERR");
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    chk(!err, "error flag cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
