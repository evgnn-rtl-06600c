// tb_graph_readout: random (x, y, features) updates over the 120x100
// sensor; after each batch every one of the 56*32 outputs read through the
// FC port must equal the per-cell per-channel maximum of a model grid with
// cell = (y/16)*8 + x/16. clear must zero the grid.
// No ports; updates are one per cycle, reads have one cycle latency. The 8x7
// grid follows the published design; the flattening order is this design's
// choice.
module tb_graph_readout;
  import evgnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clear, upd;
  logic [XW-1:0] x; logic [YW-1:0] y;
  logic signed [7:0] feat [32];
  logic [10:0] raddr;
  logic signed [7:0] rdata;
  int g [56][32];
  graph_readout dut (.clk, .rst_n, .clear, .upd, .x, .y, .feat, .raddr, .rdata);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  task automatic verify();
    for (int k = 0; k < 56*32; k++) begin
      @(negedge clk); raddr = 11'(k);
      @(negedge clk);
      chk(int'(rdata) == g[k/32][k%32], $sformatf("cell %0d ch %0d", k/32, k%32));
    end
  endtask
  initial begin
    clear = 0; upd = 0; x = 0; y = 0; raddr = 0;
    for (int m = 0; m < 32; m++) feat[m] = 0;
    for (int c = 0; c < 56; c++) for (int m = 0; m < 32; m++) g[c][m] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 2; r++) begin
      for (int i = 0; i < 400; i++) begin
        @(negedge clk);
        upd = 1; x = XW'($urandom_range(0, IMG_W - 1)); y = YW'($urandom_range(0, IMG_H - 1));
        if (i % 50 == 0) begin x = 119; y = 99; end
        for (int m = 0; m < 32; m++) begin
          int v; v = $urandom_range(0, 127); feat[m] = 8'(v);
          if (v > g[(y/16)*8 + x/16][m]) g[(y/16)*8 + x/16][m] = v;
        end
      end
      @(negedge clk); upd = 0;
      verify();
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int c = 0; c < 56; c++) for (int m = 0; m < 32; m++) g[c][m] = 0;
    end
    verify();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
