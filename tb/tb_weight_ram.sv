// tb_weight_ram: writes every weight of a 34x32 memory lane by lane, reads
// every column back and checks all lanes and the one-cycle read latency.
// No ports; writes one per cycle, reads checked one cycle after the address.
// The per-layer BRAM follows the published design; the column-per-word
// layout is this design's choice.
module tb_weight_ram;
  localparam int D = 34, C = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we, re;
  logic [5:0] waddr, raddr;
  logic [4:0] wlane;
  logic signed [7:0] wdata;
  logic signed [7:0] rdata [C];
  logic signed [7:0] model [D][C];
  weight_ram #(.DEPTH(D), .COUT(C)) dut (.clk, .we, .waddr, .wlane, .wdata, .re, .raddr, .rdata);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wlane = 0; wdata = 0;
    for (int k = 0; k < D; k++)
      for (int m = 0; m < C; m++) begin
        @(negedge clk); we = 1; waddr = k; wlane = m; wdata = 8'($urandom); model[k][m] = wdata;
      end
    @(negedge clk); we = 0;
    for (int k = D - 1; k >= 0; k--) begin
      @(negedge clk); re = 1; raddr = k;
      @(negedge clk); re = 0; raddr = 0;
      for (int m = 0; m < C; m++) chk(rdata[m] == model[k][m], $sformatf("w[%0d][%0d]", k, m));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
