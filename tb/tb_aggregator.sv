// tb_aggregator: sequences of 0..16 random signed messages per event; the
// output must be the per-channel maximum (0 for an event with no message),
// and init must forget the previous event.
// No ports; drives init/en on the negative clock edge and reads agg one
// cycle later. The expected max rule is the published one; the 0 for an
// empty neighborhood is this design's choice.
module tb_aggregator;
  localparam int C = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic init, en;
  logic signed [31:0] msg [C];
  logic signed [31:0] agg [C];
  aggregator #(.COUT(C), .ACC_W(32)) dut (.clk, .rst_n, .init, .en, .msg, .agg);
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  initial begin
    init = 0; en = 0;
    for (int m = 0; m < C; m++) msg[m] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int e = 0; e < 60; e++) begin
      int n; longint mx [C];
      @(negedge clk); init = 1; @(negedge clk); init = 0;
      n = (e % 7 == 0) ? 0 : $urandom_range(1, 16);
      for (int m = 0; m < C; m++) mx[m] = 0;
      for (int k = 0; k < n; k++) begin
        @(negedge clk); en = 1;
        for (int m = 0; m < C; m++) begin
          msg[m] = $urandom_range(0, 2000) - 1500;
          if (k == 0 || msg[m] > mx[m]) mx[m] = msg[m];
        end
      end
      @(negedge clk); en = 0;
      for (int m = 0; m < C; m++) chk(agg[m] == int'(mx[m]), $sformatf("ev %0d ch %0d", e, m));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
