// tb_matvec: random INT8 vectors of length 34 against random 32-column
// weights; after the last enabled cycle every accumulator must equal the
// exact dot product, and first must restart the sums. Idle cycles in the
// middle of a vector (en low) must not change the sums.
// No ports; inputs change on negative edges, sums are checked one cycle
// after the last step. The MAC-per-channel structure follows the published
// design.
module tb_matvec;
  localparam int C = 32, N = 34;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en, first;
  logic signed [7:0] x;
  logic signed [7:0] w [C];
  logic signed [31:0] acc [C];
  matvec #(.COUT(C), .ACC_W(32)) dut (.clk, .rst_n, .en, .first, .x, .w, .acc);
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  initial begin
    int expv [C];
    en = 0; first = 0; x = 0;
    for (int m = 0; m < C; m++) w[m] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int v = 0; v < 30; v++) begin
      for (int m = 0; m < C; m++) expv[m] = 0;
      for (int k = 0; k < N; k++) begin
        @(negedge clk);
        en = 1; first = (k == 0); x = 8'($urandom);
        if (v % 5 == 0) x = (k % 2) ? -128 : 127;
        for (int m = 0; m < C; m++) begin
          w[m] = 8'($urandom);
          if (v % 5 == 0) w[m] = -128;
          expv[m] += int'(x) * int'(w[m]);
        end
        if ($urandom_range(0, 4) == 0) begin
          @(negedge clk); en = 0; x = 8'($urandom);
        end
      end
      @(negedge clk); en = 0;
      for (int m = 0; m < C; m++) chk(acc[m] == expv[m], $sformatf("acc[%0d] %0d vs %0d", m, acc[m], expv[m]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
