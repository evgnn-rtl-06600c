// tb_baq: random aggregated values, biases and shifts; each output must be
// min(127, max(0, agg + bias) >> shift).
// No ports; purely combinational checks after a settling delay. Bias, ReLU
// and INT8 follow the published design; the shift-and-saturate rule is this
// design's choice.
module tb_baq;
  localparam int C = 32;
  int checks = 0, failures = 0;
  logic signed [31:0] agg [C];
  logic signed [31:0] bias [C];
  logic [4:0] shift;
  logic signed [7:0] y [C];
  baq #(.COUT(C), .ACC_W(32)) dut (.agg, .bias, .shift, .y);
  initial begin
    #100000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 300; i++) begin
      shift = 5'($urandom_range(0, 12));
      for (int m = 0; m < C; m++) begin
        agg[m] = $urandom_range(0, 40000) - 20000;
        bias[m] = $urandom_range(0, 400) - 200;
      end
      #1;
      for (int m = 0; m < C; m++) begin
        longint v;
        v = longint'(agg[m]) + longint'(bias[m]);
        if (v < 0) v = 0;
        v = v >> shift;
        if (v > 127) v = 127;
        checks++;
        if (int'(y[m]) != int'(v)) begin
          failures++;
          if (failures < 10) $display("FAIL agg %0d bias %0d sh %0d -> %0d exp %0d", agg[m], bias[m], shift, y[m], v);
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
