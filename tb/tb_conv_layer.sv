// tb_conv_layer: one 16+2 -> 32 layer. Loads random weights, then for
// events with 0..5 neighbors streams each neighbor's 18 inputs over a
// common step counter of 34 steps (as in layer-parallel use, steps 18..33
// must be ignored) and checks y = min(127, max(0, max_j(W^T v_j) + b) >> s).
// No ports; inputs change on negative edges, y is read three cycles after
// the last neighbor ends. The layer equation follows the published design;
// the step timing is this design's choice.
module tb_conv_layer;
  localparam int CIN = 16, COUT = 32, STEPS = 34;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic ev_start, step_valid, first, nb_end, w_we;
  logic [5:0] step;
  logic signed [7:0] x, w_data;
  logic [11:0] w_idx;
  logic signed [31:0] bias [COUT];
  logic [4:0] shift;
  logic signed [7:0] y [COUT];
  int wm [CIN+2][COUT];

  conv_layer #(.CIN(CIN), .COUT(COUT), .ACC_W(32), .SW(6)) dut (.clk, .rst_n, .ev_start, .step_valid,
    .step, .first, .nb_end, .x, .w_we, .w_idx, .w_data, .bias, .shift, .y,
    .ext_sel, .ext_en, .ext_first, .ext_x, .ext_w, .mv_acc);
  logic ext_sel = 1'b0, ext_en = 1'b0, ext_first = 1'b0;
  logic signed [7:0] ext_x = '0;
  logic signed [7:0] ext_w [COUT];
  logic signed [31:0] mv_acc [COUT];
  initial for (int m = 0; m < COUT; m++) ext_w[m] = '0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    ev_start = 0; step_valid = 0; first = 0; nb_end = 0; w_we = 0; step = 0; x = 0; w_data = 0; w_idx = 0;
    shift = 4;
    for (int m = 0; m < COUT; m++) bias[m] = $urandom_range(0, 200) - 100;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < CIN + 2; k++)
      for (int m = 0; m < COUT; m++) begin
        @(negedge clk); w_we = 1; w_idx = 12'(k*COUT + m); wm[k][m] = $urandom_range(0, 15) - 7; w_data = 8'(wm[k][m]);
      end
    @(negedge clk); w_we = 0;
    for (int e = 0; e < 25; e++) begin
      int n; longint best [COUT];
      n = (e % 6 == 0) ? 0 : $urandom_range(1, 5);
      @(negedge clk); ev_start = 1; @(negedge clk); ev_start = 0;
      for (int m = 0; m < COUT; m++) best[m] = 0;
      for (int j = 0; j < n; j++) begin
        int v [STEPS];
        for (int s = 0; s < STEPS; s++) v[s] = (s < CIN) ? $urandom_range(0, 127) : $urandom_range(0, 7);
        for (int m = 0; m < COUT; m++) begin
          longint a; a = 0;
          for (int s = 0; s < CIN + 2; s++) a += v[s] * wm[s][m];
          if (j == 0 || a > best[m]) best[m] = a;
        end
        for (int s = 0; s < STEPS; s++) begin
          step_valid = 1; step = 6'(s); first = (s == 0); nb_end = (s == STEPS - 1); x = 8'(v[s]);
          @(negedge clk);
        end
        step_valid = 0; nb_end = 0; first = 0;
      end
      repeat (3) @(negedge clk);
      for (int m = 0; m < COUT; m++) begin
        longint r; r = best[m] + bias[m];
        if (r < 0) r = 0;
        r = r >> shift;
        if (r > 127) r = 127;
        chk(int'(y[m]) == int'(r), $sformatf("ev %0d ch %0d: %0d vs %0d", e, m, y[m], r));
      end
    end
    // lending the MatVec unit: an outside client streams its own vector
    for (int r = 0; r < 4; r++) begin
      longint e [COUT];
      int y_before [COUT];
      for (int m = 0; m < COUT; m++) begin e[m] = 0; y_before[m] = y[m]; end
      @(negedge clk); ext_sel = 1;
      for (int k = 0; k < 40; k++) begin
        ext_en = 1; ext_first = (k == 0);
        ext_x = 8'($urandom_range(0, 255));
        for (int m = 0; m < COUT; m++) begin
          ext_w[m] = 8'($urandom_range(0, 255));
          e[m] += longint'(ext_x) * longint'(ext_w[m]);
        end
        @(negedge clk);
      end
      ext_en = 0; ext_first = 0;
      @(negedge clk);
      for (int m = 0; m < COUT; m++) begin
        chk(mv_acc[m] == 32'(e[m]), $sformatf("lent MatVec ch %0d", m));
        chk(int'(y[m]) == y_before[m], "layer output kept while lent");
      end
      ext_sel = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
