// tb_fc_head: random FC weights and biases, a random 1792-element input
// vector served by a one-cycle-latency read port; logits and the predicted
// class must match the exact products, and a prediction must take exactly
// 1792 + 3 cycles from start to done.
// No ports; start is a one-cycle pulse and the run ends on done. The 1792 ->
// 2 shape follows the published design; the separate MatVec and the 3-cycle
// overhead are this design's choices.
module tb_fc_head;
  import evgnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, done, busy, w_we, b_we, b_idx, pred;
  logic [10:0] rd_addr;
  logic signed [7:0] rd_data, w_data;
  logic [12:0] w_idx;
  logic signed [31:0] b_data;
  logic signed [31:0] logits [2];
  int vec [FC_IN], wv [FC_IN][2], bv [2];
  fc_head dut (.clk, .rst_n, .start, .done, .busy, .rd_addr, .rd_data, .w_we, .w_idx, .w_data,
    .b_we, .b_idx, .b_data, .logits, .pred,
    .mv_sel, .mv_en, .mv_first, .mv_x, .mv_w, .mv_acc);
  // the MatVec unit the FC head borrows (in the accelerator: layer 3's)
  logic mv_sel, mv_en, mv_first;
  logic signed [7:0]  mv_x;
  logic signed [7:0]  mv_w   [2];
  logic signed [31:0] mv_acc [2];
  matvec #(.COUT(2), .ACC_W(32)) u_mv (.clk, .rst_n, .en(mv_en && mv_sel), .first(mv_first), .x(mv_x),
    .w(mv_w), .acc(mv_acc));
  always_ff @(posedge clk) rd_data <= 8'(vec[rd_addr]);
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  initial begin
    start = 0; w_we = 0; b_we = 0; b_idx = 0; w_idx = 0; w_data = 0; b_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < FC_IN; k++) for (int c = 0; c < 2; c++) begin
      @(negedge clk); w_we = 1; w_idx = 13'(k*2 + c); wv[k][c] = $urandom_range(0, 255) - 128; w_data = 8'(wv[k][c]);
    end
    @(negedge clk); w_we = 0;
    for (int r = 0; r < 6; r++) begin
      longint e [2]; int cyc;
      for (int c = 0; c < 2; c++) begin
        @(negedge clk); b_we = 1; b_idx = 1'(c); bv[c] = $urandom_range(0, 20000) - 10000; b_data = bv[c];
      end
      @(negedge clk); b_we = 0;
      for (int k = 0; k < FC_IN; k++) vec[k] = (r == 0) ? 0 : $urandom_range(0, 127);
      for (int c = 0; c < 2; c++) begin
        e[c] = bv[c];
        for (int k = 0; k < FC_IN; k++) e[c] += vec[k] * wv[k][c];
      end
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      chk(logits[0] == int'(e[0]) && logits[1] == int'(e[1]), $sformatf("logits %0d %0d vs %0d %0d", logits[0], logits[1], e[0], e[1]));
      chk(pred == (e[1] > e[0]), "pred");
      chk(cyc == FC_IN + 3, $sformatf("latency %0d cycles", cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
