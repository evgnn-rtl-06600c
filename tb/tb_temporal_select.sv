// tb_temporal_select: random candidates (including timestamps that wrap
// around 2^17) are offered from a queue; every candidate with
// (t_i - t_j) mod 2^17 <= r_t must come out as a neighbor in order, the
// count must match, and after 16 neighbors full must rise and stop pops.
// No ports; candidates are offered on negative edges, one per cycle. dt <=
// r_t and D_max = 16 follow the published design; the modulo difference is
// this design's choice.
module tb_temporal_select;
  import evgnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int last16;
  logic start, cand_empty, cand_pop, nb_push, full;
  logic [TW-1:0] t_i, rt;
  cand_t cand_data;
  nbr_t nb_data;
  logic [4:0] nb_count;
  cand_t cq [$];
  nbr_t exp_nb [$];
  int got;

  temporal_select #(.D_MAX(16)) dut (.clk, .rst_n, .start, .t_i, .rt, .cand_empty, .cand_data,
    .cand_pop, .nb_push, .nb_data, .full, .nb_count);

  assign cand_empty = (cq.size() == 0);
  assign cand_data  = cand_empty ? '0 : cq[0];

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (nb_push) begin
      if (got < exp_nb.size()) chk(nb_data == exp_nb[got], "neighbor data");
      else chk(0, "extra neighbor");
      got++;
    end
    if (cand_pop) void'(cq.pop_front());
  end

  int nfull = 0;
  initial begin
    start = 0; t_i = 0; rt = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 60; r++) begin
      int n, expected;
      @(negedge clk);
      t_i = TW'($urandom_range(0, 3000)); rt = TW'($urandom_range(0, 500));
      start = 1;
      @(negedge clk); start = 0;
      exp_nb.delete(); got = 0; expected = 0;
      n = $urandom_range(0, 40); last16 = -1;
      for (int i = 0; i < n; i++) begin
        cand_t c; int dt;
        case ($urandom_range(0, 7))
          0, 1: dt = int'(rt);          // exactly on the boundary
          2:    dt = int'(rt) + 1;      // just outside
          default: dt = $urandom_range(0, 1000);
        endcase
        c.e.t = t_i - TW'(dt); c.e.p = 1'($urandom); c.e.n = NW'($urandom);
        c.adx = DW'($urandom_range(0, 7)); c.ady = DW'($urandom_range(0, 7));
        cq.push_back(c);
        if (dt <= int'(rt) && expected < 16) begin
          exp_nb.push_back('{n: c.e.n, p: c.e.p, adx: c.adx, ady: c.ady});
          expected++;
          if (expected == 16) last16 = i;
        end
      end
      repeat (n + 3) @(negedge clk);
      chk(got == expected, $sformatf("neighbors %0d vs %0d", got, expected));
      chk(nb_count == 5'(expected), "nb_count");
      chk(full == (expected == 16), "full flag");
      if (full) begin
        nfull++;
        chk(cq.size() == n - last16 - 1, "pops stopped after the 16th neighbor");
      end
      cq.delete();
    end
    chk(nfull > 0, "early stop exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
