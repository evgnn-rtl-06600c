// tb_spatial_search: an event-queue buffer (10x8 pixels, depth 4) is filled
// with random events, then the search runs from many positions (corners,
// edges, centre) and radii 0..4 with random back-pressure from the candidate
// side. The candidate stream (entry, |dx|, |dy|) must equal, in order, the
// list a model builds by walking the L1 ball row by row, newest entry
// first. A run with stop raised midway must end early.
// No ports; candidates are taken through a FIFO-like ready signal with
// random stalls. The L1 ball and border skipping follow the published
// design; the visiting order is this design's choice.
module tb_spatial_search;
  import evgnn_pkg::*;
  localparam int W = 10, H = 8, D = 4, NQ = W*H;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [$clog2(NQ)-1:0] st_raddr, push_q;
  logic [$clog2(D):0] st_count;
  logic [$clog2(D)-1:0] st_head;
  logic [$clog2(NQ*D)-1:0] ent_raddr;
  evq_entry_t ent_rdata, push_entry;
  logic push, clear, qbusy;
  logic start, stop, cand_push, cand_afull, busy, done;
  logic [XW-1:0] x_i; logic [YW-1:0] y_i; logic [RSW-1:0] rs;
  cand_t cand_data;
  evq_entry_t model [NQ][$];
  cand_t exp_q [$];
  int got;

  evq_buffer #(.W(W), .H(H), .DEPTH(D)) u_q (.clk, .rst_n, .st_raddr, .st_count, .st_head,
    .ent_raddr, .ent_rdata, .push, .push_q, .push_entry, .clear, .busy(qbusy));
  spatial_search #(.W(W), .H(H), .DEPTH(D), .RS_MAX(7)) dut (.clk, .rst_n, .start, .x_i, .y_i, .rs,
    .stop, .st_raddr, .st_count, .st_head, .ent_raddr, .ent_rdata, .cand_push, .cand_data,
    .cand_afull, .busy, .done);

  initial begin
    repeat (300000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  always @(posedge clk) if (rst_n && cand_push) begin
    if (got < exp_q.size()) chk(cand_data == exp_q[got], $sformatf("candidate %0d", got));
    else chk(0, "extra candidate");
    got++;
  end
  always @(negedge clk) cand_afull = ($urandom_range(0, 3) == 0);

  task automatic run(input int x, input int y, input int r, input int stop_after);
    exp_q.delete();
    for (int dy = -r; dy <= r; dy++) begin
      int span; span = r - (dy < 0 ? -dy : dy);
      for (int dx = -span; dx <= span; dx++) begin
        int px, py;
        px = x + dx; py = y + dy;
        if (px < 0 || py < 0 || px >= W || py >= H) continue;
        for (int e = model[py*W+px].size() - 1; e >= 0; e--) begin
          cand_t c;
          c.e = model[py*W+px][e]; c.adx = DW'(dx < 0 ? -dx : dx); c.ady = DW'(dy < 0 ? -dy : dy);
          exp_q.push_back(c);
        end
      end
    end
    got = 0;
    @(negedge clk); start = 1; x_i = x; y_i = y; rs = r;
    @(negedge clk); start = 0;
    while (!done) begin
      @(negedge clk);
      if (stop_after >= 0 && got >= stop_after) stop = 1;
    end
    stop = 0;
    if (stop_after < 0) chk(got == exp_q.size(), $sformatf("count %0d vs %0d at (%0d,%0d) r%0d", got, exp_q.size(), x, y, r));
    else chk(got <= stop_after + 2 && got < exp_q.size(), $sformatf("early stop %0d", got));
    @(negedge clk);
  endtask

  initial begin
    push = 0; clear = 0; start = 0; stop = 0; push_q = 0; push_entry = 0; x_i = 0; y_i = 0; rs = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    while (qbusy) @(negedge clk);
    for (int i = 0; i < 200; i++) begin
      evq_entry_t e; int q;
      e.t = TW'(i); e.p = 1'($urandom); e.n = NW'(i);
      q = (i % 3 == 0) ? $urandom_range(30, 40) : $urandom_range(0, NQ - 1);
      if (i % 17 == 0) continue;   // leave some queues emptier
      @(negedge clk); push = 1; push_q = q; push_entry = e;
      @(negedge clk); push = 0;
      while (qbusy) @(negedge clk);
      if (model[q].size() == D) void'(model[q].pop_front());
      model[q].push_back(e);
    end
    run(0, 0, 3, -1);
    run(W-1, H-1, 4, -1);
    run(5, 4, 0, -1);
    run(5, 4, 1, -1);
    run(5, 4, 3, -1);
    run(0, 4, 2, -1);
    run(9, 0, 2, -1);
    for (int i = 0; i < 10; i++) run($urandom_range(0, W-1), $urandom_range(0, H-1), $urandom_range(0, 4), -1);
    run(5, 4, 4, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
