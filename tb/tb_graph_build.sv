// tb_graph_build: random event streams on a 16x12 sensor (queues of 4).
// For each event the neighbor stream, the neighbor count and the event
// index are compared with a model (L1 ball walk, newest first, dt <= r_t,
// stop at 16). Also checks that the event is stored (it shows up as a
// neighbor of a later event at the same pixel) and that clear resets the
// index and empties the queues.
// No ports; events use the ev_valid/ev_ready handshake and neighbors are
// collected from nb_push. Search rules follow the published design; walk
// order and sizes are this design's choices.
module tb_graph_build;
  import evgnn_pkg::*;
  localparam int W = 16, H = 12, D = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clear, ev_valid, ev_ready, nb_push, done, busy;
  event_t ev;
  logic [RSW-1:0] rs; logic [TW-1:0] rt;
  nbr_t nb_data;
  logic [4:0] nb_count;
  logic [NW-1:0] ev_n;
  nbr_t got [$];
  int q_ids [W*H][$];
  int et [4096], ep [4096];
  int nev, c_early, c_empty;

  graph_build #(.W(W), .H(H), .DEPTH(D), .RS_MAX(7), .D_MAX(16)) dut (.clk, .rst_n, .clear,
    .ev_valid, .ev, .ev_ready, .rs, .rt, .nb_push, .nb_data, .done, .nb_count, .ev_n, .busy);

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  always @(posedge clk) if (rst_n && nb_push) got.push_back(nb_data);

  task automatic one(input int x, input int y, input int t);
    nbr_t exp [$];
    bit stop;
    stop = 0;
    for (int dy = -int'(rs); dy <= int'(rs) && !stop; dy++) begin
      int span; span = int'(rs) - (dy < 0 ? -dy : dy);
      for (int dx = -span; dx <= span && !stop; dx++) begin
        int px, py, q;
        px = x + dx; py = y + dy;
        if (px < 0 || py < 0 || px >= W || py >= H) continue;
        q = py*W + px;
        for (int e = q_ids[q].size() - 1; e >= 0 && !stop; e--) begin
          int j; j = q_ids[q][e];
          if (((t - et[j]) & ((1 << TW) - 1)) <= int'(rt)) begin
            exp.push_back('{n: NW'(j), p: 1'(ep[j]), adx: DW'(dx < 0 ? -dx : dx), ady: DW'(dy < 0 ? -dy : dy)});
            if (exp.size() == 16) stop = 1;
          end
        end
      end
    end
    if (stop) c_early++;
    if (exp.size() == 0) c_empty++;
    et[nev] = t; ep[nev] = $urandom_range(0, 1);
    got.delete();
    @(negedge clk);
    while (!ev_ready) @(negedge clk);
    ev_valid = 1; ev = '{x: XW'(x), y: YW'(y), t: TW'(t), p: 1'(ep[nev])};
    @(negedge clk); ev_valid = 0;
    while (!done) @(negedge clk);
    chk(nb_count == 5'(exp.size()), $sformatf("count %0d vs %0d", nb_count, exp.size()));
    chk(ev_n == NW'(nev), "event index");
    chk(got.size() == exp.size(), "stream length");
    for (int k = 0; k < exp.size() && k < got.size(); k++) chk(got[k] == exp[k], $sformatf("nb %0d", k));
    if (q_ids[y*W + x].size() == D) void'(q_ids[y*W + x].pop_front());
    q_ids[y*W + x].push_back(nev);
    nev++;
  endtask

  initial begin
    int t;
    clear = 0; ev_valid = 0; ev = '0; rs = 2; rt = 300; nev = 0; c_early = 0; c_empty = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    t = 10;
    for (int i = 0; i < 150; i++) begin
      t += $urandom_range(0, 30);
      if (i == 75) begin rs = 3; rt = 1000; end
      one($urandom_range(0, 5) + ((i % 4 == 0) ? 10 : 0), $urandom_range(0, 4) + ((i % 5 == 0) ? 7 : 0), t);
    end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int q = 0; q < W*H; q++) q_ids[q].delete();
    nev = 0;
    one(3, 3, t + 5);
    chk(got.size() == 0, "queues empty after clear");
    chk(c_early > 0 && c_empty > 0, "early stop and empty neighborhood exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
