// tb_evq_buffer: pushes random events into a small queue array (8x6 pixels,
// depth 4), reads every queue's state and entries and compares with a
// per-pixel model of the last 4 events; includes overflow and clear.
// No ports; read addresses are driven on negative edges and data checked one
// cycle later. Push-drops-oldest follows the published design; the small
// size is only to reach overflow quickly.
module tb_evq_buffer;
  import evgnn_pkg::*;
  localparam int W = 8, H = 6, D = 4, NQ = W*H;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [$clog2(NQ)-1:0] st_raddr, push_q;
  logic [$clog2(D):0] st_count;
  logic [$clog2(D)-1:0] st_head;
  logic [$clog2(NQ*D)-1:0] ent_raddr;
  evq_entry_t ent_rdata, push_entry;
  logic push, clear, busy;
  evq_entry_t model [NQ][$];

  evq_buffer #(.W(W), .H(H), .DEPTH(D)) dut (.clk, .rst_n, .st_raddr, .st_count, .st_head,
    .ent_raddr, .ent_rdata, .push, .push_q, .push_entry, .clear, .busy);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  task automatic do_push(input int q, input evq_entry_t e);
    @(negedge clk); push = 1; push_q = q; push_entry = e;
    @(negedge clk); push = 0;
    while (busy) @(negedge clk);
    if (model[q].size() == D) void'(model[q].pop_front());
    model[q].push_back(e);
  endtask

  task automatic verify_all();
    for (int q = 0; q < NQ; q++) begin
      @(negedge clk); st_raddr = q;
      @(negedge clk);
      chk(st_count == model[q].size(), $sformatf("count q%0d %0d vs %0d", q, st_count, model[q].size()));
      for (int k = 0; k < model[q].size(); k++) begin
        logic [$clog2(D)-1:0] slot;
        slot = st_head - 1 - k;
        ent_raddr = {st_raddr, slot};
        @(negedge clk);
        chk(ent_rdata == model[q][model[q].size() - 1 - k], $sformatf("entry q%0d k%0d", q, k));
      end
    end
  endtask

  initial begin
    push = 0; clear = 0; st_raddr = 0; ent_raddr = 0; push_q = 0; push_entry = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    while (busy) @(negedge clk);
    for (int i = 0; i < 300; i++) begin
      evq_entry_t e;
      e.t = TW'(i * 3); e.p = 1'($urandom); e.n = NW'(i);
      do_push((i % 7 == 0) ? 5 : $urandom_range(0, NQ - 1), e);
    end
    verify_all();
    begin
      int cycles;
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      cycles = 1;
      while (busy) begin @(negedge clk); cycles++; end
      chk(cycles == NQ + 1, $sformatf("clear takes one cycle per queue (%0d)", cycles));
      for (int q = 0; q < NQ; q++) model[q].delete();
    end
    verify_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
