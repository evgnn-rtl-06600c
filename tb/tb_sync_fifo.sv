// tb_sync_fifo: random push/pop traffic against a queue model; checks data
// order, empty/full/almost_full/count flags and flush.
// No ports; one random push/pop decision per cycle. The buffers are named in
// the published design; the FIFO details are this design's choice.
module tb_sync_fifo;
  localparam int W = 12, D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic flush, push, pop, empty, full, afull;
  logic [W-1:0] wdata, rdata;
  logic [$clog2(D):0] count;
  logic [W-1:0] model [$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .flush, .push, .wdata, .pop, .rdata,
    .empty, .full, .almost_full(afull), .count);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  int nfull = 0;
  initial begin
    flush = 0; push = 0; pop = 0; wdata = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      chk(empty == (model.size() == 0), "empty");
      chk(full == (model.size() == D), "full");
      chk(afull == (model.size() >= D - 1), "almost_full");
      chk(count == model.size(), "count");
      if (model.size() > 0) chk(rdata == model[0], $sformatf("data %0h vs %0h", rdata, model[0]));
      if (full) nfull++;
      flush = (i % 997 == 996);
      push  = ($urandom_range(0, 99) < ((i / 500) % 2 ? 70 : 35)) && !full;
      pop   = ($urandom_range(0, 99) < ((i / 500) % 2 ? 35 : 70)) && !empty;
      wdata = W'($urandom);
      @(posedge clk);
      #1;
      if (flush) model.delete();
      else begin
        if (pop) void'(model.pop_front());
        if (push) model.push_back(wdata);
      end
    end
    chk(nfull > 0, "full state reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
