// tb_graph_conv: the four-layer graph convolution with a word-wide memory
// responder (random 0..3 wait cycles) holding random stored features of 64
// past events. For events with 0..16 neighbors it checks the 112 bytes
// written back at the new event's address, the last-layer output, and that
// the compute phase takes exactly 34 cycles per neighbor: all four layers
// run in parallel, so the widest layer (32+2 inputs) sets the time.
// No ports; the memory responder acks each word after 0..3 cycles. Layer-
// parallel execution follows the published design; the 128-byte DRAM record
// is this design's choice.
module tb_graph_conv;
  import evgnn_pkg::*;
  localparam int BASE = 32'h400;
  localparam int COUTS [4] = '{16, 32, 32, 32};
  localparam int CINS  [4] = '{1, 16, 32, 32};
  localparam int OFFS  [4] = '{0, 0, 16, 48};
  localparam int OOFF  [4] = '{0, 16, 48, 80};
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic nb_push, start, done, busy, mem_req, mem_we, mem_ack, w_we, b_we;
  nbr_t nb_data;
  logic [4:0] nb_count;
  logic [NW-1:0] ev_n;
  logic signed [7:0] l3_feat [32];
  logic [31:0] mem_addr, mem_wdata, mem_rdata;
  logic [31:0] feat_base;
  logic [4:0] shift [4];
  logic [1:0] w_layer; logic [11:0] w_idx; logic signed [7:0] w_data;
  logic [6:0] b_idx; logic signed [31:0] b_data;
  logic [15:0] comp_cycles;
  logic [31:0] mem [8192];
  int wl [4][34][32], bl [4][32], feat [128][112], ep [128];

  graph_conv #(.D_MAX(16)) dut (.clk, .rst_n, .nb_push, .nb_data, .start, .nb_count, .ev_n, .done,
    .busy, .l3_feat, .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_ack, .mem_rdata, .feat_base,
    .shift, .w_we, .w_layer, .w_idx, .w_data, .b_we, .b_idx, .b_data, .comp_cycles,
    .fc_sel(1'b0), .fc_en(1'b0), .fc_first(1'b0), .fc_x(8'sd0), .fc_w, .fc_acc);
  logic signed [7:0]  fc_w   [NCLASS];
  logic signed [31:0] fc_acc [NCLASS];
  initial for (int c = 0; c < NCLASS; c++) fc_w[c] = '0;

  // memory responder
  int wait_cnt;
  always_ff @(posedge clk) begin
    mem_ack <= 1'b0;
    if (mem_req && !mem_ack) begin
      if (wait_cnt == 0) begin
        mem_ack <= 1'b1;
        if (mem_we) mem[mem_addr >> 2] <= mem_wdata;
        else mem_rdata <= mem[mem_addr >> 2];
        wait_cnt <= $urandom_range(0, 3);
      end else wait_cnt <= wait_cnt - 1;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    wait_cnt = 0;
    nb_push = 0; start = 0; nb_data = '0; nb_count = 0; ev_n = 0;
    w_we = 0; b_we = 0; w_layer = 0; w_idx = 0; w_data = 0; b_idx = 0; b_data = 0;
    feat_base = BASE; shift = '{2, 6, 6, 6};
    for (int i = 0; i < 8192; i++) mem[i] = 0;
    for (int j = 0; j < 64; j++) begin
      ep[j] = $urandom_range(0, 1);
      for (int b = 0; b < 112; b++) begin
        feat[j][b] = $urandom_range(0, 127);
        mem[(BASE >> 2) + j*32 + b/4][8*(b%4) +: 8] = 8'(feat[j][b]);
      end
    end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int l = 0; l < 4; l++)
      for (int k = 0; k < CINS[l] + 2; k++)
        for (int m = 0; m < COUTS[l]; m++) begin
          @(negedge clk); w_we = 1; w_layer = 2'(l); w_idx = 12'(k*COUTS[l] + m);
          wl[l][k][m] = $urandom_range(0, 15) - 7; w_data = 8'(wl[l][k][m]);
        end
    @(negedge clk); w_we = 0;
    for (int l = 0; l < 4; l++)
      for (int m = 0; m < COUTS[l]; m++) begin
        @(negedge clk); b_we = 1; b_idx = 7'(l*32 + m); bl[l][m] = $urandom_range(0, 300) - 100; b_data = bl[l][m];
      end
    @(negedge clk); b_we = 0;

    for (int e = 0; e < 24; e++) begin
      int n, nid [16], adx [16], ady [16], exp_out [112], newn;
      n = (e == 0) ? 0 : (e == 1) ? 16 : $urandom_range(1, 16);
      newn = 64 + e;
      for (int k = 0; k < n; k++) begin
        nid[k] = $urandom_range(0, 63); adx[k] = $urandom_range(0, 3); ady[k] = $urandom_range(0, 3);
        @(negedge clk); nb_push = 1;
        nb_data = '{n: NW'(nid[k]), p: 1'(ep[nid[k]]), adx: DW'(adx[k]), ady: DW'(ady[k])};
      end
      @(negedge clk); nb_push = 0;
      start = 1; nb_count = 5'(n); ev_n = NW'(newn);
      @(negedge clk); start = 0;
      for (int l = 0; l < 4; l++)
        for (int m = 0; m < COUTS[l]; m++) begin
          longint best, r;
          best = 0;
          for (int k = 0; k < n; k++) begin
            longint a; a = 0;
            for (int c = 0; c < CINS[l] + 2; c++) begin
              int xin;
              xin = (c < CINS[l]) ? ((l == 0) ? ep[nid[k]] : feat[nid[k]][OFFS[l] + c]) : (c == CINS[l]) ? adx[k] : ady[k];
              a += xin * wl[l][c][m];
            end
            if (k == 0 || a > best) best = a;
          end
          r = best + bl[l][m]; if (r < 0) r = 0; r = r >> shift[l]; if (r > 127) r = 127;
          exp_out[OOFF[l] + m] = int'(r);
        end
      while (!done) @(negedge clk);
      begin
        int bad; bad = 0;
        for (int b = 0; b < 112; b++)
          if (int'(mem[(BASE >> 2) + newn*32 + b/4][8*(b%4) +: 8]) != exp_out[b]) bad++;
        chk(bad == 0, $sformatf("event %0d (%0d nbrs): %0d bytes differ", e, n, bad));
        for (int m = 0; m < 32; m++) chk(int'(l3_feat[m]) == exp_out[80 + m], "l3 output");
        chk(int'(comp_cycles) == 34 * n, $sformatf("compute cycles %0d for %0d neighbors", comp_cycles, n));
      end
      for (int b = 0; b < 112; b++) feat[newn][b] = exp_out[b];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
