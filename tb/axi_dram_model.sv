// axi_dram_model: behavioural stand-in for the host DRAM behind an AXI4
// slave port (testbench only, not synthesizable intent). Single-beat
// transfers, 32-bit words, byte address / 4 indexes mem. Read data and write
// responses come STALL+1 cycles after the address handshake; with
// RANDOM_STALL set, ready signals are withheld on random cycles to exercise
// the master's handshakes. Out-of-range addresses answer SLVERR.
// Interface: AXI4 slave write/read channels (single beat, LEN ignored).
// Timing: one transfer at a time per channel. Not part of the published
// design; the host DRAM is a vendor part.
module axi_dram_model #(
  parameter int unsigned WORDS        = 65536,
  parameter bit          RANDOM_STALL = 1'b0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] awaddr,
  input  logic        awvalid,
  output logic        awready,
  input  logic [31:0] wdata,
  input  logic        wvalid,
  output logic        wready,
  output logic [1:0]  bresp,
  output logic        bvalid,
  input  logic        bready,
  input  logic [31:0] araddr,
  input  logic        arvalid,
  output logic        arready,
  output logic [31:0] rdata,
  output logic [1:0]  rresp,
  output logic        rlast,
  output logic        rvalid,
  input  logic        rready
);
  logic [31:0] mem [WORDS];
  logic        aw_got, w_got;
  logic [31:0] aw_a, w_d;
  logic        gate, gate_w;

  initial for (int i = 0; i < int'(WORDS); i++) mem[i] = '0;

  // independent stalls on AW and W so the two handshakes can come apart
  always_ff @(posedge clk) begin
    gate   <= RANDOM_STALL ? ($urandom_range(0, 3) != 0) : 1'b1;
    gate_w <= RANDOM_STALL ? ($urandom_range(0, 3) != 0) : 1'b1;
  end

  assign arready = gate && !rvalid;
  assign awready = gate && !aw_got && !bvalid;
  assign wready  = gate_w && !w_got && !bvalid;
  assign rlast   = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rvalid <= 1'b0; bvalid <= 1'b0; aw_got <= 1'b0; w_got <= 1'b0;
      rdata <= '0; rresp <= '0; bresp <= '0; aw_a <= '0; w_d <= '0;
    end else begin
      if (arvalid && arready) begin
        rvalid <= 1'b1;
        if ((araddr >> 2) < WORDS) begin rdata <= mem[araddr >> 2]; rresp <= 2'b00; end
        else begin rdata <= '0; rresp <= 2'b10; end
      end else if (rvalid && rready) rvalid <= 1'b0;

      if (awvalid && awready) begin aw_got <= 1'b1; aw_a <= awaddr; end
      if (wvalid && wready)   begin w_got  <= 1'b1; w_d  <= wdata;  end
      if (aw_got && w_got && !bvalid) begin
        if ((aw_a >> 2) < WORDS) begin mem[aw_a >> 2] <= w_d; bresp <= 2'b00; end
        else bresp <= 2'b10;
        bvalid <= 1'b1;
        aw_got <= 1'b0;
        w_got  <= 1'b0;
      end else if (bvalid && bready) bvalid <= 1'b0;
    end
  end
endmodule
