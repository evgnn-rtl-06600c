// axi_mm_master: the AXI communication block on the datapath side. It turns
// the graph convolution's simple word requests (req held until a one-cycle
// ack) into AXI4 memory-mapped transactions towards the host DRAM: single
// 32-bit beats (AxLEN = 0, AxSIZE = 4 bytes, INCR), one transaction in
// flight. A read drives AR, waits for R and returns RDATA with ack; a write
// drives AW and W together, waits for both handshakes and for B, then acks.
// Any non-OKAY response sets the sticky err flag (cleared by clear).
// The AXI MM link to DRAM follows the published design; single-beat
// transfers are this design's own (simplest) choice.
// Lint note: rst_n resets the flops asynchronously and also disables the
// assertions (disable iff), which a linter reports as a net used both
// synchronously and asynchronously; the assertions only sample it, so this
// warning stands.
// RLAST is not used: every transfer is a single beat, so each beat is last.
module axi_mm_master #(
  parameter int unsigned AW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  // request side
  input  logic          req,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [31:0]   wdata,
  output logic          ack,
  output logic [31:0]   rdata,
  output logic          err,
  // AXI4 master
  output logic [AW-1:0] m_axi_awaddr,
  output logic [7:0]    m_axi_awlen,
  output logic [2:0]    m_axi_awsize,
  output logic [1:0]    m_axi_awburst,
  output logic          m_axi_awvalid,
  input  logic          m_axi_awready,
  output logic [31:0]   m_axi_wdata,
  output logic [3:0]    m_axi_wstrb,
  output logic          m_axi_wlast,
  output logic          m_axi_wvalid,
  input  logic          m_axi_wready,
  input  logic [1:0]    m_axi_bresp,
  input  logic          m_axi_bvalid,
  output logic          m_axi_bready,
  output logic [AW-1:0] m_axi_araddr,
  output logic [7:0]    m_axi_arlen,
  output logic [2:0]    m_axi_arsize,
  output logic [1:0]    m_axi_arburst,
  output logic          m_axi_arvalid,
  input  logic          m_axi_arready,
  input  logic [31:0]   m_axi_rdata,
  input  logic [1:0]    m_axi_rresp,
  input  logic          m_axi_rlast,
  input  logic          m_axi_rvalid,
  output logic          m_axi_rready
);
  typedef enum logic [2:0] {A_IDLE, A_AR, A_R, A_W, A_B, A_ACK} astate_e;
  astate_e st;
  logic aw_done, w_done;

  assign m_axi_awlen   = 8'd0;
  assign m_axi_awsize  = 3'd2;
  assign m_axi_awburst = 2'b01;
  assign m_axi_arlen   = 8'd0;
  assign m_axi_arsize  = 3'd2;
  assign m_axi_arburst = 2'b01;
  assign m_axi_wstrb   = 4'hF;
  assign m_axi_wlast   = 1'b1;

  assign m_axi_arvalid = (st == A_AR);
  assign m_axi_rready  = (st == A_R);
  assign m_axi_awvalid = (st == A_W) && !aw_done;
  assign m_axi_wvalid  = (st == A_W) && !w_done;
  assign m_axi_bready  = (st == A_B);
  assign ack           = (st == A_ACK);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= A_IDLE;
      m_axi_awaddr <= '0; m_axi_araddr <= '0; m_axi_wdata <= '0;
      aw_done <= 1'b0; w_done <= 1'b0;
      rdata <= '0; err <= 1'b0;
    end else begin
      if (clear) err <= 1'b0;
      unique case (st)
        A_IDLE: if (req) begin
          if (we) begin
            m_axi_awaddr <= addr;
            m_axi_wdata  <= wdata;
            aw_done <= 1'b0;
            w_done  <= 1'b0;
            st <= A_W;
          end else begin
            m_axi_araddr <= addr;
            st <= A_AR;
          end
        end
        A_AR: if (m_axi_arready) st <= A_R;
        A_R: if (m_axi_rvalid) begin
          rdata <= m_axi_rdata;
          if (m_axi_rresp != 2'b00) err <= 1'b1;
          st <= A_ACK;
        end
        A_W: begin
          if (m_axi_awready) aw_done <= 1'b1;
          if (m_axi_wready)  w_done  <= 1'b1;
          if ((aw_done || m_axi_awready) && (w_done || m_axi_wready)) st <= A_B;
        end
        A_B: if (m_axi_bvalid) begin
          if (m_axi_bresp != 2'b00) err <= 1'b1;
          st <= A_ACK;
        end
        A_ACK: st <= A_IDLE;
        default: st <= A_IDLE;
      endcase
    end
  end

  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_arvalid && !m_axi_arready |=> m_axi_arvalid && $stable(m_axi_araddr));
  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_awvalid && !m_axi_awready |=> m_axi_awvalid && $stable(m_axi_awaddr));
endmodule
