// axi_mem_if: AXI4 master port to the off-chip memory.
//
// Turns the accelerator's word requests into single-beat AXI4 bursts
// (LEN = 0, SIZE = 4 bytes, INCR) on a 32-bit data bus.
//   Reads: a valid/ready address stream becomes AR transfers; R beats
//   return in order on a data stream. Reads are credit-limited: an AR is
//   issued only while the reads in flight are fewer than rd_credit, the free
//   space the receiving buffer reports, so returning data always fits and R
//   is never stalled.
//   Writes: one request (address and data) at a time. AW and W are presented
//   together and may complete in either order; the port takes the next
//   request after the B response. wr_idle is high when no write is pending.
// Any SLVERR/DECERR response sets the sticky err flag, cleared by err_clr.
// Addresses are word indices on the request side and byte addresses on the
// AXI side. The paper names only an AXI-based off-chip memory interface;
// the single-beat bursts, the credit scheme and the write ordering are this
// design's choices.
module axi_mem_if #(
  parameter int unsigned ADDR_W = 32,
  parameter int unsigned CRED_W = 6
) (
  input  logic              clk,
  input  logic              rst_n,
  // read request and data streams
  input  logic              rd_req_valid,
  output logic              rd_req_ready,
  input  logic [ADDR_W-1:0] rd_req_addr,   // word address
  input  logic [CRED_W-1:0] rd_credit,     // free entries at the receiver
  output logic              rd_data_valid,
  output logic [31:0]       rd_data,
  // write requests
  input  logic              wr_req_valid,
  output logic              wr_req_ready,
  input  logic [ADDR_W-1:0] wr_req_addr,   // word address
  input  logic [31:0]       wr_req_data,
  output logic              wr_idle,
  // error flag
  input  logic              err_clr,
  output logic              err,
  // AXI4 read address / data
  output logic [ADDR_W-1:0] m_araddr,
  output logic [7:0]        m_arlen,
  output logic [2:0]        m_arsize,
  output logic [1:0]        m_arburst,
  output logic              m_arvalid,
  input  logic              m_arready,
  input  logic [31:0]       m_rdata,
  input  logic [1:0]        m_rresp,
  input  logic              m_rlast,
  input  logic              m_rvalid,
  output logic              m_rready,
  // AXI4 write address / data / response
  output logic [ADDR_W-1:0] m_awaddr,
  output logic [7:0]        m_awlen,
  output logic [2:0]        m_awsize,
  output logic [1:0]        m_awburst,
  output logic              m_awvalid,
  input  logic              m_awready,
  output logic [31:0]       m_wdata,
  output logic [3:0]        m_wstrb,
  output logic              m_wlast,
  output logic              m_wvalid,
  input  logic              m_wready,
  input  logic [1:0]        m_bresp,
  input  logic              m_bvalid,
  output logic              m_bready
);

  // ---------------- read side ----------------
  logic [CRED_W-1:0] inflight_q;
  logic              ar_fire, r_fire, credit_ok;

  assign credit_ok     = (inflight_q < rd_credit);
  assign m_arvalid     = rd_req_valid && credit_ok;
  assign rd_req_ready  = m_arready && credit_ok;
  assign m_araddr      = {rd_req_addr[ADDR_W-3:0], 2'b00};
  assign m_arlen       = 8'd0;
  assign m_arsize      = 3'd2;
  assign m_arburst     = 2'b01;
  assign m_rready      = 1'b1;
  assign ar_fire       = m_arvalid && m_arready;
  assign r_fire        = m_rvalid && m_rready;
  assign rd_data_valid = r_fire;
  assign rd_data       = m_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight_q <= '0;
    else        inflight_q <= inflight_q + CRED_W'(ar_fire) - CRED_W'(r_fire);
  end

  // ---------------- write side ----------------
  typedef enum logic [1:0] {W_IDLE, W_SEND, W_RESP} wstate_e;
  wstate_e     wst_q;
  logic        aw_done_q, w_done_q;
  logic [ADDR_W-1:0] awaddr_q;
  logic [31:0] wdata_q;

  assign wr_req_ready = (wst_q == W_IDLE);
  assign wr_idle      = (wst_q == W_IDLE);
  assign m_awaddr     = {awaddr_q[ADDR_W-3:0], 2'b00};
  assign m_awlen      = 8'd0;
  assign m_awsize     = 3'd2;
  assign m_awburst    = 2'b01;
  assign m_awvalid    = (wst_q == W_SEND) && !aw_done_q;
  assign m_wdata      = wdata_q;
  assign m_wstrb      = 4'hf;
  assign m_wlast      = 1'b1;
  assign m_wvalid     = (wst_q == W_SEND) && !w_done_q;
  assign m_bready     = (wst_q == W_RESP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wst_q     <= W_IDLE;
      aw_done_q <= 1'b0;
      w_done_q  <= 1'b0;
      awaddr_q  <= '0;
      wdata_q   <= '0;
    end else begin
      unique case (wst_q)
        W_IDLE: if (wr_req_valid) begin
          awaddr_q  <= wr_req_addr;
          wdata_q   <= wr_req_data;
          aw_done_q <= 1'b0;
          w_done_q  <= 1'b0;
          wst_q     <= W_SEND;
        end
        W_SEND: begin
          if (m_awvalid && m_awready) aw_done_q <= 1'b1;
          if (m_wvalid && m_wready)   w_done_q  <= 1'b1;
          if ((aw_done_q || m_awready) && (w_done_q || m_wready)) wst_q <= W_RESP;
        end
        W_RESP: if (m_bvalid) wst_q <= W_IDLE;
        default: wst_q <= W_IDLE;
      endcase
    end
  end

  // ---------------- errors ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                           err <= 1'b0;
    else if ((r_fire && m_rresp[1]) || (m_bvalid && m_bready && m_bresp[1])) err <= 1'b1;
    else if (err_clr)                     err <= 1'b0;
  end

  // A read beat must belong to an issued request and be a single-beat burst.
  a_r_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                 m_rvalid |-> (inflight_q != '0) && m_rlast);
  // A write response must only arrive once both AW and W were sent.
  a_b_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                 m_bvalid |-> (wst_q == W_RESP));

endmodule
