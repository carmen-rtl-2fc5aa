// axi_mem_model: behavioural model of the off-chip memory (not synthesizable).
//
// A word-addressed array of 2^AW 32-bit words behind an AXI4 slave that
// accepts single-beat bursts. Ready signals toggle at random, read data
// returns in order after a random delay and a write answers on B once both
// its AW and W beats were taken. Addresses outside the array read as zero
// and answer SLVERR. Testbenches load and inspect the array directly
// through the hierarchical name mem.
module axi_mem_model #(
  parameter int unsigned AW = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] araddr,
  input  logic        arvalid,
  output logic        arready,
  output logic [31:0] rdata,
  output logic [1:0]  rresp,
  output logic        rlast,
  output logic        rvalid,
  input  logic        rready,
  input  logic [31:0] awaddr,
  input  logic        awvalid,
  output logic        awready,
  input  logic [31:0] wdata,
  input  logic        wvalid,
  output logic        wready,
  output logic [1:0]  bresp,
  output logic        bvalid,
  input  logic        bready
);

  logic [31:0] mem [2**AW];
  logic [31:0] rq_addr [$];
  logic [31:0] aw_q [$];
  logic [31:0] w_q [$];
  int reads = 0, writes = 0;

  initial for (int i = 0; i < 2**AW; i++) mem[i] = 32'h0;

  function automatic bit in_range(input logic [31:0] a);
    return (a >> 2) < (32'd1 << AW);
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      arready <= 0; awready <= 0; wready <= 0; rvalid <= 0; bvalid <= 0;
      rdata <= 0; rresp <= 0; rlast <= 1; bresp <= 0;
    end else begin
      if (arvalid && arready) rq_addr.push_back(araddr);
      if (awvalid && awready) aw_q.push_back(awaddr);
      if (wvalid && wready)   w_q.push_back(wdata);
      arready <= ($urandom_range(3) != 0);
      awready <= ($urandom_range(2) != 0);
      wready  <= ($urandom_range(2) != 0);
      // read data
      if (rvalid && rready) rvalid <= 0;
      if ((!rvalid || rready) && rq_addr.size() > 0 && $urandom_range(3) != 0) begin
        logic [31:0] a;
        a = rq_addr.pop_front();
        rvalid <= 1;
        rlast  <= 1;
        rdata  <= in_range(a) ? mem[a[AW+1:2]] : 32'h0;
        rresp  <= in_range(a) ? 2'b00 : 2'b10;
        reads++;
      end
      // write response
      if (bvalid && bready) bvalid <= 0;
      else if (!bvalid && aw_q.size() > 0 && w_q.size() > 0) begin
        logic [31:0] a, d;
        a = aw_q.pop_front();
        d = w_q.pop_front();
        if (in_range(a)) mem[a[AW+1:2]] = d;
        bvalid <= 1;
        bresp  <= in_range(a) ? 2'b00 : 2'b10;
        writes++;
      end
    end
  end
endmodule
