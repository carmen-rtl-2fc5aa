// tb_axi_mem_if: writes random words through the AXI master into the memory
// model, checks them in the model's array, reads them back through the
// credit-limited read path and compares. The read credit is varied and the
// number of reads in flight must never exceed it. A write and a read to an
// address outside the model must raise the error flag, which err_clr clears.
module tb_axi_mem_if;
  logic clk = 1'b0, rst_n;
  logic rd_req_valid, rd_req_ready, rd_data_valid;
  logic [31:0] rd_req_addr, rd_data;
  logic [5:0] rd_credit;
  logic wr_req_valid, wr_req_ready, wr_idle, err_clr, err;
  logic [31:0] wr_req_addr, wr_req_data;
  logic [31:0] m_araddr, m_rdata, m_awaddr, m_wdata;
  logic [7:0] m_arlen, m_awlen;
  logic [2:0] m_arsize, m_awsize;
  logic [1:0] m_arburst, m_awburst, m_rresp, m_bresp;
  logic m_arvalid, m_arready, m_rlast, m_rvalid, m_rready;
  logic m_awvalid, m_awready, m_wlast, m_wvalid, m_wready, m_bvalid, m_bready;
  logic [3:0] m_wstrb;
  int checks = 0, failures = 0;
  int inflight = 0;
  logic [31:0] ref_data [64];

  axi_mem_if #(.ADDR_W(32), .CRED_W(6)) dut (.*);
  axi_mem_model #(.AW(10)) mem (
    .clk, .rst_n, .araddr(m_araddr), .arvalid(m_arvalid), .arready(m_arready),
    .rdata(m_rdata), .rresp(m_rresp), .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready),
    .awaddr(m_awaddr), .awvalid(m_awvalid), .awready(m_awready), .wdata(m_wdata),
    .wvalid(m_wvalid), .wready(m_wready), .bresp(m_bresp), .bvalid(m_bvalid), .bready(m_bready));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    inflight = inflight + int'(m_arvalid && m_arready) - int'(m_rvalid && m_rready);
    if (inflight > int'(rd_credit)) begin
      failures++;
      $display("FAIL %0d reads in flight, credit %0d", inflight, rd_credit);
    end
  end

  initial begin
    rst_n = 0; rd_req_valid = 0; rd_req_addr = 0; rd_credit = 4;
    wr_req_valid = 0; wr_req_addr = 0; wr_req_data = 0; err_clr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // writes
    for (int i = 0; i < 64; i++) begin
      ref_data[i] = $urandom;
      @(negedge clk); wr_req_valid = 1; wr_req_addr = 32'(100 + i); wr_req_data = ref_data[i];
      @(posedge clk); while (!wr_req_ready) @(posedge clk);
      @(negedge clk); wr_req_valid = 0;
    end
    while (!wr_idle) @(negedge clk);
    repeat (4) @(negedge clk);
    for (int i = 0; i < 64; i++) begin
      checks++;
      if (mem.mem[100 + i] !== ref_data[i]) begin
        failures++; $display("FAIL memory word %0d", i);
      end
    end
    checks++;
    if (err) begin failures++; $display("FAIL err set after good writes"); end
    // reads with different credits
    for (int c = 1; c <= 8; c += 3) begin
      int got = 0;
      rd_credit = 6'(c);
      fork
        for (int i = 0; i < 64; i++) begin
          @(negedge clk); rd_req_valid = 1; rd_req_addr = 32'(100 + i);
          @(posedge clk); while (!rd_req_ready) @(posedge clk);
          @(negedge clk); rd_req_valid = 0;
        end
        while (got < 64) begin
          @(posedge clk);
          if (rd_data_valid) begin
            checks++;
            if (rd_data !== ref_data[got]) begin
              failures++; $display("FAIL read %0d: %h expected %h", got, rd_data, ref_data[got]);
            end
            got++;
          end
        end
      join
    end
    // error responses
    @(negedge clk); wr_req_valid = 1; wr_req_addr = 32'h10000; wr_req_data = 0;
    @(posedge clk); while (!wr_req_ready) @(posedge clk);
    @(negedge clk); wr_req_valid = 0;
    while (!wr_idle) @(negedge clk);
    @(negedge clk);
    checks++;
    if (!err) begin failures++; $display("FAIL no error on bad write"); end
    err_clr = 1; @(negedge clk); err_clr = 0;
    checks++;
    if (err) begin failures++; $display("FAIL err not cleared"); end
    @(negedge clk); rd_req_valid = 1; rd_req_addr = 32'h20000;
    @(posedge clk); while (!rd_req_ready) @(posedge clk);
    @(negedge clk); rd_req_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (!err) begin failures++; $display("FAIL no error on bad read"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
