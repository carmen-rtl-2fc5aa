// tb_kernel_mem_bank: fills both arrays of a kernel memory bank with random
// words, reads every entry back in random order and checks that each read
// returns the last word written to that entry of each array one cycle after
// the read request, and holds it while no read is requested.
module tb_kernel_mem_bank;
  localparam int DW = 16, DEPTH = 32;
  logic clk = 1'b0;
  logic we, wsel, rd_en;
  logic [4:0] waddr, raddr;
  logic [DW-1:0] wdata, w_o, a_o;
  logic [DW-1:0] wref [DEPTH];
  logic [DW-1:0] aref [DEPTH];
  int checks = 0, failures = 0;

  kernel_mem_bank #(.DW(DW), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; wsel = 0; rd_en = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int pass = 0; pass < 3; pass++) begin
      for (int i = 0; i < 2 * DEPTH; i++) begin
        @(negedge clk);
        we = 1; wsel = i[0]; waddr = 5'(i >> 1); wdata = DW'($urandom);
        if (wsel) aref[waddr] = wdata; else wref[waddr] = wdata;
      end
      @(negedge clk); we = 0;
      for (int i = 0; i < DEPTH; i++) begin
        int r;
        r = $urandom_range(DEPTH - 1);
        @(negedge clk); rd_en = 1; raddr = 5'(r);
        @(negedge clk); rd_en = 0; raddr = 5'(r + 1);
        checks++;
        if (w_o !== wref[r] || a_o !== aref[r]) begin
          failures++;
          $display("FAIL entry %0d: w %h/%h a %h/%h", r, w_o, wref[r], a_o, aref[r]);
        end
        @(negedge clk);
        checks++;
        if (w_o !== wref[r] || a_o !== aref[r]) begin
          failures++;
          $display("FAIL hold entry %0d", r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
