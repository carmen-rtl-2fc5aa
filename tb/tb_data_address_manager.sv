// tb_data_address_manager: starts address runs of random base and length
// (zero included) with random back-pressure on the request stream and checks
// that exactly the addresses base .. base+count-1 come out, in order, that
// busy drops after the last and done pulses once per run, and that a start
// while busy is ignored.
module tb_data_address_manager;
  logic clk = 1'b0, rst_n, start, req_valid, req_ready, busy, done;
  logic [31:0] base, req_addr;
  logic [15:0] count;
  int checks = 0, failures = 0;

  data_address_manager dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start = 0; base = 0; count = 0; req_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      int n, got, dones;
      logic [31:0] b;
      n = (r == 0) ? 0 : $urandom_range(60);
      b = $urandom;
      @(negedge clk); start = 1; base = b; count = 16'(n);
      @(negedge clk); start = 0;
      if (n > 2) begin
        // a second start while busy must change nothing
        start = 1; base = 32'h5555; count = 16'd3;
        @(negedge clk); start = 0;
      end
      got = 0; dones = 0;
      if (n == 0) begin
        dones = 0;
      end
      while (busy) begin
        req_ready = ($urandom_range(2) != 0);
        @(posedge clk);
        if (done) dones++;
        if (req_valid && req_ready) begin
          checks++;
          if (req_addr != b + 32'(got)) begin
            failures++; $display("FAIL run %0d addr %h expected %h", r, req_addr, b + 32'(got));
          end
          got++;
        end
        @(negedge clk);
      end
      req_ready = 0;
      @(posedge clk); if (done) dones++;
      @(negedge clk);
      checks++;
      if (got != n) begin failures++; $display("FAIL run %0d: %0d addresses for %0d", r, got, n); end
      checks++;
      if (n > 0 && dones != 1) begin failures++; $display("FAIL run %0d: %0d done pulses", r, dones); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
