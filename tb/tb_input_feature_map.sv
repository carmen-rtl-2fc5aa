// tb_input_feature_map: pushes and pops random words at random rates,
// never pushing into a full buffer, and checks the popped order against a
// queue, the free count against the number of words held, and that the
// buffer reaches both full and empty.
module tb_input_feature_map;
  localparam int DEPTH = 16;
  logic clk = 1'b0, rst_n, push, pop_valid, pop_ready;
  logic [31:0] push_data, pop_data;
  logic [4:0] free;
  logic [31:0] q [$];
  int checks = 0, failures = 0, fulls = 0, empties = 0;

  input_feature_map #(.W(32), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; push = 0; push_data = 0; pop_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      int bias;
      bias = (c / 500) % 2;          // alternate fill-heavy and drain-heavy phases
      @(negedge clk);
      checks++;
      if (int'(free) != DEPTH - q.size()) begin
        failures++; $display("FAIL free %0d with %0d held", free, q.size());
      end
      if (q.size() == DEPTH) fulls++;
      if (q.size() == 0) empties++;
      push = (free != 0) && ($urandom_range(3) >= (bias ? 2 : 0));
      push_data = $urandom;
      pop_ready = ($urandom_range(3) >= (bias ? 0 : 2));
      @(posedge clk);
      if (pop_valid && pop_ready) begin
        logic [31:0] e;
        e = q.pop_front();
        checks++;
        if (pop_data != e) begin failures++; $display("FAIL popped %h expected %h", pop_data, e); end
      end
      if (push) q.push_back(push_data);
    end
    checks++;
    if (fulls == 0 || empties == 0) begin failures++; $display("FAIL full %0d empty %0d", fulls, empties); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
