// tb_input_tracker: arms a descriptor fetch and then payloads of random
// length and PE count, feeds numbered words with random gaps, and checks
// that the first word comes out as the descriptor and that every payload
// word is written to PE p, bank (0 weights, 1 activations), entry i in the
// order p-major, weights before activations, then entry. data_done must
// pulse once after the last word, and words must be held back while the
// tracker is not armed.
module tb_input_tracker;
  localparam int NPE = 16, DEPTH = 32;
  logic clk = 1'b0, rst_n, arm_desc, arm_data, in_valid, in_ready, desc_valid;
  logic [5:0] len;
  logic [3:0] n_pe, bank_pe;
  logic [31:0] in_data, desc;
  logic bank_we, bank_wsel, data_done;
  logic [4:0] bank_addr;
  logic [15:0] bank_data;
  int checks = 0, failures = 0;

  input_tracker #(.N_PE(NPE), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; arm_desc = 0; arm_data = 0; in_valid = 0; in_data = 0; len = 1; n_pe = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 12; r++) begin
      int l, np, total, k, dones;
      logic [31:0] dw;
      l = $urandom_range(1, DEPTH);
      np = $urandom_range(0, NPE - 1);
      total = 2 * l * (np + 1);
      // not armed: nothing taken
      @(negedge clk); in_valid = 1; in_data = 32'h1234;
      @(posedge clk);
      checks++;
      if (in_ready) begin failures++; $display("FAIL ready while idle"); end
      // descriptor
      @(negedge clk); arm_desc = 1; in_valid = 0;
      @(negedge clk); arm_desc = 0; dw = $urandom; in_valid = 1; in_data = dw;
      @(posedge clk);
      checks++;
      if (!(desc_valid && desc == dw) || bank_we) begin failures++; $display("FAIL descriptor"); end
      @(negedge clk); in_valid = 0;
      // payload
      arm_data = 1; len = 6'(l); n_pe = 4'(np);
      @(negedge clk); arm_data = 0;
      k = 0; dones = 0;
      while (k < total) begin
        int p, j, sel, e;
        in_valid = ($urandom_range(3) != 0);
        in_data = 32'(k) | 32'hA0000;
        @(posedge clk);
        if (data_done) dones++;
        if (in_valid && in_ready) begin
          p = k / (2 * l); j = k % (2 * l); sel = j / l; e = j % l;
          checks++;
          if (!bank_we || int'(bank_pe) != p || int'(bank_wsel) != sel ||
              int'(bank_addr) != e || bank_data != 16'(k)) begin
            failures++;
            $display("FAIL word %0d: pe %0d sel %0d entry %0d (expected %0d %0d %0d)",
                     k, bank_pe, bank_wsel, bank_addr, p, sel, e);
          end
          k++;
        end
        @(negedge clk);
      end
      in_valid = 0;
      @(posedge clk); if (data_done) dones++;
      @(negedge clk);
      checks++;
      if (dones != 1) begin failures++; $display("FAIL %0d done pulses", dones); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
