// tb_parameters_allocator: sends random descriptors and checks every decoded
// field one cycle later: length clamped to 1..32, PE count clamped to the
// engine size, the iteration count picked by precision and accuracy mode
// from the four iteration registers, and the payload size 2*len*(n_pe+1).
module tb_parameters_allocator;
  import carmen_pkg::*;
  localparam int NPE = 64, DEPTH = 32;
  logic clk = 1'b0, rst_n, desc_valid, params_valid, clear_acc, writeback;
  logic [31:0] desc;
  logic [ITER_W-1:0] iters_acc8, iters_apx8, iters_acc16, iters_apx16, iters;
  logic [5:0] len;
  logic [5:0] n_pe;
  prec_e prec;
  af_e af_sel;
  logic [3:0] out_shift;
  logic [15:0] payload_words;
  int checks = 0, failures = 0;

  parameters_allocator #(.N_PE(NPE), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; desc_valid = 0; desc = 0;
    iters_acc8 = 6; iters_apx8 = 4; iters_acc16 = 12; iters_apx16 = 8;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 500; r++) begin
      layer_desc_t d;
      int el, enp, eit;
      d = layer_desc_t'($urandom);
      iters_acc8 = 4'($urandom); iters_apx8 = 4'($urandom);
      iters_acc16 = 4'($urandom); iters_apx16 = 4'($urandom);
      el  = (d.len == 0) ? 1 : ((d.len > DEPTH) ? DEPTH : int'(d.len));
      enp = (int'(d.n_pe) >= NPE) ? NPE - 1 : int'(d.n_pe);
      eit = (d.prec == PREC_16) ? (d.acc_mode ? int'(iters_acc16) : int'(iters_apx16))
                                : (d.acc_mode ? int'(iters_acc8)  : int'(iters_apx8));
      @(negedge clk); desc_valid = 1; desc = 32'(d);
      @(negedge clk); desc_valid = 0;
      checks++;
      if (!params_valid || int'(len) != el || int'(n_pe) != enp || prec != d.prec ||
          af_sel != d.af_sel || clear_acc != d.clear_acc || writeback != d.writeback ||
          out_shift != d.out_shift || int'(iters) != eit ||
          int'(payload_words) != 2 * el * (enp + 1)) begin
        failures++;
        $display("FAIL descriptor %h: len %0d/%0d npe %0d/%0d iters %0d/%0d words %0d",
                 d, len, el, n_pe, enp, iters, eit, payload_words);
      end
      @(negedge clk);
      checks++;
      if (params_valid) begin failures++; $display("FAIL params_valid held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
