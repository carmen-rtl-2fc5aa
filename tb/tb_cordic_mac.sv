// tb_cordic_mac: self-checking testbench of the iterative CORDIC MAC.
//
// Runs random multiply-accumulate sequences in both precisions and with
// every legal iteration count. Each result is compared with a reference
// that rebuilds the signed-digit weight w' from the CORDIC recurrence, and
// also with the exact product sum, whose distance to the hardware result
// must stay within sum|a| * 2^(FB-iters). The load-to-done latency must be
// iters + 1 cycles.
module tb_cordic_mac;
  import carmen_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  logic start, clr, busy, done;
  prec_e prec;
  logic [ITER_W-1:0] iters;
  logic signed [DATA_W-1:0] a, w;
  logic signed [ACC_W-1:0] acc;
  int checks = 0, failures = 0;

  cordic_mac dut (.clk, .rst_n, .start, .clr, .prec, .iters, .a_i(a), .w_i(w),
                  .busy, .done, .acc);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Signed-digit value of w after n iterations, in units of 2^-fb.
  function automatic longint wdigits(input longint wv, input int fb, input int n);
    longint z = wv, r = 0;
    for (int k = 1; k <= n; k++) begin
      longint step = longint'(1) << (fb - k);
      if (z >= 0) begin r += step; z -= step; end
      else        begin r -= step; z += step; end
    end
    return r;
  endfunction

  task automatic one_mac(input longint av, input longint wv, input bit c,
                         input int n, inout longint ref_acc, inout longint exact,
                         inout longint bound, input int fb);
    int cyc = 0;
    @(negedge clk);
    a = DATA_W'(av); w = DATA_W'(wv); clr = c; iters = ITER_W'(n); start = 1'b1;
    @(negedge clk);
    start = 1'b0; clr = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    if (c) begin ref_acc = 0; exact = 0; bound = 0; end
    ref_acc += av * wdigits(wv, fb, n);
    exact   += av * wv;
    bound   += (av < 0 ? -av : av) * (longint'(1) << (fb - n));
    checks++;
    if (longint'(acc) != ref_acc) begin
      failures++;
      $display("FAIL acc=%0d ref=%0d (a=%0d w=%0d n=%0d)", acc, ref_acc, av, wv, n);
    end
    checks++;
    if ((longint'(acc) - exact > bound) || (exact - longint'(acc) > bound)) begin
      failures++;
      $display("FAIL bound acc=%0d exact=%0d bound=%0d", acc, exact, bound);
    end
    checks++;
    if (cyc != n + 1) begin
      failures++;
      $display("FAIL latency %0d expected %0d", cyc, n + 1);
    end
  endtask

  initial begin
    longint r, e, b;
    rst_n = 1'b0; start = 0; clr = 0; a = 0; w = 0; iters = 1; prec = PREC_8;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int pm = 0; pm < 2; pm++) begin
      int fb;
      fb = (pm == 0) ? 7 : 15;
      prec = (pm == 0) ? PREC_8 : PREC_16;
      for (int n = 1; n <= fb; n++) begin
        for (int t = 0; t < 12; t++) begin
          longint av, wv;
          if (pm == 0) begin
            av = longint'($signed(8'($urandom)));
            wv = longint'($signed(8'($urandom)));
          end else begin
            av = longint'($signed(16'($urandom)));
            wv = longint'($signed(16'($urandom)));
          end
          one_mac(av, wv, (t % 4) == 0, n, r, e, b, fb);
        end
      end
      // Full-iteration products against the exact value of corner operands.
      one_mac(pm == 0 ? -128 : -32768, pm == 0 ? 127 : 32767, 1'b1, fb, r, e, b, fb);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
