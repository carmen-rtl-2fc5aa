// tb_vector_engine: loads random weights and activations into the banks of
// an 8-PE engine, steps the broadcast read/start sequence over LEN entries,
// and compares every active PE's accumulator with a reference built from
// the CORDIC signed-digit recurrence. PEs above n_pe must keep their old
// accumulator. Each MAC step must take iters + 1 cycles from start to done.
// Runs in both precisions and in approximate and accurate iteration counts.
module tb_vector_engine;
  import carmen_pkg::*;
  localparam int NPE = 8, DEPTH = 32;

  logic clk = 1'b0, rst_n;
  logic we, wsel, rd_en, mac_start, mac_clr, mac_done, mac_busy;
  logic [2:0] wpe, n_pe, acc_sel;
  logic [4:0] waddr, raddr;
  logic [DATA_W-1:0] wdata;
  prec_e prec;
  logic [ITER_W-1:0] iters;
  logic signed [ACC_W-1:0] acc_o;
  int checks = 0, failures = 0;

  longint wv [NPE][DEPTH];
  longint av [NPE][DEPTH];
  longint expect_acc [NPE];

  vector_engine #(.N_PE(NPE), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint wdigits(input longint w, input int fb, input int n);
    longint z = w, r = 0;
    for (int k = 1; k <= n; k++) begin
      longint step = longint'(1) << (fb - k);
      if (z >= 0) begin r += step; z -= step; end
      else        begin r -= step; z += step; end
    end
    return r;
  endfunction

  task automatic run_layer(input int pm, input int n, input int len, input int act);
    int fb;
    fb = (pm == 0) ? 7 : 15;
    prec = (pm == 0) ? PREC_8 : PREC_16;
    iters = ITER_W'(n);
    n_pe = 3'(act);
    for (int p = 0; p < NPE; p++)
      for (int i = 0; i < len; i++) begin
        wv[p][i] = (pm == 0) ? longint'($signed(8'($urandom))) : longint'($signed(16'($urandom)));
        av[p][i] = (pm == 0) ? longint'($signed(8'($urandom))) : longint'($signed(16'($urandom)));
        @(negedge clk); we = 1; wpe = 3'(p); wsel = 0; waddr = 5'(i); wdata = DATA_W'(wv[p][i]);
        @(negedge clk); we = 1; wsel = 1; wdata = DATA_W'(av[p][i]);
      end
    @(negedge clk); we = 0;
    for (int i = 0; i < len; i++) begin
      int cyc;
      @(negedge clk); rd_en = 1; raddr = 5'(i);
      @(negedge clk); rd_en = 0; mac_start = 1; mac_clr = (i == 0);
      @(negedge clk); mac_start = 0; mac_clr = 0; cyc = 1;
      while (!mac_done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != n + 1) begin failures++; $display("FAIL latency %0d", cyc); end
      for (int p = 0; p <= act; p++) begin
        if (i == 0) expect_acc[p] = 0;
        expect_acc[p] += av[p][i] * wdigits(wv[p][i], fb, n);
      end
    end
    for (int p = 0; p < NPE; p++) begin
      acc_sel = 3'(p);
      #1;
      checks++;
      if (longint'(acc_o) != expect_acc[p]) begin
        failures++;
        $display("FAIL pe %0d acc %0d expected %0d", p, acc_o, expect_acc[p]);
      end
    end
  endtask

  initial begin
    rst_n = 0; we = 0; wsel = 0; rd_en = 0; mac_start = 0; mac_clr = 0;
    wpe = 0; n_pe = 7; acc_sel = 0; waddr = 0; raddr = 0; wdata = 0;
    prec = PREC_8; iters = 1;
    for (int p = 0; p < NPE; p++) expect_acc[p] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_layer(0, int'(ITERS_ACC_8), 32, 7);
    run_layer(0, int'(ITERS_APX_8), 5, 7);
    run_layer(1, int'(ITERS_ACC_16), 17, 7);
    run_layer(1, int'(ITERS_APX_16), 9, 3);   // PEs 4..7 idle, keep old sums
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
