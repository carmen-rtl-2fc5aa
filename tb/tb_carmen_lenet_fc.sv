// tb_carmen_lenet_fc: the two fully-connected layers of LeNet-5 run on
// the accelerator at its default size (256 PEs, 32-entry kernel banks).
// F6 maps 120 inputs to 84 outputs with tanh; the output layer maps 84
// inputs to 10 classes with SoftMax. One PE computes one output neuron, so
// both layers fit in a single PE row; their input vectors are longer than
// a kernel bank and are split into 32-entry chunks. Every chunk is a layer
// pass: the first clears the accumulators, the following ones keep the
// partial sums, and only the last one applies the activation and writes
// the results back (F6: 32+32+32+24, output layer: 32+32+20). Weights and
// activations are random 8-bit values with the layer shapes of LeNet-5;
// results are checked against the same reference as in tb_carmen_full,
// together with the MAC-step and MAC-phase cycle counts of every pass.
module tb_carmen_lenet_fc;
  import carmen_pkg::*;
  localparam int NPE = 256;
  localparam int PASSES = 12;

  logic clk = 1'b0, rst_n;
  logic cfg_we, done;
  logic [2:0] cfg_addr;
  logic [31:0] cfg_wdata, cfg_rdata;
  logic [31:0] m_araddr, m_rdata, m_awaddr, m_wdata;
  logic [7:0] m_arlen, m_awlen;
  logic [2:0] m_arsize, m_awsize;
  logic [1:0] m_arburst, m_awburst, m_rresp, m_bresp;
  logic m_arvalid, m_arready, m_rlast, m_rvalid, m_rready;
  logic m_awvalid, m_awready, m_wlast, m_wvalid, m_wready, m_bvalid, m_bready;
  logic [3:0] m_wstrb;
  logic pp_out_valid, pp_out_ready, pp_out_last, pp_in_valid, pp_in_ready;
  logic signed [AF_W-1:0] pp_out_data, pp_in_data;
  int checks = 0, failures = 0;

  carmen_top dut (.*);

  axi_mem_model #(.AW(17)) mem (
    .clk, .rst_n, .araddr(m_araddr), .arvalid(m_arvalid), .arready(m_arready),
    .rdata(m_rdata), .rresp(m_rresp), .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready),
    .awaddr(m_awaddr), .awvalid(m_awvalid), .awready(m_awready), .wdata(m_wdata),
    .wvalid(m_wvalid), .wready(m_wready), .bresp(m_bresp), .bvalid(m_bvalid), .bready(m_bready));

  // Loop-back in place of the pooling / normalisation stage.
  assign pp_in_valid  = pp_out_valid;
  assign pp_in_data   = pp_out_data;
  assign pp_out_ready = pp_in_ready;

  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Mechanism counters.
  int n_credit_stall = 0, n_wr_stall = 0, n_keep = 0, n_p8 = 0, n_p16 = 0;
  int n_acc = 0, n_apx = 0;
  int n_af [8];
  int mac_phase_cycles = 0;
  always @(posedge clk) if (rst_n) begin
    // The configuration address rests on STATUS, so its fields can be
    // watched every cycle: a read stall is the address manager holding a
    // request (fetch_busy) that the interface does not issue for lack of
    // input-buffer credit; states 3..5 are the MAC phase.
    if (cfg_addr == 3'd4 && cfg_rdata[8] && !m_arvalid) n_credit_stall++;
    if (m_awvalid && !m_awready) n_wr_stall++;
    if (cfg_addr == 3'd4 && cfg_rdata[7:4] inside {4'd3, 4'd4, 4'd5}) mac_phase_cycles++;
  end

  task automatic cfg_write(input int a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = 3'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0; cfg_addr = 3'd4;
  endtask

  task automatic cfg_read(input int a, output logic [31:0] d);
    @(negedge clk); cfg_addr = 3'(a); #1 d = cfg_rdata; cfg_addr = 3'd4;
  endtask

  function automatic longint wdigits(input longint w, input int fb, input int n);
    longint z = w, r = 0;
    for (int k = 1; k <= n; k++) begin
      longint step = longint'(1) << (fb - k);
      if (z >= 0) begin r += step; z -= step; end
      else        begin r -= step; z += step; end
    end
    return r;
  endfunction

  function automatic real sigm(input real v);
    return 1.0 / (1.0 + $exp(-v));
  endfunction

  function automatic real ref_af(input af_e f, input real v);
    case (f)
      AF_NONE:    return v;
      AF_RELU:    return (v > 0.0) ? v : 0.0;
      AF_SIGMOID: return sigm(v);
      AF_TANH:    return $tanh(v);
      AF_SWISH:   return v * sigm(v);
      AF_GELU:    return v * sigm(1.702 * v);
      AF_SELU:    return (v > 0.0) ? 1.0507009873554805 * v
                                   : 1.7580993408473766 * ($exp(v) - 1.0);
      default:    return 0.0;
    endcase
  endfunction

  longint acc_ref [NPE];

  // One layer pass. Returns the cycles of its MAC phase.
  task automatic run_pass(input int pass, input prec_e prec, input bit accm,
                          input af_e af, input int len, input int npe,
                          input bit clr, input bit wb, input int shift);
    layer_desc_t d;
    int base, outb, fb, it, w_i, mac0;
    logic [31:0] rd;
    real xin [NPE];
    real ex [NPE];
    real m, s;
    base = 1000 + pass * (2 * 32 * NPE + 16);
    outb = 100000 + pass * (NPE + 16);
    fb = (prec == PREC_16) ? 15 : 7;
    it = (prec == PREC_16) ? (accm ? int'(ITERS_ACC_16) : int'(ITERS_APX_16))
                           : (accm ? int'(ITERS_ACC_8)  : int'(ITERS_APX_8));
    d = '0;
    d.len = 8'(len); d.n_pe = 8'(npe); d.prec = prec; d.af_sel = af;
    d.acc_mode = accm; d.clear_acc = clr; d.writeback = wb; d.out_shift = 4'(shift);
    mem.mem[base] = 32'(d);
    w_i = base + 1;
    for (int p = 0; p <= npe; p++) begin
      longint wv [32];
      longint av [32];
      for (int i = 0; i < len; i++) begin
        if (prec == PREC_16) begin
          wv[i] = longint'($signed(16'($urandom)));
          av[i] = longint'($signed(12'($urandom)));
        end else begin
          wv[i] = longint'($signed(8'($urandom)));
          av[i] = longint'($signed(8'($urandom)));
        end
        mem.mem[w_i + i]       = 32'(wv[i]);
        mem.mem[w_i + len + i] = 32'(av[i]);
      end
      w_i += 2 * len;
      if (clr) acc_ref[p] = 0;
      for (int i = 0; i < len; i++) acc_ref[p] += av[i] * wdigits(wv[i], fb, it);
    end
    for (int p = 0; p < NPE; p++) mem.mem[outb + p] = 32'hdeadbeef;
    mac0 = mac_phase_cycles;
    cfg_write(1, 32'(base));
    cfg_write(2, 32'(outb));
    cfg_write(0, 32'h1);
    @(posedge clk); while (!done) @(posedge clk);
    if (prec == PREC_16) n_p16++; else n_p8++;
    if (accm) n_acc++; else n_apx++;
    if (!wb) n_keep++;
    cfg_read(6, rd);
    checks++;
    if (rd != 32'(len)) begin failures++; $display("FAIL pass %0d MAC steps %0d", pass, rd); end
    checks++;
    if (mac_phase_cycles - mac0 != len * (it + 3)) begin
      failures++;
      $display("FAIL pass %0d MAC phase %0d cycles, expected %0d", pass, mac_phase_cycles - mac0, len * (it + 3));
    end
    cfg_read(4, rd);
    checks++;
    if (rd[1:0] != 2'b10 || rd[2]) begin failures++; $display("FAIL status %h", rd); end
    if (!wb) return;
    n_af[int'(af)]++;
    // reference results
    m = -100.0; s = 0.0;
    for (int p = 0; p <= npe; p++) begin
      longint q;
      q = acc_ref[p] >>> shift;
      if (q > 32767) q = 32767;
      if (q < -32768) q = -32768;
      xin[p] = real'(q) / 4096.0;
      if (xin[p] > m) m = xin[p];
    end
    for (int p = 0; p <= npe; p++) s += $exp(xin[p] - m);
    for (int p = 0; p <= npe; p++) begin
      real got, e;
      got = real'($signed(mem.mem[outb + p][15:0])) / 4096.0;
      e = (af == AF_SOFTMAX) ? $exp(xin[p] - m) / s : ref_af(af, xin[p]);
      if (e > 32767.0 / 4096.0) e = 32767.0 / 4096.0;
      if (e < -8.0) e = -8.0;
      checks++;
      if (got - e > 6.0 / 4096.0 || e - got > 6.0 / 4096.0 ||
          mem.mem[outb + p][31:16] != {16{mem.mem[outb + p][15]}}) begin
        failures++;
        $display("FAIL pass %0d %s PE %0d: got %f expected %f (x=%f)", pass, af.name(), p, got, e, xin[p]);
      end
    end
    for (int p = npe + 1; p < NPE; p++) begin
      checks++;
      if (mem.mem[outb + p] != 32'hdeadbeef) begin
        failures++; $display("FAIL pass %0d wrote past the active PEs", pass);
      end
    end
  endtask

  initial begin
    rst_n = 0; cfg_we = 0; cfg_addr = 3'd4; cfg_wdata = 0;
    for (int i = 0; i < 8; i++) n_af[i] = 0;
    for (int p = 0; p < NPE; p++) acc_ref[p] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // F6: 120 -> 84, tanh
    run_pass(0, PREC_8, 1, AF_TANH,    32, 83, 1, 0, 3);
    run_pass(1, PREC_8, 1, AF_TANH,    32, 83, 0, 0, 3);
    run_pass(2, PREC_8, 1, AF_TANH,    32, 83, 0, 0, 3);
    run_pass(3, PREC_8, 1, AF_TANH,    24, 83, 0, 1, 3);
    // output layer: 84 -> 10, SoftMax
    run_pass(4, PREC_8, 1, AF_SOFTMAX, 32, 9, 1, 0, 3);
    run_pass(5, PREC_8, 1, AF_SOFTMAX, 32, 9, 0, 0, 3);
    run_pass(6, PREC_8, 1, AF_SOFTMAX, 20, 9, 0, 1, 3);
    checks++;
    if (n_af[int'(AF_TANH)] != 1 || n_af[int'(AF_SOFTMAX)] != 1 || n_keep != 5) begin
      failures++; $display("FAIL pass bookkeeping");
    end
    $display("mechanisms: p8=%0d p16=%0d accurate=%0d approx=%0d keep=%0d credit_stall=%0d wr_stall=%0d",
             n_p8, n_p16, n_acc, n_apx, n_keep, n_credit_stall, n_wr_stall);
    for (int i = 0; i < 8; i++) $display("  %s passes: %0d", af_e'(i), n_af[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
