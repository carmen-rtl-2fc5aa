// tb_control_engine: runs the sequencer against a testbench model of its
// surroundings. The model answers the descriptor fetch with chosen layer
// parameters, the payload fetch with data_done, each MAC start with
// mac_done after iters + 1 cycles, shows acc[p] = a known pattern on the
// selected PE, loops the AF stream back as results and accepts writes with
// random back-pressure. Checked: register write/read-back, the descriptor
// and payload fetch addresses and counts, bank read addresses 0..len-1 each
// followed by one MAC start, mac_clr only on the first step of a clearing
// pass, the requantised and saturated AF inputs with in_last on the final
// PE, every write address (OUT_BASE + PE) and data, no AF phase when
// writeback is off, the done pulse and the STATUS, MACS and CYCLES
// registers, and the MAC phase lasting len * (iters + 3) cycles.
module tb_control_engine;
  import carmen_pkg::*;
  localparam int NPE = 16, DEPTH = 32;
  logic clk = 1'b0, rst_n;
  logic cfg_we, done, mem_err, err_clr, fetch_busy, mac_busy;
  logic [2:0] cfg_addr;
  logic [31:0] cfg_wdata, cfg_rdata;
  logic [ITER_W-1:0] iters_acc8, iters_apx8, iters_acc16, iters_apx16;
  logic dam_start, arm_desc, arm_data, data_done, params_valid, clear_acc, writeback;
  logic [31:0] dam_base;
  logic [15:0] dam_count, payload_words;
  logic [5:0] len;
  logic [3:0] n_pe, out_shift, ve_acc_sel;
  logic ve_rd_en, ve_mac_start, ve_mac_clr, ve_mac_done;
  logic [4:0] ve_raddr;
  logic signed [ACC_W-1:0] ve_acc;
  logic af_valid, af_ready, af_last, res_valid, res_ready;
  logic signed [AF_W-1:0] af_data, res_data;
  logic wr_req_valid, wr_req_ready, wr_idle;
  logic [31:0] wr_req_addr, wr_req_data;
  int checks = 0, failures = 0;

  control_engine #(.N_PE(NPE), .DEPTH(DEPTH), .ADDR_W(32)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // environment model
  int model_iters = 4;
  logic [31:0] exp_base;
  int exp_words;
  int mac_steps, mac_clears, mac_cyc;
  int last_raddr;
  int mac_timer = -1;
  logic signed [AF_W-1:0] loop_q [$];
  logic loop_last [$];
  int af_count, wr_count, bad_af, bad_wr;
  logic [31:0] out_base;
  int shift_v, npe_v;
  bit in_mac_phase;

  function automatic logic signed [ACC_W-1:0] acc_pattern(input int p);
    return ACC_W'((p * 37 - 200) * 1000 + (p == 3 ? 64'sd90000000 : 0) - (p == 5 ? 64'sd90000000 : 0));
  endfunction

  assign ve_acc = acc_pattern(int'(ve_acc_sel));
  assign mem_err = 1'b0;
  assign fetch_busy = 1'b0;
  assign mac_busy = (mac_timer >= 0);

  always @(posedge clk) begin
    ve_mac_done <= 1'b0;
    if (mac_timer > 0) mac_timer <= mac_timer - 1;
    if (mac_timer == 0) begin ve_mac_done <= 1'b1; mac_timer <= -1; end
    if (ve_rd_en) last_raddr <= int'(ve_raddr);
    if (ve_mac_start) begin
      if (int'(ve_raddr) != mac_steps || last_raddr != mac_steps) begin
        failures++; $display("FAIL MAC step %0d read entry %0d", mac_steps, last_raddr);
      end
      mac_steps++;
      if (ve_mac_clr) mac_clears++;
      mac_timer <= model_iters - 1;
    end
    // MAC phase: from the first bank read to the done of the last step
    if (ve_rd_en && mac_steps == 0) in_mac_phase = 1'b1;
    if (in_mac_phase) mac_cyc++;
    if (ve_mac_done && mac_steps == int'(len)) in_mac_phase = 1'b0;
    // AF loop-back
    af_ready <= ($urandom_range(3) != 0);
    if (af_valid && af_ready) begin
      logic signed [63:0] q;
      q = 64'(acc_pattern(af_count)) >>> shift_v;
      if (q > 32767) q = 32767;
      if (q < -32768) q = -32768;
      if (af_data != AF_W'(q) || af_last != (af_count == npe_v)) bad_af++;
      loop_q.push_back(af_data);
      af_count++;
    end
    wr_req_ready <= ($urandom_range(2) != 0);
    if (wr_req_valid && wr_req_ready) begin
      logic signed [AF_W-1:0] e;
      e = loop_q.pop_front();
      if (wr_req_addr != out_base + 32'(wr_count) || wr_req_data != 32'(e)) bad_wr++;
      wr_count++;
    end
  end
  assign res_valid = (loop_q.size() > 0);
  assign res_data  = (loop_q.size() > 0) ? loop_q[0] : '0;
  assign wr_idle   = 1'b1;

  task automatic cfg_write(input int a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = 3'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic cfg_read(input int a, output logic [31:0] d);
    @(negedge clk); cfg_addr = 3'(a); #1 d = cfg_rdata;
  endtask

  task automatic run(input int l, input int np, input int sh, input bit clr, input bit wb, input int it);
    logic [31:0] rd;
    int t0, cyc;
    exp_base = $urandom_range(1000, 100000);
    out_base = $urandom_range(200000, 300000);
    shift_v = sh; npe_v = np; model_iters = it;
    in_mac_phase = 0; mac_steps = 0; mac_clears = 0; mac_cyc = 0; af_count = 0; wr_count = 0; bad_af = 0; bad_wr = 0;
    loop_q.delete();
    cfg_write(1, exp_base);
    cfg_write(2, out_base);
    cfg_read(1, rd); check(rd == exp_base, "DESC_BASE read-back");
    cfg_read(2, rd); check(rd == out_base, "OUT_BASE read-back");
    @(negedge clk); cfg_we = 1; cfg_addr = 0; cfg_wdata = 1;
    #1 check(dam_start && arm_desc && dam_base == exp_base && dam_count == 1, "descriptor fetch request");
    @(negedge clk); cfg_we = 0;
    repeat (5) @(negedge clk);
    len = 6'(l); n_pe = 4'(np); out_shift = 4'(sh); clear_acc = clr; writeback = wb;
    payload_words = 16'(2 * l * (np + 1));
    params_valid = 1;
    #1 check(dam_start && arm_data && dam_base == exp_base + 1 && dam_count == payload_words,
             "payload fetch request");
    @(negedge clk); params_valid = 0;
    repeat (20) @(negedge clk);
    check(mac_steps == 0, "no MAC before the payload is in");
    data_done = 1;
    @(negedge clk); data_done = 0;
    t0 = 0;
    while (!done) begin @(negedge clk); t0++; end
    check(mac_steps == l, $sformatf("MAC steps %0d of %0d", mac_steps, l));
    check(mac_clears == (clr ? 1 : 0), "accumulator clear on the first step only");
    check(mac_cyc == l * (it + 3), $sformatf("MAC phase %0d cycles", mac_cyc));
    check(af_count == (wb ? np + 1 : 0) && bad_af == 0, $sformatf("AF inputs %0d bad %0d", af_count, bad_af));
    check(wr_count == (wb ? np + 1 : 0) && bad_wr == 0, $sformatf("writes %0d bad %0d", wr_count, bad_wr));
    cfg_read(4, rd); check(rd[1:0] == 2'b10, "STATUS done, not busy");
    cfg_read(6, rd); check(rd == 32'(l), "MACS register");
    cfg_read(5, rd); check(rd > 32'(l * (it + 3)), "CYCLES register");
  endtask

  initial begin
    logic [31:0] rd;
    rst_n = 0; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; data_done = 0; params_valid = 0;
    len = 1; n_pe = 0; out_shift = 0; clear_acc = 0; writeback = 0; payload_words = 0;
    last_raddr = -1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    cfg_read(3, rd);
    check(rd[15:0] == {ITERS_APX_16, ITERS_ACC_16, ITERS_APX_8, ITERS_ACC_8}, "ITERS reset value");
    check(iters_acc8 == ITERS_ACC_8 && iters_apx16 == ITERS_APX_16, "iteration outputs");
    cfg_write(3, 32'h9a57);
    check(iters_acc8 == 4'h7 && iters_apx8 == 4'h5 && iters_acc16 == 4'ha && iters_apx16 == 4'h9, "ITERS write");
    run(32, 15, 8, 1, 1, 7);
    run(5, 3, 0, 1, 1, 4);
    run(12, 15, 14, 0, 0, 12);
    run(1, 0, 3, 0, 1, 1);
    run(20, 9, 10, 1, 1, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
