// cordic_mac: runtime-adaptive iterative CORDIC multiply-accumulate unit.
//
// One X/Y/Z register set is reused for every CORDIC iteration instead of
// unrolling a pipeline. The unit runs the linear-rotation CORDIC: X holds
// the activation a, Z the weight w, and each iteration k = 1..iters does
//   sigma = sign(Z);  Y += sigma * (a >> k);  Z -= sigma * 2^-k
// so Y accumulates a * w' where w' is w rounded to iters signed binary
// digits. Fewer iterations give the approximate mode, more the accurate
// mode; the hardware is the same (paper, Sec. II-A and Fig. 2). The X path
// of Fig. 2 is kept but holds its value, since mu = 0 in linear mode.
//
// Fixed point: a is a signed integer, 8 bits (low byte of a_i) or 16 bits; w is Q1.7 (prec = PREC_8,
// low byte of w_i used) or Q1.15 (PREC_16). Y counts in units of 2^-FB with
// FB the weight's fraction bits, so after full convergence Y ~= sum a*w_int.
// iters must lie in 1..FB (7 or 15); larger values are clamped to FB.
//
// Timing: a cycle with start high loads X and Z (and clears Y if clr is
// also high); the next iters cycles run one iteration each; done pulses in
// the cycle after the last iteration, when acc holds the new sum. busy is
// high from the load until done. A start while busy is ignored.
// The register/multiplexer structure follows Fig. 2; the fixed-point format,
// the clamping and the handshake are this design's own choices.
module cordic_mac
  import carmen_pkg::*;
#(
  parameter int unsigned DW  = DATA_W,
  parameter int unsigned AW  = ACC_W,
  parameter int unsigned ITW = ITER_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic                  clr,     // with start: clear the accumulator
  input  prec_e                 prec,
  input  logic [ITW-1:0]        iters,   // CORDIC iterations for this MAC
  input  logic signed [DW-1:0]  a_i,     // activation
  input  logic signed [DW-1:0]  w_i,     // weight
  output logic                  busy,
  output logic                  done,
  output logic signed [AW-1:0]  acc
);

  logic signed [DW-1:0]   x_q;      // X register (activation)
  logic signed [DW+1:0]   z_q;      // Z register (weight residual), 2 guard bits
  logic signed [AW-1:0]   y_q;      // Y register (accumulator)
  logic [ITW-1:0]         k_q;      // current shift k
  logic [ITW-1:0]         last_q;   // last k of this operation
  logic [ITW-1:0]         fb_q;     // weight fraction bits of this operation
  logic                   run_q;

  logic                   sigma_pos;
  logic signed [AW-1:0]   x_shift;  // (a << FB) >> k
  logic signed [DW+1:0]   alpha;    // 2^-k in Z units (the LUT of Fig. 2)
  logic [ITW-1:0]         fb;
  logic [ITW-1:0]         last;
  logic signed [DW+1:0]   z_load;

  // Operation set-up at load time.
  always_comb begin
    fb     = (prec == PREC_16) ? ITW'(WFRAC_16) : ITW'(WFRAC_8);
    last   = (iters == '0) ? ITW'(1) : ((iters > fb) ? fb : iters);
    z_load = (prec == PREC_16) ? (DW+2)'(w_i)
                               : (DW+2)'($signed(w_i[7:0]));
  end

  // One iteration: shifters, LUT and add/sub selected by sgn(Z).
  always_comb begin
    sigma_pos = ~z_q[DW+1];
    x_shift   = (AW'(x_q) <<< fb_q) >>> k_q;
    alpha     = (DW+2)'(1) <<< (fb_q - k_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q    <= '0;
      z_q    <= '0;
      y_q    <= '0;
      k_q    <= '0;
      last_q <= '0;
      fb_q   <= '0;
      run_q  <= 1'b0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !run_q) begin
        x_q    <= (prec == PREC_16) ? a_i : DW'($signed(a_i[7:0]));
        z_q    <= z_load;
        fb_q   <= fb;
        last_q <= last;
        k_q    <= ITW'(1);
        run_q  <= 1'b1;
        if (clr) y_q <= '0;
      end else if (run_q) begin
        if (sigma_pos) begin
          y_q <= y_q + x_shift;
          z_q <= z_q - alpha;
        end else begin
          y_q <= y_q - x_shift;
          z_q <= z_q + alpha;
        end
        k_q <= k_q + ITW'(1);
        if (k_q == last_q) begin
          run_q <= 1'b0;
          done  <= 1'b1;
        end
      end
    end
  end

  assign busy = run_q;
  assign acc  = y_q;

endmodule
