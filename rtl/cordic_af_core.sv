// cordic_af_core: shared iterative CORDIC datapath of the multi-AF block.
//
// One X/Y/Z register set with shifters, add/subtract units and a constant
// LUT, reused every cycle for one CORDIC iteration (the structure of the
// paper's Fig. 2). Two modes share it:
//   hyp = 1, hyperbolic rotation: sigma = sign(Z),
//       X += sigma*(Y>>k), Y += sigma*(X>>k), Z -= sigma*atanh(2^-k),
//       k = 1..16 with k = 4 and 13 repeated (18 iterations). With
//       X0 = 1/K_h, Y0 = 0 it leaves X = cosh(Z0), Y = sinh(Z0) for
//       |Z0| < 1.11, so X + Y = exp(Z0).
//   hyp = 0, linear vectoring: sigma = sign(Y),
//       Y -= sigma*(X>>k), Z += sigma*2^-k, k = 0..FRAC (FRAC+1
//       iterations). With Z0 = 0 and X0 > 0 it leaves Z = Y0/X0 for
//       |Y0/X0| < 2.
// All values are signed fixed point with FRAC fraction bits. A start pulse
// loads the registers; done pulses one cycle after the last iteration, with
// the results on xn/yn/zn until the next start. The two modes and their
// convergence ranges are standard CORDIC; the schedule, the word format and
// the handshake are this design's choices.
module cordic_af_core
  import carmen_pkg::*;
#(
  parameter int unsigned W    = AFI_W,
  parameter int unsigned FRAC = AFI_FRAC
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic                hyp,
  input  logic signed [W-1:0] x0,
  input  logic signed [W-1:0] y0,
  input  logic signed [W-1:0] z0,
  output logic                busy,
  output logic                done,
  output logic signed [W-1:0] xn,
  output logic signed [W-1:0] yn,
  output logic signed [W-1:0] zn
);

  logic signed [W-1:0] x_q, y_q, z_q;
  logic [4:0]          i_q;
  logic                hyp_q, run_q;

  logic [4:0]          k;
  logic signed [W-1:0] x_sh, y_sh, alpha;
  logic                sigma_pos;
  logic [4:0]          last_i;

  always_comb begin
    k         = hyp_q ? hyp_shift(i_q) : i_q;
    x_sh      = x_q >>> k;
    y_sh      = y_q >>> k;
    alpha     = hyp_q ? W'(atanh_q30(k) >> (30 - FRAC))
                      : W'(1) <<< (5'(FRAC) - k);
    sigma_pos = hyp_q ? ~z_q[W-1] : ~y_q[W-1];
    last_i    = hyp_q ? 5'(HYP_ITERS - 1) : 5'(FRAC);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q   <= '0;
      y_q   <= '0;
      z_q   <= '0;
      i_q   <= '0;
      hyp_q <= 1'b0;
      run_q <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !run_q) begin
        x_q   <= x0;
        y_q   <= y0;
        z_q   <= z0;
        hyp_q <= hyp;
        i_q   <= '0;
        run_q <= 1'b1;
      end else if (run_q) begin
        if (hyp_q) begin
          x_q <= sigma_pos ? x_q + y_sh : x_q - y_sh;
          y_q <= sigma_pos ? y_q + x_sh : y_q - x_sh;
          z_q <= sigma_pos ? z_q - alpha : z_q + alpha;
        end else begin
          y_q <= sigma_pos ? y_q - x_sh : y_q + x_sh;
          z_q <= sigma_pos ? z_q + alpha : z_q - alpha;
        end
        i_q <= i_q + 5'd1;
        if (i_q == last_i) begin
          run_q <= 1'b0;
          done  <= 1'b1;
        end
      end
    end
  end

  assign busy = run_q;
  assign xn   = x_q;
  assign yn   = y_q;
  assign zn   = z_q;

endmodule
