// multi_af: time-multiplexed multi activation-function block.
//
// Computes ReLU, Sigmoid, Tanh, Swish, GELU, SELU and SoftMax (plus an
// identity pass) on a stream of Q4.12 words, one element at a time, on a
// single shared iterative CORDIC (cordic_af_core). Each nonlinear function
// is reduced to at most one exponential of a non-positive argument (CORDIC
// hyperbolic rotation) and one division (CORDIC linear vectoring):
//   exp(u), u <= 0:  u*log2(e) = q + f, r = u - q*ln2 in [0, ln2),
//                    exp(u) = (cosh r + sinh r) >> -q
//   sigmoid(x) = 1/(1+e) for x >= 0, e/(1+e) for x < 0,  e = exp(-|x|)
//   tanh(x)    = sign(x) * (1-e)/(1+e),                  e = exp(-2|x|)
//   swish(x)   = x * sigmoid(x)
//   gelu(x)    = x * sigmoid(1.702 x)
//   selu(x)    = 1.0507 x for x > 0, 1.7581 (exp(x) - 1) otherwise
//   relu(x)    = max(x, 0), by bypass logic
//   softmax(x) = exp(x_i - max) / sum_j exp(x_j - max) over one vector
// SoftMax buffers its vector (delimited by in_last, at most SM_DEPTH
// elements) in a local buffer, finding the maximum while it is filled,
// replaces each element by its exponential while summing them, then divides.
//
// Interface: valid/ready input stream (in_data, in_last) with af_sel
// sampled with the first element of each operation; valid/ready output
// stream (out_data, out_last) in Q4.12, saturated. Latency from the cycle an
// element is accepted to out_valid: 1 cycle for identity, ReLU and positive
// SELU, 21 for negative SELU (exponential only), 40 for the functions that
// also divide. SoftMax takes 21 cycles per element for the exponentials,
// then 19 per element for the divisions. The paper gives the function list, the
// shared CORDIC datapath in hyperbolic rotation mode and the exponent and
// normalisation stages of SoftMax; the range reduction, the formulas
// through exp(-|x|), the constants' precision and the formats are this
// design's own choices.
module multi_af
  import carmen_pkg::*;
#(
  parameter int unsigned SM_DEPTH = 256,
  localparam int unsigned SAW     = $clog2(SM_DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  af_e                     af_sel,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic signed [AF_W-1:0]  in_data,
  input  logic                    in_last,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic signed [AF_W-1:0]  out_data,
  output logic                    out_last
);

  localparam int unsigned W = AFI_W;
  localparam int unsigned F = AFI_FRAC;
  localparam logic signed [W-1:0] ONE = W'(1) <<< F;
  localparam logic signed [W-1:0] INV_GAIN = W'(HYP_INV_GAIN_Q30 >> (30 - F));

  typedef enum logic [3:0] {
    S_IDLE, S_COLLECT, S_EXP_GO, S_EXP_WAIT, S_DIV_GO, S_DIV_WAIT, S_OUT
  } state_e;

  state_e               state_q;
  af_e                  func_q;
  logic signed [W-1:0]  x_q;      // current input in Q.16
  logic                 neg_q;    // sign of the argument that picks the formula
  logic signed [W-1:0]  u_q;      // exp argument, <= 0
  logic signed [W-1:0]  num_q, den_q;
  logic signed [W-1:0]  res_q;    // result in Q.16
  logic                 last_q;

  // SoftMax buffer and bookkeeping
  logic signed [W-1:0]  buf_q [SM_DEPTH];
  logic [SAW:0]         cnt_q;    // elements in the vector
  logic [SAW:0]         idx_q;    // element being processed
  logic signed [W-1:0]  max_q;
  logic signed [W-1:0]  sum_q;
  logic                 sm_div_q; // SoftMax in its division phase

  // CORDIC core
  logic                 core_start, core_hyp, core_busy, core_done;
  logic signed [W-1:0]  core_x0, core_y0, core_z0, core_xn, core_yn, core_zn;

  cordic_af_core #(.W(W), .FRAC(F)) u_core (
    .clk   (clk),
    .rst_n (rst_n),
    .start (core_start),
    .hyp   (core_hyp),
    .x0    (core_x0),
    .y0    (core_y0),
    .z0    (core_z0),
    .busy  (core_busy),
    .done  (core_done),
    .xn    (core_xn),
    .yn    (core_yn),
    .zn    (core_zn)
  );

  // Range reduction of the exp argument.
  logic signed [2*W-1:0] t_full;
  logic signed [W-1:0]   t_q16, q_int, r_red;
  logic signed [W-1:0]   neg_q_int;
  logic signed [W-1:0]   exp_val;
  logic signed [W-1:0]   er;
  always_comb begin
    t_full    = u_q * $signed({1'b0, LOG2E_Q16});
    t_q16     = W'(t_full >>> F);
    q_int     = t_q16 >>> F;                        // floor(u*log2 e)
    r_red     = u_q - W'(q_int * $signed({1'b0, LN2_Q16}));
    neg_q_int = -q_int;
    er        = core_xn + core_yn;                   // exp(r)
    exp_val   = (neg_q_int >= $signed(W'(W))) ? '0 : (er >>> neg_q_int);
  end

  // Input conversion and the constant products.
  logic signed [W-1:0]   x_in;
  logic signed [W-1:0]   x_abs;
  logic signed [2*W-1:0] gelu_full, selu_pos_full, selu_neg_full, xq_full;
  logic signed [W-1:0]   g_in;
  always_comb begin
    x_in          = W'(in_data) <<< (F - AF_FRAC);
    x_abs         = in_data[AF_W-1] ? -x_in : x_in;
    gelu_full     = x_in * $signed({1'b0, GELU_K_Q12});
    g_in          = W'(gelu_full >>> AF_FRAC);
    selu_pos_full = x_in * $signed({1'b0, SELU_L_Q12});
    selu_neg_full = (2*W)'(exp_val - ONE) * $signed({1'b0, SELU_LA_Q12});
    xq_full       = x_q * core_zn;
  end

  // Output conversion with saturation.
  logic signed [W-1:0] res_o;
  always_comb begin
    res_o = res_q >>> (F - AF_FRAC);
    if (res_o > W'(32767))       out_data = 16'sh7fff;
    else if (res_o < -W'(32768)) out_data = -16'sh8000;
    else                         out_data = AF_W'(res_o);
  end

  assign out_valid  = (state_q == S_OUT);
  assign out_last   = last_q;
  assign in_ready   = (state_q == S_IDLE) || (state_q == S_COLLECT);
  assign core_start = (state_q == S_EXP_GO) || (state_q == S_DIV_GO);
  assign core_hyp   = (state_q == S_EXP_GO);
  assign core_x0    = (state_q == S_EXP_GO) ? INV_GAIN : den_q;
  assign core_y0    = (state_q == S_EXP_GO) ? '0 : num_q;
  assign core_z0    = (state_q == S_EXP_GO) ? r_red : '0;

  // SoftMax buffer writes: inputs while collecting, exponentials in place.
  logic                buf_we;
  logic [SAW-1:0]      buf_waddr;
  logic signed [W-1:0] buf_wdata;
  always_comb begin
    buf_we    = 1'b0;
    buf_waddr = '0;
    buf_wdata = x_in;
    if (state_q == S_IDLE && in_valid && af_sel == AF_SOFTMAX) begin
      buf_we = 1'b1;
    end else if (state_q == S_COLLECT && in_valid) begin
      buf_we    = 1'b1;
      buf_waddr = cnt_q[SAW-1:0];
    end else if (state_q == S_EXP_WAIT && core_done && func_q == AF_SOFTMAX) begin
      buf_we    = 1'b1;
      buf_waddr = idx_q[SAW-1:0];
      buf_wdata = exp_val;
    end
  end

  always_ff @(posedge clk) begin
    if (buf_we) buf_q[buf_waddr] <= buf_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_IDLE;
      func_q   <= AF_NONE;
      x_q      <= '0;
      neg_q    <= 1'b0;
      u_q      <= '0;
      num_q    <= '0;
      den_q    <= ONE;
      res_q    <= '0;
      last_q   <= 1'b0;
      cnt_q    <= '0;
      idx_q    <= '0;
      max_q    <= '0;
      sum_q    <= '0;
      sm_div_q <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE: if (in_valid) begin
          func_q <= af_sel;
          x_q    <= x_in;
          neg_q  <= in_data[AF_W-1];
          last_q <= in_last;
          unique case (af_sel)
            AF_NONE: begin res_q <= x_in; state_q <= S_OUT; end
            AF_RELU: begin res_q <= in_data[AF_W-1] ? '0 : x_in; state_q <= S_OUT; end
            AF_SIGMOID, AF_SWISH: begin u_q <= -x_abs; state_q <= S_EXP_GO; end
            AF_TANH: begin u_q <= -(x_abs <<< 1); state_q <= S_EXP_GO; end
            AF_GELU: begin
              u_q   <= g_in[W-1] ? g_in : -g_in;
              neg_q <= g_in[W-1];
              state_q <= S_EXP_GO;
            end
            AF_SELU: begin
              if (!in_data[AF_W-1] && in_data != '0) begin
                res_q   <= W'(selu_pos_full >>> AF_FRAC);
                state_q <= S_OUT;
              end else begin
                u_q     <= x_in;
                state_q <= S_EXP_GO;
              end
            end
            AF_SOFTMAX: begin
              max_q    <= x_in;
              cnt_q    <= (SAW+1)'(1);
              idx_q    <= '0;
              sum_q    <= '0;
              sm_div_q <= 1'b0;
              last_q   <= 1'b0;
              if (in_last || SM_DEPTH == 1) begin
                u_q     <= '0;
                state_q <= S_EXP_GO;
              end else begin
                state_q <= S_COLLECT;
              end
            end
            default: begin res_q <= x_in; state_q <= S_OUT; end
          endcase
        end

        S_COLLECT: if (in_valid) begin
          if (x_in > max_q) max_q <= x_in;
          cnt_q <= cnt_q + 1'b1;
          if (in_last || cnt_q == (SAW+1)'(SM_DEPTH - 1)) begin
            u_q     <= buf_q[0] - ((x_in > max_q) ? x_in : max_q);
            max_q   <= (x_in > max_q) ? x_in : max_q;
            state_q <= S_EXP_GO;
          end
        end

        S_EXP_GO: state_q <= S_EXP_WAIT;

        S_EXP_WAIT: if (core_done) begin
          unique case (func_q)
            AF_SELU: begin
              res_q   <= W'(selu_neg_full >>> AF_FRAC);
              state_q <= S_OUT;
            end
            AF_TANH: begin
              num_q   <= ONE - exp_val;
              den_q   <= ONE + exp_val;
              state_q <= S_DIV_GO;
            end
            AF_SOFTMAX: begin
              sum_q <= sum_q + exp_val;
              if (idx_q + 1'b1 == cnt_q) begin
                idx_q    <= '0;
                sm_div_q <= 1'b1;
                num_q    <= (cnt_q == (SAW+1)'(1)) ? exp_val : buf_q[0];
                den_q    <= sum_q + exp_val;
                state_q  <= S_DIV_GO;
              end else begin
                idx_q   <= idx_q + 1'b1;
                u_q     <= buf_q[idx_q[SAW-1:0] + 1'b1] - max_q;
                state_q <= S_EXP_GO;
              end
            end
            default: begin  // sigmoid, swish, gelu
              num_q   <= neg_q ? exp_val : ONE;
              den_q   <= ONE + exp_val;
              state_q <= S_DIV_GO;
            end
          endcase
        end

        S_DIV_GO: state_q <= S_DIV_WAIT;

        S_DIV_WAIT: if (core_done) begin
          unique case (func_q)
            AF_TANH:  res_q <= neg_q ? -core_zn : core_zn;
            AF_SWISH, AF_GELU: res_q <= W'(xq_full >>> F);
            AF_SOFTMAX: begin
              res_q  <= core_zn;
              last_q <= (idx_q + 1'b1 == cnt_q);
            end
            default:  res_q <= core_zn;
          endcase
          state_q <= S_OUT;
        end

        S_OUT: if (out_ready) begin
          if (func_q == AF_SOFTMAX && sm_div_q && (idx_q + 1'b1 != cnt_q)) begin
            idx_q   <= idx_q + 1'b1;
            num_q   <= buf_q[idx_q[SAW-1:0] + 1'b1];
            state_q <= S_DIV_GO;
          end else begin
            sm_div_q <= 1'b0;
            state_q  <= S_IDLE;
          end
        end

        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
