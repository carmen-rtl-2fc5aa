// carmen_pkg: types and constants shared by the CARMEN vector engine.
//
// Holds the precision and activation-function encodings, the layer
// descriptor that the parameters allocator decodes, the fixed-point formats
// of the activation path and the constant tables of the iterative CORDIC
// (hyperbolic arctangents and gain). The 8/16-bit precision, the seven
// activation functions and the 32-entry kernel banks follow the paper; the
// field layout of the descriptor, the fixed-point formats and the default
// iteration counts are this design's own choices.
package carmen_pkg;

  // Operand precision of the MAC datapath.
  typedef enum logic {
    PREC_8  = 1'b0,
    PREC_16 = 1'b1
  } prec_e;

  // Activation function selection of the multi-AF block.
  typedef enum logic [2:0] {
    AF_NONE    = 3'd0,
    AF_RELU    = 3'd1,
    AF_SIGMOID = 3'd2,
    AF_TANH    = 3'd3,
    AF_SWISH   = 3'd4,
    AF_GELU    = 3'd5,
    AF_SELU    = 3'd6,
    AF_SOFTMAX = 3'd7
  } af_e;

  // Maximum operand width of the MAC (16-bit mode).
  localparam int unsigned DATA_W = 16;
  // Fraction bits of a weight: Q1.7 in 8-bit mode, Q1.15 in 16-bit mode.
  localparam int unsigned WFRAC_8  = 7;
  localparam int unsigned WFRAC_16 = 15;
  // Width of the MAC accumulator: 32-bit product, 32-term sums, guard bits.
  localparam int unsigned ACC_W = 40;
  // Width of an iteration-count field (up to 15 iterations).
  localparam int unsigned ITER_W = 4;

  // Default iteration counts loaded into the configuration registers at
  // reset. The approximate mode uses a third fewer iterations than the
  // accurate mode, the largest cycle saving the paper reports.
  localparam logic [ITER_W-1:0] ITERS_ACC_8  = 4'd6;
  localparam logic [ITER_W-1:0] ITERS_APX_8  = 4'd4;
  localparam logic [ITER_W-1:0] ITERS_ACC_16 = 4'd12;
  localparam logic [ITER_W-1:0] ITERS_APX_16 = 4'd8;

  // Activation path: 16-bit words with 12 fraction bits (Q4.12).
  localparam int unsigned AF_W    = 16;
  localparam int unsigned AF_FRAC = 12;
  // Internal width and fraction bits of the activation CORDIC (Q12.16 in 28
  // bits; every internal value, softmax sums of up to 2048 terms included, lies in [-2048, 2048)).
  localparam int unsigned AFI_W    = 28;
  localparam int unsigned AFI_FRAC = 16;

  // Constants in Q.16 for range reduction: log2(e) and ln(2).
  localparam logic [AFI_W-1:0] LOG2E_Q16 = 28'd94548;
  localparam logic [AFI_W-1:0] LN2_Q16   = 28'd45426;
  // Constants in Q.12: GELU slope 1.702, SELU lambda and lambda*alpha.
  localparam logic [15:0] GELU_K_Q12      = 16'd6971;
  localparam logic [15:0] SELU_L_Q12      = 16'd4304;
  localparam logic [15:0] SELU_LA_Q12     = 16'd7201;

  // Hyperbolic CORDIC schedule: shift k = 1..16 with k = 4 and k = 13
  // repeated for convergence, 18 iterations in all.
  localparam int unsigned HYP_ITERS = 18;

  function automatic logic [4:0] hyp_shift(input logic [4:0] i);
    // Iteration index i (0..17) to shift amount k.
    if (i < 5'd4)       return i + 5'd1;         // 1 2 3 4
    else if (i < 5'd14) return i;                // 4 5 ... 13
    else                return i - 5'd1;         // 13 14 15 16
  endfunction

  // atanh(2^-k) in Q.30, rounded; for k >= 10 atanh(2^-k) rounds to 2^-k.
  function automatic logic [31:0] atanh_q30(input logic [4:0] k);
    case (k)
      5'd1:    return 32'd589812981;
      5'd2:    return 32'd274247419;
      5'd3:    return 32'd134923406;
      5'd4:    return 32'd67196451;
      5'd5:    return 32'd33565361;
      5'd6:    return 32'd16778582;
      5'd7:    return 32'd8388779;
      5'd8:    return 32'd4194325;
      5'd9:    return 32'd2097155;
      default: return 32'd1 << (30 - k);
    endcase
  endfunction

  // 1/K_h for the schedule above, 1.20749706771..., in Q.30.
  localparam logic [31:0] HYP_INV_GAIN_Q30 = 32'd1296540104;

  // Layer descriptor, the first word fetched for every layer pass.
  typedef struct packed {
    logic [3:0]  out_shift;  // [31:28] accumulator right shift before the AF
    logic [4:0]  spare;      // [27:23] unused, zero
    logic        writeback;  // [22]    run the AF and write results back
    logic        clear_acc;  // [21]    clear the accumulators before the pass
    logic        acc_mode;   // [20]    1: accurate, 0: approximate iterations
    prec_e       prec;       // [19]    operand precision
    af_e         af_sel;     // [18:16] activation function
    logic [7:0]  n_pe;       // [15:8]  active PEs minus one
    logic [7:0]  len;        // [7:0]   dot-product terms in this pass (1..32)
  } layer_desc_t;

endpackage
