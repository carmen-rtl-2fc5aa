// parameters_allocator: turns a layer descriptor into layer parameters.
//
// When desc_valid pulses, the 32-bit descriptor word (layout in
// carmen_pkg::layer_desc_t) is unpacked and checked: the dot-product length
// is clamped to 1..DEPTH and the PE count to the engine's N_PE. The CORDIC
// iteration count is chosen from the four runtime-tunable iteration
// registers by precision and by the accurate/approximate bit, and the
// payload size 2*len*(n_pe+1) words is worked out for the address manager.
// The outputs are registered; params_valid pulses one cycle after
// desc_valid. The paper names this block (Fig. 1, Parameters Allocator) and
// says that iteration depth per layer is chosen at run time between
// approximate and accurate modes; the descriptor format and the clamping
// are this design's choices.
module parameters_allocator
  import carmen_pkg::*;
#(
  parameter int unsigned N_PE  = 256,
  parameter int unsigned DEPTH = 32,
  localparam int unsigned PW   = (N_PE > 1) ? $clog2(N_PE) : 1,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              desc_valid,
  input  logic [31:0]       desc,
  input  logic [ITER_W-1:0] iters_acc8,
  input  logic [ITER_W-1:0] iters_apx8,
  input  logic [ITER_W-1:0] iters_acc16,
  input  logic [ITER_W-1:0] iters_apx16,
  output logic              params_valid,
  output logic [AW:0]       len,
  output logic [PW-1:0]     n_pe,
  output prec_e             prec,
  output af_e               af_sel,
  output logic              clear_acc,
  output logic              writeback,
  output logic [3:0]        out_shift,
  output logic [ITER_W-1:0] iters,
  output logic [15:0]       payload_words
);

  layer_desc_t d;
  logic [AW:0]   len_c;
  logic [PW-1:0] npe_c;
  logic [ITER_W-1:0] it_c;

  always_comb begin
    d     = layer_desc_t'(desc);
    len_c = (d.len == 8'd0) ? (AW+1)'(1)
          : ((d.len > 8'(DEPTH)) ? (AW+1)'(DEPTH) : (AW+1)'(d.len));
    npe_c = (32'(d.n_pe) >= N_PE) ? PW'(N_PE - 1) : PW'(d.n_pe);
    if (d.prec == PREC_16) it_c = d.acc_mode ? iters_acc16 : iters_apx16;
    else                   it_c = d.acc_mode ? iters_acc8  : iters_apx8;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      params_valid  <= 1'b0;
      len           <= (AW+1)'(1);
      n_pe          <= '0;
      prec          <= PREC_8;
      af_sel        <= AF_NONE;
      clear_acc     <= 1'b1;
      writeback     <= 1'b1;
      out_shift     <= '0;
      iters         <= ITERS_ACC_8;
      payload_words <= '0;
    end else begin
      params_valid <= desc_valid;
      if (desc_valid) begin
        len           <= len_c;
        n_pe          <= npe_c;
        prec          <= d.prec;
        af_sel        <= d.af_sel;
        clear_acc     <= d.clear_acc;
        writeback     <= d.writeback;
        out_shift     <= d.out_shift;
        iters         <= it_c;
        payload_words <= 16'(2 * 32'(len_c) * (32'(npe_c) + 1));
      end
    end
  end

endmodule
