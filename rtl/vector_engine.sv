// vector_engine: N_PE processing elements working in lock-step.
//
// Each PE is one dual kernel memory bank (weights and input activations,
// DEPTH entries each) feeding one iterative CORDIC MAC, the pairing drawn in
// the compute core of the paper's Fig. 1. The control engine broadcasts the
// bank read address and the MAC start, precision and iteration count to all
// PEs, so PE p computes acc[p] = sum_i a[p][i] * w[p][i] over the entries
// it is stepped through. PEs with an index above n_pe are not started and
// keep their accumulators (idle lanes draw no switching power).
//
// Interface: one bank write port addressed by (wpe, wsel, waddr); a
// broadcast read port (rd_en, raddr) whose data reaches the MACs directly;
// mac_start/mac_clr start one CORDIC MAC operation on the pair read in an
// earlier cycle. mac_done pulses when PE 0 (always active) finishes, which
// is when all active PEs finish. acc_sel selects the accumulator shown on
// acc_o (combinational), the path to the activation-function block.
// N_PE = 256 is the paper's larger configuration; the lock-step broadcast
// and the result multiplexer are this design's choices.
module vector_engine
  import carmen_pkg::*;
#(
  parameter int unsigned N_PE  = 256,
  parameter int unsigned DEPTH = 32,
  localparam int unsigned PW   = (N_PE > 1) ? $clog2(N_PE) : 1,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // bank write port
  input  logic                      we,
  input  logic [PW-1:0]             wpe,
  input  logic                      wsel,
  input  logic [AW-1:0]             waddr,
  input  logic [DATA_W-1:0]         wdata,
  // broadcast read and compute control
  input  logic                      rd_en,
  input  logic [AW-1:0]             raddr,
  input  logic [PW-1:0]             n_pe,    // highest active PE index
  input  logic                      mac_start,
  input  logic                      mac_clr,
  input  prec_e                     prec,
  input  logic [ITER_W-1:0]         iters,
  output logic                      mac_done,
  output logic                      mac_busy,
  // result read
  input  logic [PW-1:0]             acc_sel,
  output logic signed [ACC_W-1:0]   acc_o
);

  logic [N_PE-1:0]              done_v, busy_v;
  logic signed [ACC_W-1:0]      acc_v [N_PE];

  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    logic [DATA_W-1:0] w_rd, a_rd;
    logic              active;

    assign active = (PW'(p) <= n_pe);

    kernel_mem_bank #(.DW(DATA_W), .DEPTH(DEPTH)) u_bank (
      .clk   (clk),
      .we    (we && (wpe == PW'(p))),
      .wsel  (wsel),
      .waddr (waddr),
      .wdata (wdata),
      .rd_en (rd_en),
      .raddr (raddr),
      .w_o   (w_rd),
      .a_o   (a_rd)
    );

    cordic_mac u_mac (
      .clk   (clk),
      .rst_n (rst_n),
      .start (mac_start && active),
      .clr   (mac_clr),
      .prec  (prec),
      .iters (iters),
      .a_i   (a_rd),
      .w_i   (w_rd),
      .busy  (busy_v[p]),
      .done  (done_v[p]),
      .acc   (acc_v[p])
    );
  end

  assign mac_done = done_v[0];
  assign mac_busy = |busy_v;
  assign acc_o    = acc_v[acc_sel];

endmodule
