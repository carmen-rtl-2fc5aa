// kernel_mem_bank: the dual kernel memory bank that feeds one MAC.
//
// Two DEPTH x DW arrays, one for weights and one for input activations, as
// the paper gives them (dual banks of n-bit x 32 per MAC). One write port
// fills either array (wsel = 0 weights, 1 activations); one read port reads
// the same entry of both arrays so that a weight/activation pair reaches the
// MAC together. Reads are synchronous: w_o and a_o hold entry raddr from the
// cycle after rd_en, and keep it until the next read, as a register-file or
// SRAM macro would. The write-before-read order of one address in the same
// cycle is undefined (old data is read). Port naming and the synchronous read
// are this design's choices.
module kernel_mem_bank #(
  parameter int unsigned DW    = 16,
  parameter int unsigned DEPTH = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic          wsel,    // 0: weight bank, 1: activation bank
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic          rd_en,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] w_o,
  output logic [DW-1:0] a_o
);

  logic [DW-1:0] wmem [DEPTH];
  logic [DW-1:0] amem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && !wsel) wmem[waddr] <= wdata;
    if (we &&  wsel) amem[waddr] <= wdata;
    if (rd_en) begin
      w_o <= wmem[raddr];
      a_o <= amem[raddr];
    end
  end

endmodule
