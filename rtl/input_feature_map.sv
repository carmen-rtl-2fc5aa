// input_feature_map: buffer of words fetched from off-chip memory.
//
// A DEPTH-entry first-in first-out buffer between the memory interface and
// the input tracker. Words are pushed without back-pressure (the memory
// interface only issues as many reads as free reports) and popped on a
// valid/ready stream. free = DEPTH - entries held, the read credit given to
// the memory interface. Pushing into a full buffer is an error caught by an
// assertion. The paper only names this block (Fig. 1, Input Feature Map);
// its organisation as a FIFO and its depth are this design's choices.
module input_feature_map #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned PW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] push_data,
  output logic         pop_valid,
  input  logic         pop_ready,
  output logic [W-1:0] pop_data,
  output logic [PW:0]  free
);

  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] wr_q, rd_q;
  logic [PW:0]   cnt_q;
  logic          pop;

  assign pop       = pop_valid && pop_ready;
  assign pop_valid = (cnt_q != '0);
  assign pop_data  = mem[rd_q];
  assign free      = (PW+1)'(DEPTH) - cnt_q;

  always_ff @(posedge clk) begin
    if (push) mem[wr_q] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_q  <= '0;
      rd_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= wr_q + 1'b1;
      if (pop)  rd_q <= rd_q + 1'b1;
      cnt_q <= cnt_q + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  push |-> (cnt_q != (PW+1)'(DEPTH)) || pop);

endmodule
