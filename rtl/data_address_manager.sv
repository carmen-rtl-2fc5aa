// data_address_manager: read-address generator of the input pre-processor.
//
// On start it takes a base word address and a word count and issues the
// addresses base, base+1, ..., base+count-1 on a valid/ready stream to the
// memory interface, one per accepted request. busy is high from start until
// the last address is accepted; done pulses in the cycle after that. A start
// while busy is ignored; a count of zero ends at once. The paper only names
// this block (Fig. 1, Data-Address Manager); the linear address sequence
// and the handshake are this design's choices.
module data_address_manager #(
  parameter int unsigned ADDR_W = 32,
  parameter int unsigned CNT_W  = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base,
  input  logic [CNT_W-1:0]  count,
  output logic              req_valid,
  input  logic              req_ready,
  output logic [ADDR_W-1:0] req_addr,
  output logic              busy,
  output logic              done
);

  logic [ADDR_W-1:0] addr_q;
  logic [CNT_W-1:0]  left_q;

  assign busy      = (left_q != '0);
  assign req_valid = busy;
  assign req_addr  = addr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr_q <= '0;
      left_q <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        addr_q <= base;
        left_q <= count;
        if (count == '0) done <= 1'b1;
      end else if (req_valid && req_ready) begin
        addr_q <= addr_q + 1'b1;
        left_q <= left_q - 1'b1;
        if (left_q == CNT_W'(1)) done <= 1'b1;
      end
    end
  end

endmodule
