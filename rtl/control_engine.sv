// control_engine: configuration registers and the FSMD sequencer of a pass.
//
// Registers (word addresses of the host configuration port):
//   0 CTRL      write: bit 0 start a layer pass, bit 1 clear the error flag
//   1 DESC_BASE word address of the layer descriptor; the payload follows
//   2 OUT_BASE  word address where the pass writes its results
//   3 ITERS     CORDIC iterations [3:0] accurate 8-bit, [7:4] approximate
//               8-bit, [11:8] accurate 16-bit, [15:12] approximate 16-bit
//   4 STATUS    read: bit 0 busy, bit 1 done, bit 2 memory error, [7:4] state,
//               bit 8 address manager busy, bit 9 MAC step running
//   5 CYCLES    read: clock cycles taken by the last pass
//   6 MACS      read: vector-engine MAC steps issued by the last pass
// A pass runs DESC (fetch and decode the descriptor) -> LOAD (fetch the
// weights and activations into the kernel banks) -> for each bank entry
// READ, START, WAIT (one broadcast CORDIC MAC step on all active PEs) ->
// AF (stream the accumulators, shifted right by out_shift and saturated to
// Q4.12, through the multi-AF block; results come back through the
// pooling/normalisation port and are written to OUT_BASE + PE index, the
// address mapping) -> FLUSH -> DONE. A pass whose descriptor clears
// writeback ends after the MAC steps, leaving the partial sums in the
// accumulators for the next pass (dot products longer than one bank).
// done pulses at the end of a pass; STATUS.done stays set until the next
// start. The paper lists configuration registers, status and control flags,
// an FSMD control path and an address mapping unit; the register map, the
// states and the pass structure are this design's choices.
module control_engine
  import carmen_pkg::*;
#(
  parameter int unsigned N_PE   = 256,
  parameter int unsigned DEPTH  = 32,
  parameter int unsigned ADDR_W = 32,
  localparam int unsigned PW    = (N_PE > 1) ? $clog2(N_PE) : 1,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // host configuration port
  input  logic                     cfg_we,
  input  logic [2:0]               cfg_addr,
  input  logic [31:0]              cfg_wdata,
  output logic [31:0]              cfg_rdata,
  output logic                     done,
  input  logic                     mem_err,
  input  logic                     fetch_busy,   // address manager still issuing
  input  logic                     mac_busy,     // a MAC step is running
  output logic                     err_clr,
  // iteration registers to the parameters allocator
  output logic [ITER_W-1:0]        iters_acc8,
  output logic [ITER_W-1:0]        iters_apx8,
  output logic [ITER_W-1:0]        iters_acc16,
  output logic [ITER_W-1:0]        iters_apx16,
  // data address manager
  output logic                     dam_start,
  output logic [ADDR_W-1:0]        dam_base,
  output logic [15:0]              dam_count,
  // input tracker
  output logic                     arm_desc,
  output logic                     arm_data,
  input  logic                     data_done,
  // layer parameters
  input  logic                     params_valid,
  input  logic [AW:0]              len,
  input  logic [PW-1:0]            n_pe,
  input  logic                     clear_acc,
  input  logic                     writeback,
  input  logic [3:0]               out_shift,
  input  logic [15:0]              payload_words,
  // vector engine
  output logic                     ve_rd_en,
  output logic [AW-1:0]            ve_raddr,
  output logic                     ve_mac_start,
  output logic                     ve_mac_clr,
  input  logic                     ve_mac_done,
  output logic [PW-1:0]            ve_acc_sel,
  input  logic signed [ACC_W-1:0]  ve_acc,
  // to the multi-AF block
  output logic                     af_valid,
  input  logic                     af_ready,
  output logic signed [AF_W-1:0]   af_data,
  output logic                     af_last,
  // results back from the pooling / normalisation stage
  input  logic                     res_valid,
  output logic                     res_ready,
  input  logic signed [AF_W-1:0]   res_data,
  // memory writes
  output logic                     wr_req_valid,
  input  logic                     wr_req_ready,
  output logic [ADDR_W-1:0]        wr_req_addr,
  output logic [31:0]              wr_req_data,
  input  logic                     wr_idle
);

  typedef enum logic [3:0] {
    C_IDLE, C_DESC, C_LOAD, C_READ, C_START, C_WAIT, C_AF, C_FLUSH, C_DONE
  } cstate_e;

  cstate_e            st_q;
  logic [ADDR_W-1:0]  desc_base_q, out_base_q;
  logic [15:0]        iters_q;
  logic               done_flag_q;
  logic [31:0]        cycles_q, macs_q;
  logic [AW-1:0]      ent_q;
  logic [PW:0]        feed_q, wb_q;
  logic               start_cmd;

  assign start_cmd   = cfg_we && (cfg_addr == 3'd0) && cfg_wdata[0] && (st_q == C_IDLE);
  assign err_clr     = cfg_we && (cfg_addr == 3'd0) && cfg_wdata[1];
  assign iters_acc8  = iters_q[3:0];
  assign iters_apx8  = iters_q[7:4];
  assign iters_acc16 = iters_q[11:8];
  assign iters_apx16 = iters_q[15:12];

  always_comb begin
    unique case (cfg_addr)
      3'd1:    cfg_rdata = 32'(desc_base_q);
      3'd2:    cfg_rdata = 32'(out_base_q);
      3'd3:    cfg_rdata = {16'h0, iters_q};
      3'd4:    cfg_rdata = {22'h0, mac_busy, fetch_busy, st_q, 1'b0, mem_err, done_flag_q,
                             (st_q != C_IDLE)};
      3'd5:    cfg_rdata = cycles_q;
      3'd6:    cfg_rdata = macs_q;
      default: cfg_rdata = 32'h0;
    endcase
  end

  // Requantisation of the selected accumulator to the AF input format.
  logic signed [ACC_W-1:0] acc_sh;
  always_comb begin
    acc_sh = ve_acc >>> out_shift;
    if (acc_sh > ACC_W'(32767))       af_data = 16'sh7fff;
    else if (acc_sh < -ACC_W'(32768)) af_data = -16'sh8000;
    else                              af_data = AF_W'(acc_sh);
  end

  // Sequencer outputs.
  assign dam_base     = (st_q == C_IDLE) ? desc_base_q : desc_base_q + 1'b1;
  assign dam_count    = (st_q == C_IDLE) ? 16'd1 : payload_words;
  assign dam_start    = start_cmd || (st_q == C_DESC && params_valid);
  assign arm_desc     = start_cmd;
  assign arm_data     = (st_q == C_DESC) && params_valid;
  assign ve_rd_en     = (st_q == C_READ);
  assign ve_raddr     = ent_q;
  assign ve_mac_start = (st_q == C_START);
  assign ve_mac_clr   = (st_q == C_START) && clear_acc && (ent_q == '0);
  assign ve_acc_sel   = feed_q[PW-1:0];
  assign af_valid     = (st_q == C_AF) && (feed_q <= (PW+1)'(n_pe));
  assign af_last      = (feed_q == (PW+1)'(n_pe));
  assign res_ready    = (st_q == C_AF) && wr_req_ready;
  assign wr_req_valid = (st_q == C_AF) && res_valid;
  assign wr_req_addr  = out_base_q + ADDR_W'(wb_q);
  assign wr_req_data  = 32'(res_data);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q        <= C_IDLE;
      desc_base_q <= '0;
      out_base_q  <= '0;
      iters_q     <= {ITERS_APX_16, ITERS_ACC_16, ITERS_APX_8, ITERS_ACC_8};
      done_flag_q <= 1'b0;
      cycles_q    <= '0;
      macs_q      <= '0;
      ent_q       <= '0;
      feed_q      <= '0;
      wb_q        <= '0;
      done        <= 1'b0;
    end else begin
      done <= 1'b0;
      if (cfg_we && st_q == C_IDLE) begin
        unique case (cfg_addr)
          3'd1: desc_base_q <= ADDR_W'(cfg_wdata);
          3'd2: out_base_q  <= ADDR_W'(cfg_wdata);
          3'd3: iters_q     <= cfg_wdata[15:0];
          default: ;
        endcase
      end
      if (st_q != C_IDLE) cycles_q <= cycles_q + 1'b1;
      unique case (st_q)
        C_IDLE: if (start_cmd) begin
          st_q        <= C_DESC;
          done_flag_q <= 1'b0;
          cycles_q    <= '0;
          macs_q      <= '0;
        end
        C_DESC: if (params_valid) st_q <= C_LOAD;
        C_LOAD: if (data_done) begin
          ent_q <= '0;
          st_q  <= C_READ;
        end
        C_READ:  st_q <= C_START;
        C_START: begin
          macs_q <= macs_q + 1'b1;
          st_q   <= C_WAIT;
        end
        C_WAIT: if (ve_mac_done) begin
          if ((AW+1)'(ent_q) == len - 1'b1) begin
            feed_q <= '0;
            wb_q   <= '0;
            st_q   <= writeback ? C_AF : C_DONE;
          end else begin
            ent_q <= ent_q + 1'b1;
            st_q  <= C_READ;
          end
        end
        C_AF: begin
          if (af_valid && af_ready) feed_q <= feed_q + 1'b1;
          if (wr_req_valid && wr_req_ready) begin
            wb_q <= wb_q + 1'b1;
            if (wb_q == (PW+1)'(n_pe)) st_q <= C_FLUSH;
          end
        end
        C_FLUSH: if (wr_idle) st_q <= C_DONE;
        C_DONE: begin
          done        <= 1'b1;
          done_flag_q <= 1'b1;
          st_q        <= C_IDLE;
        end
        default: st_q <= C_IDLE;
      endcase
    end
  end

endmodule
