// carmen_top: the CARMEN accelerator, a CORDIC vector engine for DNN layers.
//
// Blocks and data path (the paper's Fig. 1):
//   off-chip memory --AXI--> axi_mem_if --> input_feature_map (FIFO)
//     --> input_tracker --> descriptor --> parameters_allocator
//                      \--> kernel banks of the vector_engine
//   data_address_manager issues the read addresses.
//   control_engine sequences a pass: descriptor fetch, payload load,
//     broadcast CORDIC MAC steps on all PEs, then the accumulators one by
//     one through multi_af, out through the pooling/normalisation port
//     (pp_out_*), back in on pp_in_*, and written to memory through AXI.
// The AAD pooling and normalisation/encoding units sit between pp_out_* and
// pp_in_*; they are outside this RTL (a plain loop-back connects them).
// Host access is a simple register port (cfg_*), see control_engine for the
// map; done pulses at the end of each pass.
// Defaults: 256 PEs (the paper's larger configuration), 32-entry banks,
// 16-word input buffer, 32-bit AXI.
module carmen_top
  import carmen_pkg::*;
#(
  parameter int unsigned N_PE     = 256,
  parameter int unsigned DEPTH    = 32,
  parameter int unsigned IFM_DEPTH = 16,
  parameter int unsigned SM_DEPTH = N_PE,
  localparam int unsigned ADDR_W  = 32,
  localparam int unsigned PW      = (N_PE > 1) ? $clog2(N_PE) : 1,
  localparam int unsigned AW      = $clog2(DEPTH),
  localparam int unsigned FW      = $clog2(IFM_DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // host configuration
  input  logic                    cfg_we,
  input  logic [2:0]              cfg_addr,
  input  logic [31:0]             cfg_wdata,
  output logic [31:0]             cfg_rdata,
  output logic                    done,
  // AXI4 master to off-chip memory
  output logic [ADDR_W-1:0]       m_araddr,
  output logic [7:0]              m_arlen,
  output logic [2:0]              m_arsize,
  output logic [1:0]              m_arburst,
  output logic                    m_arvalid,
  input  logic                    m_arready,
  input  logic [31:0]             m_rdata,
  input  logic [1:0]              m_rresp,
  input  logic                    m_rlast,
  input  logic                    m_rvalid,
  output logic                    m_rready,
  output logic [ADDR_W-1:0]       m_awaddr,
  output logic [7:0]              m_awlen,
  output logic [2:0]              m_awsize,
  output logic [1:0]              m_awburst,
  output logic                    m_awvalid,
  input  logic                    m_awready,
  output logic [31:0]             m_wdata,
  output logic [3:0]              m_wstrb,
  output logic                    m_wlast,
  output logic                    m_wvalid,
  input  logic                    m_wready,
  input  logic [1:0]              m_bresp,
  input  logic                    m_bvalid,
  output logic                    m_bready,
  // to the pooling / normalisation stage
  output logic                    pp_out_valid,
  input  logic                    pp_out_ready,
  output logic signed [AF_W-1:0]  pp_out_data,
  output logic                    pp_out_last,
  // back from the pooling / normalisation stage
  input  logic                    pp_in_valid,
  output logic                    pp_in_ready,
  input  logic signed [AF_W-1:0]  pp_in_data
);

  // memory interface <-> pre-processor
  logic              rd_req_valid, rd_req_ready, rd_data_valid;
  logic [ADDR_W-1:0] rd_req_addr;
  logic [31:0]       rd_data;
  logic [FW:0]       ifm_free;
  logic              wr_req_valid, wr_req_ready, wr_idle;
  logic [ADDR_W-1:0] wr_req_addr;
  logic [31:0]       wr_req_data;
  logic              mem_err, err_clr;

  // pre-processor
  logic              ifm_valid, ifm_ready;
  logic [31:0]       ifm_data;
  logic              dam_start, dam_busy;
  logic [ADDR_W-1:0] dam_base;
  logic [15:0]       dam_count;
  logic              arm_desc, arm_data, desc_valid, data_done;
  logic [31:0]       desc;
  logic              bank_we, bank_wsel;
  logic [PW-1:0]     bank_pe;
  logic [AW-1:0]     bank_addr;
  logic [15:0]       bank_data;

  // layer parameters
  logic [ITER_W-1:0] iters_acc8, iters_apx8, iters_acc16, iters_apx16, iters;
  logic              params_valid, clear_acc, writeback;
  logic [AW:0]       len;
  logic [PW-1:0]     n_pe;
  prec_e             prec;
  af_e               af_sel;
  logic [3:0]        out_shift;
  logic [15:0]       payload_words;

  // compute core
  logic              ve_rd_en, ve_mac_start, ve_mac_clr, ve_mac_done, ve_mac_busy;
  logic [AW-1:0]     ve_raddr;
  logic [PW-1:0]     ve_acc_sel;
  logic signed [ACC_W-1:0] ve_acc;
  logic              af_valid, af_ready, af_last;
  logic signed [AF_W-1:0] af_data;

  axi_mem_if #(.ADDR_W(ADDR_W), .CRED_W(FW + 1)) u_axi (
    .clk, .rst_n,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_credit(ifm_free),
    .rd_data_valid, .rd_data,
    .wr_req_valid, .wr_req_ready, .wr_req_addr, .wr_req_data, .wr_idle,
    .err_clr, .err(mem_err),
    .m_araddr, .m_arlen, .m_arsize, .m_arburst, .m_arvalid, .m_arready,
    .m_rdata, .m_rresp, .m_rlast, .m_rvalid, .m_rready,
    .m_awaddr, .m_awlen, .m_awsize, .m_awburst, .m_awvalid, .m_awready,
    .m_wdata, .m_wstrb, .m_wlast, .m_wvalid, .m_wready,
    .m_bresp, .m_bvalid, .m_bready
  );

  data_address_manager #(.ADDR_W(ADDR_W), .CNT_W(16)) u_dam (
    .clk, .rst_n, .start(dam_start), .base(dam_base), .count(dam_count),
    .req_valid(rd_req_valid), .req_ready(rd_req_ready), .req_addr(rd_req_addr),
    .busy(dam_busy), .done()
  );

  input_feature_map #(.W(32), .DEPTH(IFM_DEPTH)) u_ifm (
    .clk, .rst_n, .push(rd_data_valid), .push_data(rd_data),
    .pop_valid(ifm_valid), .pop_ready(ifm_ready), .pop_data(ifm_data),
    .free(ifm_free)
  );

  input_tracker #(.N_PE(N_PE), .DEPTH(DEPTH)) u_trk (
    .clk, .rst_n, .arm_desc, .arm_data, .len, .n_pe,
    .in_valid(ifm_valid), .in_ready(ifm_ready), .in_data(ifm_data),
    .desc_valid, .desc,
    .bank_we, .bank_pe, .bank_wsel, .bank_addr, .bank_data, .data_done
  );

  parameters_allocator #(.N_PE(N_PE), .DEPTH(DEPTH)) u_pa (
    .clk, .rst_n, .desc_valid, .desc,
    .iters_acc8, .iters_apx8, .iters_acc16, .iters_apx16,
    .params_valid, .len, .n_pe, .prec, .af_sel, .clear_acc, .writeback,
    .out_shift, .iters, .payload_words
  );

  control_engine #(.N_PE(N_PE), .DEPTH(DEPTH), .ADDR_W(ADDR_W)) u_ctrl (
    .clk, .rst_n,
    .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata, .done, .mem_err, .err_clr,
    .fetch_busy(dam_busy), .mac_busy(ve_mac_busy),
    .iters_acc8, .iters_apx8, .iters_acc16, .iters_apx16,
    .dam_start, .dam_base, .dam_count,
    .arm_desc, .arm_data, .data_done,
    .params_valid, .len, .n_pe, .clear_acc, .writeback, .out_shift, .payload_words,
    .ve_rd_en, .ve_raddr, .ve_mac_start, .ve_mac_clr, .ve_mac_done, .ve_acc_sel,
    .ve_acc,
    .af_valid, .af_ready, .af_data, .af_last,
    .res_valid(pp_in_valid), .res_ready(pp_in_ready), .res_data(pp_in_data),
    .wr_req_valid, .wr_req_ready, .wr_req_addr, .wr_req_data, .wr_idle
  );

  vector_engine #(.N_PE(N_PE), .DEPTH(DEPTH)) u_ve (
    .clk, .rst_n,
    .we(bank_we), .wpe(bank_pe), .wsel(bank_wsel), .waddr(bank_addr), .wdata(bank_data),
    .rd_en(ve_rd_en), .raddr(ve_raddr), .n_pe,
    .mac_start(ve_mac_start), .mac_clr(ve_mac_clr), .prec, .iters,
    .mac_done(ve_mac_done), .mac_busy(ve_mac_busy),
    .acc_sel(ve_acc_sel), .acc_o(ve_acc)
  );

  multi_af #(.SM_DEPTH(SM_DEPTH)) u_af (
    .clk, .rst_n, .af_sel,
    .in_valid(af_valid), .in_ready(af_ready), .in_data(af_data), .in_last(af_last),
    .out_valid(pp_out_valid), .out_ready(pp_out_ready), .out_data(pp_out_data),
    .out_last(pp_out_last)
  );

endmodule
