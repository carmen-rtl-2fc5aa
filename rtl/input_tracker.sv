// input_tracker: routes fetched words to their destination.
//
// Each layer pass fetches first one layer-descriptor word, then the payload:
// for PE 0, 1, ..., n_pe in turn, len weights followed by len activations.
// arm_desc makes the next word popped from the input feature map the
// descriptor (desc_valid pulses with it). arm_data, with len and n_pe,
// makes the following 2*len*(n_pe+1) words bank writes: the tracker keeps
// entry, weight/activation and PE counters and issues one bank write per
// word (bank_we with bank_pe, bank_wsel, bank_addr, bank_data = low 16 bits
// of the word). data_done pulses after the last payload word. Words are
// consumed one per cycle while armed and held back otherwise. The paper only
// names this block (Fig. 1, Input Tracker); the memory layout it follows and
// its counters are this design's choices.
module input_tracker #(
  parameter int unsigned N_PE  = 256,
  parameter int unsigned DEPTH = 32,
  localparam int unsigned PW   = (N_PE > 1) ? $clog2(N_PE) : 1,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          arm_desc,
  input  logic          arm_data,
  input  logic [AW:0]   len,      // 1..DEPTH
  input  logic [PW-1:0] n_pe,     // highest PE index
  // words from the input feature map
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [31:0]   in_data,
  // descriptor
  output logic          desc_valid,
  output logic [31:0]   desc,
  // bank writes
  output logic          bank_we,
  output logic [PW-1:0] bank_pe,
  output logic          bank_wsel,
  output logic [AW-1:0] bank_addr,
  output logic [15:0]   bank_data,
  output logic          data_done
);

  typedef enum logic [1:0] {T_IDLE, T_DESC, T_DATA} tstate_e;
  tstate_e       st_q;
  logic [AW:0]   len_q;
  logic [PW-1:0] npe_q, pe_q;
  logic [AW-1:0] ent_q;
  logic          sel_q;
  logic          take;
  logic          last_word;

  assign in_ready   = (st_q != T_IDLE);
  assign take       = in_valid && in_ready;
  assign desc_valid = take && (st_q == T_DESC);
  assign desc       = in_data;
  assign bank_we    = take && (st_q == T_DATA);
  assign bank_pe    = pe_q;
  assign bank_wsel  = sel_q;
  assign bank_addr  = ent_q;
  assign bank_data  = in_data[15:0];
  assign last_word  = ((AW+1)'(ent_q) == len_q - 1'b1) && sel_q && (pe_q == npe_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q      <= T_IDLE;
      len_q     <= '0;
      npe_q     <= '0;
      pe_q      <= '0;
      ent_q     <= '0;
      sel_q     <= 1'b0;
      data_done <= 1'b0;
    end else begin
      data_done <= 1'b0;
      unique case (st_q)
        T_IDLE: begin
          if (arm_desc) st_q <= T_DESC;
          else if (arm_data) begin
            st_q  <= T_DATA;
            len_q <= len;
            npe_q <= n_pe;
            pe_q  <= '0;
            ent_q <= '0;
            sel_q <= 1'b0;
          end
        end
        T_DESC: if (take) st_q <= T_IDLE;
        T_DATA: if (take) begin
          if (last_word) begin
            st_q      <= T_IDLE;
            data_done <= 1'b1;
          end else if ((AW+1)'(ent_q) == len_q - 1'b1) begin
            ent_q <= '0;
            if (sel_q) begin
              sel_q <= 1'b0;
              pe_q  <= pe_q + 1'b1;
            end else begin
              sel_q <= 1'b1;
            end
          end else begin
            ent_q <= ent_q + 1'b1;
          end
        end
        default: st_q <= T_IDLE;
      endcase
    end
  end

endmodule
