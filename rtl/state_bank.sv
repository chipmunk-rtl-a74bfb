// state_bank: register bank for x_t or h_t-1 with its broadcast mux (Fig. 2).
//
// The paper keeps x_t and h_t-1 outside the LSTM units, each in a bank of
// N_lstm 8-bit registers; in every cycle of a column loop one element is
// selected by the iteration index and broadcast to all units. This bank
// offers three ways to write: one element from the input stream (wr_en_i at
// wr_idx_i), all elements at once from the units' outputs (load_all_i, the
// dashed h_t feedback of Fig. 2), and a synchronous clear. Writes take
// effect at the next rising edge; the read (rd_idx_i -> rd_data_o) is
// combinational. Indices at or above N read as zero.
module state_bank
  import chipmunk_pkg::*;
#(
  parameter int unsigned N = 96
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         clr_i,
  input  logic         wr_en_i,
  input  idx_t         wr_idx_i,
  input  q8_t          wr_data_i,
  input  logic         load_all_i,
  input  q8_t [N-1:0]  all_i,
  input  idx_t         rd_idx_i,
  output q8_t          rd_data_o
);

  q8_t [N-1:0] regs;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)          regs <= '0;
    else if (clr_i)       regs <= '0;
    else if (load_all_i)  regs <= all_i;
    else if (wr_en_i && (32'(wr_idx_i) < N)) regs[wr_idx_i] <= wr_data_i;
  end

  assign rd_data_o = (32'(rd_idx_i) < N) ? regs[rd_idx_i] : '0;

endmodule
