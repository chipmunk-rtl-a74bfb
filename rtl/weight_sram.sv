// weight_sram: one weight/bias SRAM bank of a Chipmunk tile.
//
// The prototype holds the weights and biases of its 96 LSTM units in 12 SRAM
// banks (81.7 kB). This model gives each bank LANES byte lanes, one per LSTM
// unit it serves (96 / 12 = 8), and DEPTH words, one per weight index of the
// per-unit memory layout in chipmunk_pkg (9N + 7 = 871 for N = 96), so twelve
// banks hold 83,616 bytes. It is single-ported with a synchronous read:
// the address presented in one cycle gives rdata_o in the next, which the
// tile sequencer accounts for with one pipeline stage. Writes use a byte-lane
// enable so the input stream can fill one unit's byte at a time. The macro's
// real port list is not in the paper; this array is written so that a
// synthesis tool infers a memory, and a foundry macro with the same
// behaviour can replace it.
module weight_sram #(
  parameter int unsigned LANES = 8,
  parameter int unsigned DEPTH = 871,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                 clk_i,
  input  logic                 req_i,    // access this cycle
  input  logic                 we_i,     // 1: write, 0: read
  input  logic [AW-1:0]        addr_i,
  input  logic [LANES-1:0]     be_i,     // byte-lane write enable
  input  logic [LANES*8-1:0]   wdata_i,
  output logic [LANES*8-1:0]   rdata_o
);

  logic [LANES-1:0][7:0] mem [DEPTH];
  logic [LANES*8-1:0]    rdata_q;

  always_ff @(posedge clk_i) begin
    if (req_i && we_i) begin
      for (int l = 0; l < LANES; l++)
        if (be_i[l]) mem[addr_i][l] <= wdata_i[l*8 +: 8];
    end else if (req_i) begin
      rdata_q <= mem[addr_i];
    end
  end

  assign rdata_o = rdata_q;

endmodule
