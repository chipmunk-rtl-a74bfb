// mac_unit: the 8x8->16 bit multiply-accumulate block of an LSTM unit (Fig. 2).
//
// A signed 8x8 multiplier feeds a mux that chooses between the product and an
// 8-bit addend (a bias weight or a partial sum, widened to accumulator scale);
// the mux output is added to the 16-bit accumulator register REG. The
// structure (multiplier, mux, adder, REG with feedback) follows the paper's
// datapath figure. Saturating addition, the "load" path (REG = product,
// without feedback) and the synchronous clear are this design's choices; the
// paper says only that 16 bits are used "to minimize overflows".
// Operations take effect at the next rising clock edge; acc is the register.
module mac_unit
  import chipmunk_pkg::*;
(
  input  logic clk_i,
  input  logic rst_ni,
  input  logic clr_i,      // acc = 0
  input  logic en_i,       // update acc this cycle
  input  logic use_add_i,  // 1: add addend_i << FRAC_BITS, 0: add a_i * b_i
  input  logic load_i,     // 1: acc = selected term (no feedback), 0: acc += term
  input  q8_t  a_i,
  input  q8_t  b_i,
  input  q8_t  addend_i,
  output acc_t acc_o
);

  acc_t prod, term, acc_q;

  assign prod = acc_t'(a_i) * acc_t'(b_i);
  assign term = use_add_i ? widen(addend_i) : prod;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                acc_q <= '0;
    else if (clr_i)             acc_q <= '0;
    else if (en_i && load_i)    acc_q <= term;
    else if (en_i)              acc_q <= sat_acc({acc_q[ACC_W-1], acc_q} + {term[ACC_W-1], term});
  end

  assign acc_o = acc_q;

endmodule
