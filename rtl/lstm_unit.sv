// lstm_unit: one LSTM unit ("LSTM cell" of Fig. 2) of a Chipmunk tile.
//
// A unit computes one row of every matrix-vector product of an LSTM layer
// and then applies that row's element-wise operations. It holds the gate
// registers i_t, f_t, o_t and the cell state c_t (8 bit each), a 16-bit MAC,
// a sigmoid LUT fed by the requantised accumulator and a tanh LUT fed by
// either the accumulator or c_t. The multiplier's A operand is the weight read
// from the unit's SRAM lane or one of i_t/f_t/o_t; its B operand is the
// broadcast x_t or h_t-1 element, c_t or the tanh output, as in the paper's
// datapath. The addend path of the MAC carries a bias weight or z_t, which
// this design uses for the partial sum arriving from the left neighbour tile
// in systolic mode (the paper shows z_t without describing it).
//
// Interface: ctrl_i is one micro-operation (chipmunk_pkg::cell_op_e) shared
// by all units of a tile and executed at the next rising edge; w_i is this
// unit's weight for the same cycle. z_en_i qualifies OP_ADDZ for this unit.
// h_o is the requantised accumulator (the new h_t after the last step of a
// layer) and y_o its sigmoid (the dense-layer output).
// The idx field of ctrl_i is decoded by the tile (state-bank read index and
// z_en_i), not here, so a lint tool reports those bits as unused.
module lstm_unit
  import chipmunk_pkg::*;
(
  input  logic       clk_i,
  input  logic       rst_ni,
  input  cell_ctrl_t ctrl_i,
  input  q8_t        w_i,
  input  q8_t        x_i,
  input  q8_t        h_i,
  input  logic       z_en_i,
  output acc_t       acc_o,
  output q8_t        h_o,
  output q8_t        y_o
);

  q8_t  i_q, f_q, o_q, c_q;
  acc_t acc;
  q8_t  acc_q8, sig_out, tanh_in, tanh_out, op_a, op_b, addend;
  logic mac_clr, mac_en, mac_add, mac_load;

  assign acc_q8  = requant(acc);
  assign tanh_in = (ctrl_i.t_sel == T_C) ? c_q : acc_q8;

  act_lut #(.IS_TANH(1'b0)) u_sigm (.a(acc_q8),  .y(sig_out));
  act_lut #(.IS_TANH(1'b1)) u_tanh (.a(tanh_in), .y(tanh_out));

  always_comb begin
    unique case (ctrl_i.a_sel)
      A_W:     op_a = w_i;
      A_I:     op_a = i_q;
      A_F:     op_a = f_q;
      default: op_a = o_q;
    endcase
    unique case (ctrl_i.b_sel)
      B_X:     op_b = x_i;
      B_H:     op_b = h_i;
      B_C:     op_b = c_q;
      default: op_b = tanh_out;
    endcase
  end

  always_comb begin
    mac_clr  = 1'b0;
    mac_en   = 1'b0;
    mac_add  = 1'b0;
    mac_load = 1'b0;
    addend   = w_i;
    unique case (ctrl_i.op)
      OP_CLR, OP_CLRST: mac_clr = 1'b1;
      OP_MAC:           mac_en  = 1'b1;
      OP_MUL:  begin mac_en = 1'b1; mac_load = 1'b1; end
      OP_ADDW: begin mac_en = 1'b1; mac_add  = 1'b1; end
      OP_ADDZ: begin mac_en = z_en_i; mac_add = 1'b1; addend = ctrl_i.z; end
      default: ;
    endcase
  end

  mac_unit u_mac (
    .clk_i, .rst_ni,
    .clr_i(mac_clr), .en_i(mac_en), .use_add_i(mac_add), .load_i(mac_load),
    .a_i(op_a), .b_i(op_b), .addend_i(addend), .acc_o(acc)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      i_q <= '0; f_q <= '0; o_q <= '0; c_q <= '0;
    end else begin
      unique case (ctrl_i.op)
        OP_ST_I:  i_q <= sig_out;
        OP_ST_F:  f_q <= sig_out;
        OP_ST_O:  o_q <= sig_out;
        OP_ST_C:  c_q <= acc_q8;
        OP_CLRST: begin i_q <= '0; f_q <= '0; o_q <= '0; c_q <= '0; end
        default: ;
      endcase
    end
  end

  assign acc_o = acc;
  assign h_o   = acc_q8;
  assign y_o   = sig_out;

endmodule
