// chipmunk_pkg: types and constants shared by the Chipmunk LSTM engine.
//
// All state values (x, h, c, i, f, o, weights, biases) are 8-bit signed
// fixed point with FRAC_BITS fractional bits; products and the accumulator
// are 16-bit signed with 2*FRAC_BITS fractional bits. The 8/16-bit split
// follows the paper; the position of the binary point, the saturation on
// overflow and the micro-operation encoding are this design's own choices.
//
// Per-unit weight memory layout (N = number of LSTM units per tile):
//   gate g in {i,f,c,o} = {0,1,2,3}: W_xg[b] at g*2N + b, W_hg[b] at g*2N + N + b
//   dense layer W_hy[b]           : 8N + b
//   peepholes w_ci, w_cf, w_co    : 9N + 0, 9N + 1, 9N + 2
//   biases b_i, b_f, b_c, b_o     : 9N + 3 .. 9N + 6
// giving 9N + 7 bytes per unit; for N = 96 that is 871 bytes per unit and
// 83,616 bytes per tile, the 81.7 kB the paper reports.
package chipmunk_pkg;

  localparam int DATA_W    = 8;   // state / weight / stream width (paper)
  localparam int ACC_W     = 16;  // MAC width (paper)
  localparam int FRAC_BITS = 5;   // binary point of 8-bit values (assumed)
  localparam int IDX_W     = 8;   // unit / column index width, N_lstm <= 256

  typedef logic signed [DATA_W-1:0] q8_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [IDX_W-1:0]         idx_t;
  typedef logic [IDX_W:0]           cnt_t;  // counts 0..256

  // Multiplier operand A (Fig. 2, upper mux): weight or one of the gate registers.
  typedef enum logic [1:0] {A_W = 2'd0, A_I = 2'd1, A_F = 2'd2, A_O = 2'd3} a_sel_e;
  // Multiplier operand B (Fig. 2, right mux): x_t, h_t-1, c_t or tanh output.
  typedef enum logic [1:0] {B_X = 2'd0, B_H = 2'd1, B_C = 2'd2, B_TANH = 2'd3} b_sel_e;
  // tanh LUT input (Fig. 2, left mux): accumulator or cell state.
  typedef enum logic {T_ACC = 1'b0, T_C = 1'b1} t_sel_e;

  // Micro-operation executed by every LSTM unit in the same cycle.
  typedef enum logic [3:0] {
    OP_NOP   = 4'd0,  // hold
    OP_CLR   = 4'd1,  // acc = 0
    OP_MAC   = 4'd2,  // acc = sat(acc + A*B)
    OP_MUL   = 4'd3,  // acc = A*B
    OP_ADDW  = 4'd4,  // acc = sat(acc + (W << FRAC_BITS))   (bias)
    OP_ADDZ  = 4'd5,  // acc = sat(acc + (z << FRAC_BITS)) in the selected unit (partial sum)
    OP_ST_I  = 4'd6,  // i_t = sigm(acc)
    OP_ST_F  = 4'd7,  // f_t = sigm(acc)
    OP_ST_O  = 4'd8,  // o_t = sigm(acc)
    OP_ST_C  = 4'd9,  // c_t = acc
    OP_CLRST = 4'd10  // clear acc, i, f, o, c
  } cell_op_e;

  typedef struct packed {
    cell_op_e op;
    a_sel_e   a_sel;
    b_sel_e   b_sel;
    t_sel_e   t_sel;
    idx_t     idx;   // column index for x/h, target unit for OP_ADDZ
    q8_t      z;     // partial sum received from the left neighbour
  } cell_ctrl_t;

  localparam cell_ctrl_t CTRL_NOP = '{op: OP_NOP, a_sel: A_W, b_sel: B_X, t_sel: T_ACC,
                                      idx: '0, z: '0};

  // Source selected by a tile's input port (Fig. 4 MUX/DEMUX).
  typedef enum logic [1:0] {IN_NONE = 2'd0, IN_X = 2'd1, IN_LEFT = 2'd2, IN_HIDDEN = 2'd3} in_sel_e;
  // What the tile's output port is carrying.
  typedef enum logic [1:0] {OUT_NONE = 2'd0, OUT_PS = 2'd1, OUT_H = 2'd2, OUT_Y = 2'd3} out_sel_e;

  // Host commands.
  typedef enum logic [1:0] {CMD_NOP = 2'd0, CMD_LOAD_W = 2'd1, CMD_FRAME = 2'd2, CMD_CLEAR = 2'd3} cmd_e;

  // Per-tile configuration, sampled when a command is accepted.
  typedef struct packed {
    cnt_t n_x;        // input-state columns held by this tile
    cnt_t n_h;        // hidden-state columns and output rows of this tile
    cnt_t n_y;        // dense-layer output rows
    logic dense_en;   // run the dense layer y = sigm(W_hy h) after the LSTM layer
    logic first_col;  // no partial sum arrives from the left
    logic last_col;   // this tile applies the non-linearities and owns c_t
  } tile_cfg_t;

  typedef enum logic [2:0] {G_I = 3'd0, G_F = 3'd1, G_C = 3'd2, G_O = 3'd3, G_Y = 3'd4} gate_e;

  // Saturate a 17-bit sum to the 16-bit accumulator range.
  function automatic acc_t sat_acc(input logic signed [ACC_W:0] s);
    if (s > 17'sd32767)       return 16'sh7FFF;
    else if (s < -17'sd32768) return 16'sh8000;
    else                      return acc_t'(s);
  endfunction

  // Requantise a 16-bit accumulator (2F fractional bits) to 8 bits (F fractional bits):
  // arithmetic shift right by F, saturate.
  function automatic q8_t requant(input acc_t a);
    acc_t s;
    s = a >>> FRAC_BITS;
    if (s > 16'sd127)       return 8'sh7F;
    else if (s < -16'sd128) return 8'sh80;
    else                    return q8_t'(s);
  endfunction

  // Widen an 8-bit value to accumulator scale.
  function automatic acc_t widen(input q8_t v);
    return acc_t'(v) <<< FRAC_BITS;
  endfunction

endpackage
