// tile_ctrl: sequencer of one Chipmunk tile.
//
// It runs the loops of Fig. 3 of the design: load W, load x, then for each of
// the input, forget, cell and output gates a column loop of multiply-
// accumulates (first over x_t, then over h_t-1, one column per cycle, all
// units in parallel) followed by the gate's element-wise steps, then the
// hidden-state step and optionally a dense layer. In systolic mode (Fig. 4)
// a tile that is not in the first column adds the partial sums streamed in
// from its left neighbour, a tile that is not in the last column streams its
// partial sums to the right instead of applying the non-linearities, and the
// new hidden state travels from the last column back to all tiles.
//
// Command interface: cmd_i is accepted when cmd_valid_i && cmd_ready_o; cfg_i
// is sampled with it. CMD_LOAD_W reads (9N+7)*N bytes, address-major then unit
// (byte k goes to unit k mod N, address k div N). CMD_FRAME reads n_x bytes
// of x_t and processes one time step. CMD_CLEAR zeroes c_t, h_t-1, x_t and the
// gate registers in one cycle. Streams: 8-bit data with valid/ready; a
// transfer happens in a cycle with valid && ready. in_sel_o tells the
// external mux which source the input port listens to; out_sel_o says what
// the output port carries.
//
// Timing: every micro-operation is issued with its SRAM address in one cycle
// and executed by the units in the next (ctrl_o is the registered stage,
// aligned with the SRAM's read data). Streaming out values of the
// accumulator waits until that stage is empty. With streams that never stall
// a single-tile frame without dense layer takes
//   1 + n_x + 4*(1 + n_x + n_h) + 14 + 2 + n_h
// cycles from command acceptance to the last output byte; the 4*(n_x+n_h)
// MAC cycles do one MAC per unit per cycle. The element-wise sequence per
// gate and the ordering of the I/O phases are this design's reading of the
// paper's figures; command encoding, configuration registers and cycle
// details are its own choice.
// The handshake assertion is disabled during reset; lint tools therefore
// see rst_ni used both asynchronously (flip-flops) and synchronously
// (assertion), which has no effect on the circuit.
module tile_ctrl
  import chipmunk_pkg::*;
#(
  parameter int unsigned N     = 96,
  parameter int unsigned UPB   = 8,            // LSTM units per SRAM bank
  localparam int unsigned DEPTH = 9 * N + 7,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned NB    = N / UPB,
  localparam int unsigned BW    = (NB > 1) ? $clog2(NB) : 1,
  localparam int unsigned LW    = (UPB > 1) ? $clog2(UPB) : 1
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // command
  input  logic        cmd_valid_i,
  input  cmd_e        cmd_i,
  input  tile_cfg_t   cfg_i,
  output logic        cmd_ready_o,
  output logic        busy_o,
  // input stream
  input  logic        in_valid_i,
  input  q8_t         in_data_i,
  output logic        in_ready_o,
  output in_sel_e     in_sel_o,
  // output stream
  output logic        out_valid_o,
  output q8_t         out_data_o,
  input  logic        out_ready_i,
  output out_sel_e    out_sel_o,
  // values of the unit selected by out_idx_o
  output idx_t        out_idx_o,
  input  q8_t         unit_h_i,
  input  q8_t         unit_y_i,
  // weight SRAM
  output logic          sram_req_o,
  output logic          sram_we_o,
  output logic [AW-1:0] sram_addr_o,
  output logic [BW-1:0] sram_bank_o,
  output logic [LW-1:0] sram_lane_o,
  output q8_t           sram_wdata_o,
  // LSTM units (registered stage)
  output cell_ctrl_t  ctrl_o,
  // state banks
  output logic        x_wr_o,
  output logic        h_wr_o,
  output idx_t        wr_idx_o,
  output logic        h_load_all_o,
  output logic        st_clr_o,
  // observation of the mechanisms (for test and performance counting)
  output logic        mac_cycle_o
);

  typedef enum logic [3:0] {
    S_IDLE, S_LOADW, S_LOADX, S_GSTART, S_MACX, S_MACH,
    S_PSRX, S_PSTX, S_FIN, S_HDIST, S_HOUT, S_YOUT
  } state_e;

  localparam int unsigned PEEP = 9 * N;      // w_ci, w_cf, w_co
  localparam int unsigned BIAS = 9 * N + 3;  // b_i, b_f, b_c, b_o

  state_e       state_q, state_d;
  gate_e        gate_q, gate_d;
  tile_cfg_t    cfg_q;
  cnt_t         cnt_q, cnt_d, rxc_q, rxc_d;
  logic [2:0]   step_q, step_d;
  logic [AW-1:0] waddr_q, waddr_d;
  idx_t         wunit_q, wunit_d;
  cell_ctrl_t   ctrl_d, ctrl_q;
  logic         pipe_busy;
  logic         single;
  cnt_t         rows;
  logic         in_hs, out_hs;

  assign pipe_busy = (ctrl_q.op != OP_NOP);
  assign single    = cfg_q.first_col && cfg_q.last_col;
  assign rows      = (gate_q == G_Y) ? cfg_q.n_y : cfg_q.n_h;
  assign in_hs     = in_valid_i && in_ready_o;
  assign out_hs    = out_valid_o && out_ready_i;

  function automatic logic [AW-1:0] wx_addr(gate_e g, cnt_t b);
    return AW'(32'(g) * 2 * N + 32'(b));
  endfunction
  function automatic logic [AW-1:0] wh_addr(gate_e g, cnt_t b);
    if (g == G_Y) return AW'(8 * N + 32'(b));
    else          return AW'(32'(g) * 2 * N + N + 32'(b));
  endfunction

  // micro-operation helper
  function automatic cell_ctrl_t uop(cell_op_e op, a_sel_e a, b_sel_e b, t_sel_e t);
    cell_ctrl_t c;
    c = CTRL_NOP;
    c.op = op; c.a_sel = a; c.b_sel = b; c.t_sel = t;
    return c;
  endfunction

  always_comb begin
    state_d      = state_q;
    gate_d       = gate_q;
    cnt_d        = cnt_q;
    rxc_d        = rxc_q;
    step_d       = step_q;
    waddr_d      = waddr_q;
    wunit_d      = wunit_q;
    ctrl_d       = CTRL_NOP;
    cmd_ready_o  = 1'b0;
    in_ready_o   = 1'b0;
    in_sel_o     = IN_NONE;
    out_valid_o  = 1'b0;
    out_sel_o    = OUT_NONE;
    out_idx_o    = idx_t'(cnt_q);
    sram_req_o   = 1'b0;
    sram_we_o    = 1'b0;
    sram_addr_o  = '0;
    x_wr_o       = 1'b0;
    h_wr_o       = 1'b0;
    wr_idx_o     = idx_t'(cnt_q);
    h_load_all_o = 1'b0;
    st_clr_o     = 1'b0;
    mac_cycle_o  = 1'b0;

    unique case (state_q)
      S_IDLE: begin
        cmd_ready_o = 1'b1;
        if (cmd_valid_i) begin
          unique case (cmd_i)
            CMD_LOAD_W: begin state_d = S_LOADW; waddr_d = '0; wunit_d = '0; end
            CMD_FRAME: begin
              cnt_d  = '0;
              gate_d = G_I;
              state_d = (cfg_i.n_x != 0) ? S_LOADX : S_GSTART;
            end
            CMD_CLEAR: begin
              ctrl_d   = uop(OP_CLRST, A_W, B_X, T_ACC);
              st_clr_o = 1'b1;
            end
            default: ;
          endcase
        end
      end

      S_LOADW: begin
        in_sel_o    = IN_X;
        in_ready_o  = 1'b1;
        sram_we_o   = 1'b1;
        sram_addr_o = waddr_q;
        if (in_hs) begin
          sram_req_o = 1'b1;
          if (32'(wunit_q) == N - 1) begin
            wunit_d = '0;
            waddr_d = waddr_q + 1'b1;
            if (32'(waddr_q) == DEPTH - 1) state_d = S_IDLE;
          end else begin
            wunit_d = wunit_q + 1'b1;
          end
        end
      end

      S_LOADX: begin
        in_sel_o   = IN_X;
        in_ready_o = 1'b1;
        if (in_hs) begin
          x_wr_o = 1'b1;
          cnt_d  = cnt_q + 1'b1;
          if (cnt_q == cfg_q.n_x - 1'b1) state_d = S_GSTART;
        end
      end

      S_GSTART: begin
        ctrl_d = uop(OP_CLR, A_W, B_X, T_ACC);
        cnt_d  = '0;
        step_d = '0;
        if (gate_q != G_Y && cfg_q.n_x != 0) state_d = S_MACX;
        else                                 state_d = S_MACH;
      end

      S_MACX: begin
        mac_cycle_o = 1'b1;
        ctrl_d      = uop(OP_MAC, A_W, B_X, T_ACC);
        ctrl_d.idx  = idx_t'(cnt_q);
        sram_req_o  = 1'b1;
        sram_addr_o = wx_addr(gate_q, cnt_q);
        cnt_d       = cnt_q + 1'b1;
        if (cnt_q == cfg_q.n_x - 1'b1) begin
          cnt_d   = '0;
          state_d = S_MACH;
        end
      end

      S_MACH: begin
        mac_cycle_o = 1'b1;
        ctrl_d      = uop(OP_MAC, A_W, B_H, T_ACC);
        ctrl_d.idx  = idx_t'(cnt_q);
        sram_req_o  = 1'b1;
        sram_addr_o = wh_addr(gate_q, cnt_q);
        cnt_d       = cnt_q + 1'b1;
        if (cnt_q == cfg_q.n_h - 1'b1) begin
          cnt_d  = '0;
          if (!cfg_q.first_col)     state_d = S_PSRX;
          else if (!cfg_q.last_col) state_d = S_PSTX;
          else if (gate_q == G_Y)   state_d = S_YOUT;
          else                      state_d = S_FIN;
        end
      end

      S_PSRX: begin
        in_sel_o   = IN_LEFT;
        in_ready_o = 1'b1;
        if (in_hs) begin
          ctrl_d     = uop(OP_ADDZ, A_W, B_X, T_ACC);
          ctrl_d.idx = idx_t'(cnt_q);
          ctrl_d.z   = in_data_i;
          cnt_d      = cnt_q + 1'b1;
          if (cnt_q == rows - 1'b1) begin
            cnt_d = '0;
            if (!cfg_q.last_col)    state_d = S_PSTX;
            else if (gate_q == G_Y) state_d = S_YOUT;
            else                    state_d = S_FIN;
          end
        end
      end

      S_PSTX: begin
        out_sel_o   = OUT_PS;
        out_valid_o = !pipe_busy;
        if (out_hs) begin
          cnt_d = cnt_q + 1'b1;
          if (cnt_q == rows - 1'b1) begin
            cnt_d = '0;
            unique case (gate_q)
              G_I: begin gate_d = G_F; state_d = S_GSTART; end
              G_F: begin gate_d = G_C; state_d = S_GSTART; end
              G_C: begin gate_d = G_O; state_d = S_GSTART; end
              G_O: begin state_d = S_HDIST; rxc_d = '0; end
              default: state_d = S_IDLE;  // dense layer partial sums sent
            endcase
          end
        end
      end

      S_FIN: begin
        step_d = step_q + 1'b1;
        unique case (gate_q)
          G_I, G_F: begin
            unique case (step_q)
              3'd0: begin
                ctrl_d = uop(OP_MAC, A_W, B_C, T_ACC);
                sram_req_o = 1'b1; sram_addr_o = AW'(PEEP + 32'(gate_q));
              end
              3'd1: begin
                ctrl_d = uop(OP_ADDW, A_W, B_X, T_ACC);
                sram_req_o = 1'b1; sram_addr_o = AW'(BIAS + 32'(gate_q));
              end
              default: begin
                ctrl_d  = uop((gate_q == G_I) ? OP_ST_I : OP_ST_F, A_W, B_X, T_ACC);
                gate_d  = (gate_q == G_I) ? G_F : G_C;
                state_d = S_GSTART;
              end
            endcase
          end
          G_C: begin
            unique case (step_q)
              3'd0: begin
                ctrl_d = uop(OP_ADDW, A_W, B_X, T_ACC);
                sram_req_o = 1'b1; sram_addr_o = AW'(BIAS + 2);
              end
              3'd1: ctrl_d = uop(OP_MUL, A_I, B_TANH, T_ACC);   // i_t * tanh(.)
              3'd2: ctrl_d = uop(OP_MAC, A_F, B_C, T_ACC);      // + f_t * c_t-1
              default: begin
                ctrl_d  = uop(OP_ST_C, A_W, B_X, T_ACC);
                gate_d  = G_O;
                state_d = S_GSTART;
              end
            endcase
          end
          default: begin  // G_O, then the hidden state
            unique case (step_q)
              3'd0: begin
                ctrl_d = uop(OP_MAC, A_W, B_C, T_ACC);          // + w_co * c_t
                sram_req_o = 1'b1; sram_addr_o = AW'(PEEP + 2);
              end
              3'd1: begin
                ctrl_d = uop(OP_ADDW, A_W, B_X, T_ACC);
                sram_req_o = 1'b1; sram_addr_o = AW'(BIAS + 3);
              end
              3'd2: ctrl_d = uop(OP_ST_O, A_W, B_X, T_ACC);
              default: begin
                ctrl_d  = uop(OP_MUL, A_O, B_TANH, T_C);        // h_t = o_t * tanh(c_t)
                state_d = S_HDIST;
                rxc_d   = '0;
                cnt_d   = '0;
              end
            endcase
          end
        endcase
      end

      S_HDIST: begin
        if (single) begin
          if (!pipe_busy) begin
            h_load_all_o = 1'b1;
            cnt_d = '0;
            if (cfg_q.dense_en) begin gate_d = G_Y; state_d = S_GSTART; end
            else                state_d = S_HOUT;
          end
        end else begin
          // send own rows of h_t (last column only) and receive h for this column
          if (cfg_q.last_col && cnt_q != cfg_q.n_h) begin
            out_sel_o   = OUT_H;
            out_valid_o = !pipe_busy;
            if (out_hs) cnt_d = cnt_q + 1'b1;
          end
          if (rxc_q != cfg_q.n_h) begin
            in_sel_o   = IN_HIDDEN;
            in_ready_o = 1'b1;
            wr_idx_o   = idx_t'(rxc_q);
            if (in_hs) begin
              h_wr_o = 1'b1;
              rxc_d  = rxc_q + 1'b1;
            end
          end
          if ((!cfg_q.last_col || cnt_d == cfg_q.n_h) && rxc_d == cfg_q.n_h) begin
            cnt_d = '0;
            if (cfg_q.dense_en) begin gate_d = G_Y; state_d = S_GSTART; end
            else                state_d = S_IDLE;
          end
        end
      end

      S_HOUT, S_YOUT: begin
        out_sel_o   = (state_q == S_HOUT) ? OUT_H : OUT_Y;
        out_valid_o = !pipe_busy;
        if (out_hs) begin
          cnt_d = cnt_q + 1'b1;
          if (cnt_q == ((state_q == S_HOUT) ? cfg_q.n_h : cfg_q.n_y) - 1'b1) begin
            cnt_d   = '0;
            state_d = S_IDLE;
          end
        end
      end

      default: state_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      gate_q  <= G_I;
      cfg_q   <= '0;
      cnt_q   <= '0;
      rxc_q   <= '0;
      step_q  <= '0;
      waddr_q <= '0;
      wunit_q <= '0;
      ctrl_q  <= CTRL_NOP;
    end else begin
      state_q <= state_d;
      gate_q  <= gate_d;
      cnt_q   <= cnt_d;
      rxc_q   <= rxc_d;
      step_q  <= step_d;
      waddr_q <= waddr_d;
      wunit_q <= wunit_d;
      ctrl_q  <= ctrl_d;
      if (state_q == S_IDLE && cmd_valid_i) cfg_q <= cfg_i;
    end
  end

  assign out_data_o   = (out_sel_o == OUT_Y) ? unit_y_i : unit_h_i;
  assign sram_bank_o  = BW'(32'(wunit_q) / UPB);
  assign sram_lane_o  = LW'(32'(wunit_q) % UPB);
  assign sram_wdata_o = in_data_i;
  assign ctrl_o       = ctrl_q;
  assign busy_o       = (state_q != S_IDLE) || pipe_busy;

  // Stream rule: once offered, an output byte stays offered and unchanged
  // until it is taken.
  property p_out_stable;
    @(posedge clk_i) disable iff (!rst_ni)
      (out_valid_o && !out_ready_i) |=> (out_valid_o && $stable(out_data_o));
  endproperty
  a_out_stable: assert property (p_out_stable);

  initial begin
    assert (N % UPB == 0) else $error("N must be a multiple of UPB");
    assert (N <= 256)     else $error("N must not exceed 256");
  end

endmodule
