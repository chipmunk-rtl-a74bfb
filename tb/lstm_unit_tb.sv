// lstm_unit_tb: one LSTM unit driven through complete time steps.
//
// The testbench plays the sequencer: for several random time steps it issues
// the column loops of the four gates (MAC over x and h), the peephole, bias,
// sigmoid/tanh and cell-state micro-operations, the hidden-state product,
// partial-sum additions (OP_ADDZ, with the unit selected and not selected)
// and a dense-layer accumulation, and compares the accumulator, the gate
// registers, c_t, h_o and y_o with chipmunk_ref_pkg after each phase.
module lstm_unit_tb;
  import chipmunk_pkg::*;
  import chipmunk_ref_pkg::*;

  localparam int NC = 6;  // columns of x and of h
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  cell_ctrl_t ctrl;
  q8_t w, x, h;
  logic z_en;
  acc_t acc;
  q8_t  h_o, y_o;

  lstm_unit dut (.clk_i(clk), .rst_ni(rst_n), .ctrl_i(ctrl), .w_i(w), .x_i(x), .h_i(h),
                 .z_en_i(z_en), .acc_o(acc), .h_o(h_o), .y_o(y_o));

  always #5 clk = ~clk;

  int m_acc, m_i, m_f, m_o, m_c;

  task automatic issue(cell_op_e op, a_sel_e as, b_sel_e bs, t_sel_e ts, int wv, int xv, int hv);
    @(negedge clk);
    ctrl = CTRL_NOP;
    ctrl.op = op; ctrl.a_sel = as; ctrl.b_sel = bs; ctrl.t_sel = ts;
    w = q8_t'(wv); x = q8_t'(xv); h = q8_t'(hv);
    @(posedge clk); #1;
    ctrl = CTRL_NOP;
  endtask

  task automatic expect_eq(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int wx [4][NC], wh [4][NC], peep [3], bias [4], xs [NC], hs [NC], wy [NC];
    ctrl = CTRL_NOP; w = 0; x = 0; h = 0; z_en = 0;
    m_i = 0; m_f = 0; m_o = 0; m_c = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int step = 0; step < 12; step++) begin
      for (int g = 0; g < 4; g++) begin
        for (int b = 0; b < NC; b++) begin wx[g][b] = rnd(20); wh[g][b] = rnd(20); end
        bias[g] = rnd(20);
      end
      for (int k = 0; k < 3; k++) peep[k] = rnd(20);
      for (int b = 0; b < NC; b++) begin xs[b] = rnd(40); hs[b] = rnd(32); wy[b] = rnd(30); end
      for (int g = 0; g < 4; g++) begin
        issue(OP_CLR, A_W, B_X, T_ACC, 0, 0, 0);
        m_acc = 0;
        for (int b = 0; b < NC; b++) begin
          issue(OP_MAC, A_W, B_X, T_ACC, wx[g][b], xs[b], 0);
          m_acc = mac(m_acc, wx[g][b], xs[b]);
        end
        for (int b = 0; b < NC; b++) begin
          issue(OP_MAC, A_W, B_H, T_ACC, wh[g][b], 0, hs[b]);
          m_acc = mac(m_acc, wh[g][b], hs[b]);
        end
        // partial sum from a neighbour: one addressed to this unit, one not
        begin
          int zv;
          zv = rnd(60);
          @(negedge clk);
          ctrl = CTRL_NOP; ctrl.op = OP_ADDZ; ctrl.z = q8_t'(zv); z_en = 1;
          @(posedge clk); #1;
          m_acc = add_w(m_acc, zv);
          @(negedge clk);
          ctrl.z = q8_t'(rnd(60)); z_en = 0;
          @(posedge clk); #1;
          ctrl = CTRL_NOP;
        end
        expect_eq(int'(acc), m_acc, $sformatf("step %0d gate %0d column loop", step, g));
        case (g)
          0, 1: begin
            issue(OP_MAC, A_W, B_C, T_ACC, peep[g], 0, 0);
            m_acc = mac(m_acc, peep[g], m_c);
            issue(OP_ADDW, A_W, B_X, T_ACC, bias[g], 0, 0);
            m_acc = add_w(m_acc, bias[g]);
            issue(g == 0 ? OP_ST_I : OP_ST_F, A_W, B_X, T_ACC, 0, 0, 0);
            if (g == 0) m_i = sigm_ref(rq(m_acc)); else m_f = sigm_ref(rq(m_acc));
            expect_eq(int'(g == 0 ? dut.i_q : dut.f_q), g == 0 ? m_i : m_f, "gate register");
          end
          2: begin
            issue(OP_ADDW, A_W, B_X, T_ACC, bias[2], 0, 0);
            m_acc = add_w(m_acc, bias[2]);
            issue(OP_MUL, A_I, B_TANH, T_ACC, 0, 0, 0);
            m_acc = m_i * tanh_ref(rq(m_acc));
            issue(OP_MAC, A_F, B_C, T_ACC, 0, 0, 0);
            m_acc = mac(m_acc, m_f, m_c);
            issue(OP_ST_C, A_W, B_X, T_ACC, 0, 0, 0);
            m_c = rq(m_acc);
            expect_eq(int'(dut.c_q), m_c, "c_t");
          end
          default: begin
            issue(OP_MAC, A_W, B_C, T_ACC, peep[2], 0, 0);
            m_acc = mac(m_acc, peep[2], m_c);
            issue(OP_ADDW, A_W, B_X, T_ACC, bias[3], 0, 0);
            m_acc = add_w(m_acc, bias[3]);
            issue(OP_ST_O, A_W, B_X, T_ACC, 0, 0, 0);
            m_o = sigm_ref(rq(m_acc));
            expect_eq(int'(dut.o_q), m_o, "o_t");
            issue(OP_MUL, A_O, B_TANH, T_C, 0, 0, 0);
            m_acc = m_o * tanh_ref(m_c);
            expect_eq(int'(h_o), rq(m_acc), "h_t");
          end
        endcase
      end
      // dense layer on the h values
      issue(OP_CLR, A_W, B_X, T_ACC, 0, 0, 0);
      m_acc = 0;
      for (int b = 0; b < NC; b++) begin
        issue(OP_MAC, A_W, B_H, T_ACC, wy[b], 0, hs[b]);
        m_acc = mac(m_acc, wy[b], hs[b]);
      end
      expect_eq(int'(y_o), sigm_ref(rq(m_acc)), "y_t");
    end
    issue(OP_CLRST, A_W, B_X, T_ACC, 0, 0, 0);
    expect_eq(int'(dut.c_q) + int'(dut.i_q) + int'(acc), 0, "clear state");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
