// tile_ctrl_tb: the tile sequencer on its own, in the three roles of a tile.
//
// The testbench records every micro-operation the sequencer issues (with the
// SRAM address issued one cycle before it) and compares the trace with the
// sequence expected from the operation loops: per gate a clear, n_x MACs on
// x and n_h MACs on h at the layout's addresses, then either the element-wise
// steps (last column) or partial-sum traffic. It runs a single-tile frame, a
// middle-column frame (partial sums in from the left, out to the right, h
// received from the hidden stream) and a last-column frame (partial sums in,
// h sent and received at once), checking the stream selects, the z values
// carried by OP_ADDZ and the number of bytes on each stream.
module tile_ctrl_tb;
  import chipmunk_pkg::*;

  localparam int N = 8, UPB = 4, D = 9 * N + 7, AW = $clog2(D);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, busy, in_valid, in_ready, out_valid, out_ready;
  cmd_e cmd;
  tile_cfg_t cfg;
  q8_t in_data, out_data;
  in_sel_e in_sel;
  out_sel_e out_sel;
  idx_t out_idx, wr_idx;
  logic sram_req, sram_we, x_wr, h_wr, h_load_all, st_clr, mac_cycle;
  logic [AW-1:0] sram_addr;
  logic [0:0] sram_bank;
  logic [1:0] sram_lane;
  q8_t sram_wdata;
  cell_ctrl_t ctrl;

  tile_ctrl #(.N(N), .UPB(UPB)) dut (
    .clk_i(clk), .rst_ni(rst_n), .cmd_valid_i(cmd_valid), .cmd_i(cmd), .cfg_i(cfg),
    .cmd_ready_o(cmd_ready), .busy_o(busy), .in_valid_i(in_valid), .in_data_i(in_data),
    .in_ready_o(in_ready), .in_sel_o(in_sel), .out_valid_o(out_valid), .out_data_o(out_data),
    .out_ready_i(out_ready), .out_sel_o(out_sel), .out_idx_o(out_idx),
    .unit_h_i(q8_t'(out_idx) + 8'sd3), .unit_y_i(q8_t'(out_idx) - 8'sd7),
    .sram_req_o(sram_req), .sram_we_o(sram_we), .sram_addr_o(sram_addr), .sram_bank_o(sram_bank),
    .sram_lane_o(sram_lane), .sram_wdata_o(sram_wdata), .ctrl_o(ctrl), .x_wr_o(x_wr),
    .h_wr_o(h_wr), .wr_idx_o(wr_idx), .h_load_all_o(h_load_all), .st_clr_o(st_clr),
    .mac_cycle_o(mac_cycle));

  always #5 clk = ~clk;

  typedef struct { cell_op_e op; a_sel_e a; b_sel_e b; t_sel_e t; int idx; int addr; int z; } rec_t;
  rec_t trace[$];
  int   last_addr;
  int   sent_ps, sent_h, h_writes, rx_left, x_writes, load_all;
  q8_t  z_sent[$];
  int   sel_err;

  always_ff @(posedge clk) begin
    last_addr <= sram_req ? int'(sram_addr) : -1;
    if (ctrl.op != OP_NOP)
      trace.push_back('{ctrl.op, ctrl.a_sel, ctrl.b_sel, ctrl.t_sel, int'(ctrl.idx), last_addr,
                         int'(ctrl.z)});
    if (out_valid && out_ready) begin
      if (out_sel == OUT_PS) sent_ps <= sent_ps + 1;
      if (out_sel == OUT_H)  sent_h  <= sent_h + 1;
      if (out_data != q8_t'(out_idx) + 8'sd3) sel_err <= sel_err + 1;
    end
    if (in_valid && in_ready && in_sel == IN_LEFT) rx_left <= rx_left + 1;
    if (h_wr) h_writes <= h_writes + 1;
    if (x_wr) x_writes <= x_writes + 1;
    if (h_load_all) load_all <= load_all + 1;
  end

  // input stream: always valid, data = a running counter, which is remembered
  // when sent from the left so OP_ADDZ can be checked.
  q8_t ctr;
  always @(negedge clk) begin
    in_valid  <= $urandom_range(3) != 0;
    in_data   <= ctr;
    out_ready <= $urandom_range(2) != 0;
  end
  always_ff @(posedge clk) if (in_valid && in_ready) begin
    ctr <= ctr + 8'sd5;
    if (in_sel == IN_LEFT) z_sent.push_back(in_data);
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  task automatic expect_op(inout int p, input cell_op_e op, input int addr, input string what);
    chk(p < trace.size() && trace[p].op == op && (addr < 0 || trace[p].addr == addr),
        $sformatf("%s: trace[%0d] op %0d addr %0d, expected op %0d addr %0d", what, p,
                  p < trace.size() ? int'(trace[p].op) : -1, p < trace.size() ? trace[p].addr : -1,
                  int'(op), addr));
    p++;
  endtask

  task automatic run(input bit first, input bit last, input int n_x, input int n_h);
    int p, zi;
    trace.delete(); z_sent.delete();
    sent_ps = 0; sent_h = 0; h_writes = 0; rx_left = 0; x_writes = 0; load_all = 0; sel_err = 0;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd = CMD_FRAME;
    cfg = '{n_x: cnt_t'(n_x), n_h: cnt_t'(n_h), n_y: '0, dense_en: 1'b0, first_col: first, last_col: last};
    @(negedge clk);
    cmd_valid = 0;
    while (busy || !cmd_ready) @(negedge clk);
    repeat (2) @(negedge clk);
    p = 0; zi = 0;
    chk(x_writes == n_x, "x bytes loaded");
    for (int g = 0; g < 4; g++) begin
      expect_op(p, OP_CLR, -1, "gate start");
      for (int b = 0; b < n_x; b++) expect_op(p, OP_MAC, g * 2 * N + b, "MAC x");
      for (int b = 0; b < n_h; b++) expect_op(p, OP_MAC, g * 2 * N + N + b, "MAC h");
      if (!first)
        for (int k = 0; k < n_h; k++) begin
          chk(p < trace.size() && trace[p].idx == k && zi < z_sent.size() &&
              trace[p].z == int'(z_sent[zi]), "ADDZ target and value");
          expect_op(p, OP_ADDZ, -1, "partial sum in");
          zi++;
        end
      if (last) begin
        case (g)
          0, 1: begin
            expect_op(p, OP_MAC, 9 * N + g, "peephole");
            expect_op(p, OP_ADDW, 9 * N + 3 + g, "bias");
            expect_op(p, g == 0 ? OP_ST_I : OP_ST_F, -1, "store gate");
          end
          2: begin
            expect_op(p, OP_ADDW, 9 * N + 5, "bias c");
            chk(p < trace.size() && trace[p].a == A_I && trace[p].b == B_TANH && trace[p].t == T_ACC,
                "i * tanh operands");
            expect_op(p, OP_MUL, -1, "i*tanh");
            chk(p < trace.size() && trace[p].a == A_F && trace[p].b == B_C, "f * c operands");
            expect_op(p, OP_MAC, -1, "f*c");
            expect_op(p, OP_ST_C, -1, "store c");
          end
          default: begin
            expect_op(p, OP_MAC, 9 * N + 2, "peephole o");
            expect_op(p, OP_ADDW, 9 * N + 6, "bias o");
            expect_op(p, OP_ST_O, -1, "store o");
            chk(p < trace.size() && trace[p].a == A_O && trace[p].b == B_TANH && trace[p].t == T_C,
                "o * tanh(c) operands");
            expect_op(p, OP_MUL, -1, "h = o*tanh(c)");
          end
        endcase
      end
    end
    chk(p == trace.size(), $sformatf("trace length %0d, expected %0d", trace.size(), p));
    chk(sent_ps == (last ? 0 : 4 * n_h), "partial-sum bytes sent");
    chk(rx_left == (first ? 0 : 4 * n_h), "partial-sum bytes received");
    chk(sent_h == (last ? n_h : 0), "h bytes sent");
    chk(h_writes == ((first && last) ? 0 : n_h), "h bytes received");
    chk(load_all == ((first && last) ? 1 : 0), "h bank parallel load");
    chk(sel_err == 0, "output byte of the selected unit");
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stream selects must match the phase: partial sums only to a right neighbour
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (out_sel == OUT_PS && cfg.last_col) failures++;
    if (out_sel == OUT_NONE) failures++;
  end

  initial begin
    cmd_valid = 0; cmd = CMD_NOP; cfg = '0; ctr = 8'sd1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1, 1, 5, 8);   // single tile
    run(0, 0, 3, 6);   // middle column
    run(0, 1, 8, 7);   // last column
    run(1, 0, 2, 4);   // first column
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
