// chipmunk_tile_tb: one Chipmunk tile run as a stand-alone LSTM engine.
//
// Loads random weights through the input stream, clears the state and runs
// several time steps (frames) of an LSTM layer, one with the dense layer
// enabled, comparing every streamed-out h_t / y_t byte with a bit-exact
// reference model (chipmunk_ref_pkg). The state carried between frames
// (c_t, h_t-1) is therefore checked too. One frame runs with streams that
// never stall and its latency and number of MAC cycles are checked against
// 1 + n_x + 4(1 + n_x + n_h) + 14 + 2 + n_h and 4(n_x + n_h) (one MAC per unit
// per cycle); the others run with random gaps on the input and random
// back-pressure on the output.
module chipmunk_tile_tb;
  import chipmunk_pkg::*;
  import chipmunk_ref_pkg::*;

  localparam int N = 16, UPB = 8, D = 9 * N + 7;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;

  logic cmd_valid, cmd_ready, busy;
  cmd_e cmd;
  tile_cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready, mac_cycle;
  q8_t in_data, out_data;
  in_sel_e in_sel;
  out_sel_e out_sel;

  chipmunk_tile #(.N(N), .UPB(UPB)) dut (
    .clk_i(clk), .rst_ni(rst_n), .cmd_valid_i(cmd_valid), .cmd_i(cmd), .cfg_i(cfg),
    .cmd_ready_o(cmd_ready), .busy_o(busy),
    .in_valid_i(in_valid), .in_data_i(in_data), .in_ready_o(in_ready), .in_sel_o(in_sel),
    .out_valid_o(out_valid), .out_data_o(out_data), .out_ready_i(out_ready), .out_sel_o(out_sel),
    .mac_cycle_o(mac_cycle));

  always #5 clk = ~clk;

  // ---------------- stream drivers ----------------
  q8_t  in_q[$];
  q8_t  out_q[$];
  bit   gaps = 1;
  int   mac_count = 0;
  int   last_out_cycle = 0, cycle = 0;

  always_ff @(posedge clk) begin
    cycle <= cycle + 1;
    if (mac_cycle) mac_count <= mac_count + 1;
    if (in_valid && in_ready) void'(in_q.pop_front());
    if (out_valid && out_ready) begin out_q.push_back(out_data); last_out_cycle <= cycle; end
  end

  always @(negedge clk) begin
    in_valid  <= (in_q.size() > 0) && (!gaps || $urandom_range(3) != 0);
    in_data   <= (in_q.size() > 0) ? in_q[0] : '0;
    out_ready <= !gaps || ($urandom_range(2) != 0);
  end

  // ---------------- reference model ----------------
  int W [N][D];
  int xm [N], hm [N], cm [N], ym [N];

  function automatic void ref_frame(int n_x, int n_h, bit dense);
    int hn [N];
    for (int u = 0; u < N; u++) begin
      int acc, ig, fg, og, cn;
      int gv [4];
      for (int g = 0; g < 4; g++) begin
        acc = 0;
        for (int b = 0; b < n_x; b++) acc = mac(acc, W[u][g*2*N + b], xm[b]);
        for (int b = 0; b < n_h; b++) acc = mac(acc, W[u][g*2*N + N + b], hm[b]);
        gv[g] = acc;
      end
      acc = mac(gv[0], W[u][9*N+0], cm[u]); acc = add_w(acc, W[u][9*N+3]); ig = sigm_ref(rq(acc));
      acc = mac(gv[1], W[u][9*N+1], cm[u]); acc = add_w(acc, W[u][9*N+4]); fg = sigm_ref(rq(acc));
      acc = add_w(gv[2], W[u][9*N+5]);
      acc = ig * tanh_ref(rq(acc));
      acc = mac(acc, fg, cm[u]);
      cn = rq(acc);
      acc = mac(gv[3], W[u][9*N+2], cn); acc = add_w(acc, W[u][9*N+6]); og = sigm_ref(rq(acc));
      hn[u] = rq(og * tanh_ref(cn));
      cm[u] = cn;
    end
    for (int u = 0; u < N; u++) hm[u] = hn[u];
    if (dense)
      for (int u = 0; u < N; u++) begin
        int acc;
        acc = 0;
        for (int b = 0; b < n_h; b++) acc = mac(acc, W[u][8*N + b], hm[b]);
        ym[u] = sigm_ref(rq(acc));
      end
  endfunction

  task automatic issue(cmd_e c, tile_cfg_t cf, output int accept_cycle);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd = c; cfg = cf;
    @(posedge clk);
    accept_cycle = cycle;
    #1 cmd_valid = 0; cmd = CMD_NOP;
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (busy || in_q.size() != 0) @(negedge clk);
  endtask

  task automatic run_frame(int n_x, int n_h, bit dense, int n_y, bit timed);
    tile_cfg_t cf;
    int acc_cyc, mac0, nout;
    cf = '{n_x: cnt_t'(n_x), n_h: cnt_t'(n_h), n_y: cnt_t'(n_y), dense_en: dense,
           first_col: 1'b1, last_col: 1'b1};
    for (int b = 0; b < n_x; b++) begin xm[b] = rnd(40); in_q.push_back(q8_t'(xm[b])); end
    out_q.delete();
    gaps = !timed;
    @(negedge clk);
    mac0 = mac_count;
    issue(CMD_FRAME, cf, acc_cyc);
    wait_idle();
    repeat (3) @(negedge clk);
    ref_frame(n_x, n_h, dense);
    nout = dense ? n_y : n_h;
    checks++;
    if (out_q.size() != nout) begin
      failures++; $display("frame: %0d outputs, expected %0d", out_q.size(), nout);
    end
    for (int k = 0; k < nout && k < out_q.size(); k++) begin
      checks++;
      if (int'(out_q[k]) != (dense ? ym[k] : hm[k])) begin
        failures++;
        if (failures < 20) $display("out[%0d] = %0d expected %0d (dense %0d)", k, out_q[k],
                                    dense ? ym[k] : hm[k], dense);
      end
    end
    checks++;
    if (mac_count - mac0 != 4 * (n_x + n_h) + (dense ? n_h : 0)) begin
      failures++; $display("MAC cycles %0d expected %0d", mac_count - mac0, 4 * (n_x + n_h));
    end
    if (timed && !dense) begin
      checks++;
      if (last_out_cycle - acc_cyc + 1 != 1 + n_x + 4 * (1 + n_x + n_h) + 14 + 2 + n_h) begin
        failures++;
        $display("frame latency %0d cycles, expected %0d", last_out_cycle - acc_cyc + 1,
                 1 + n_x + 4 * (1 + n_x + n_h) + 14 + 2 + n_h);
      end
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ac;
    tile_cfg_t cf0;
    cmd_valid = 0; cmd = CMD_NOP; cfg = '0;
    for (int u = 0; u < N; u++) begin
      for (int a = 0; a < 9 * N; a++) W[u][a] = rnd(10);
      for (int a = 9 * N; a < D; a++) W[u][a] = rnd(24);
      xm[u] = 0; hm[u] = 0; cm[u] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    cf0 = '0;
    for (int a = 0; a < D; a++)
      for (int u = 0; u < N; u++) in_q.push_back(q8_t'(W[u][a]));
    issue(CMD_LOAD_W, cf0, ac);
    wait_idle();
    issue(CMD_CLEAR, cf0, ac);
    wait_idle();
    run_frame(10, 16, 0, 0, 1);   // timed, no stalls
    run_frame(10, 16, 0, 0, 0);
    run_frame(16, 16, 0, 0, 0);
    run_frame(7, 12, 1, 9, 0);    // dense layer output y
    run_frame(16, 16, 0, 0, 1);
    // CLEAR resets the recurrent state
    issue(CMD_CLEAR, cf0, ac);
    wait_idle();
    for (int u = 0; u < N; u++) begin hm[u] = 0; cm[u] = 0; end
    run_frame(12, 16, 0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
