// chipmunk_array_tb: end-to-end test of the systolic arrays.
//
// A reduced array (2 layers of 2 x 2 tiles of 8 units) is loaded tile by
// tile with random weights through the column input streams, cleared, and
// then runs time steps of a two-layer LSTM network:
//   * chained frames, where layer 0's hidden state streams straight into
//     layer 1's input-state columns, with a dense layer after layer 1;
//   * unchained frames, where the host feeds both layers.
// The host reads every h_t / y_t byte from the row output streams with random
// back-pressure and compares it with a bit-exact model of the split
// computation (local column loops, 8-bit partial sums passed along each
// row, element-wise steps in the last column, hidden state redistributed to
// the columns). It counts how often each mechanism occurred: weight loading,
// x broadcast, partial-sum transfers, hidden-state distribution, chaining
// between layers, dense outputs and output stalls, and fails if any never did.
module chipmunk_array_tb;
  import chipmunk_pkg::*;
  import chipmunk_ref_pkg::*;

  localparam int L = 2, R = 2, C = 2, N = 8, UPB = 8, D = 9 * N + 7;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;

  logic      cmd_valid, cmd_ready, busy, chain;
  cmd_e      cmd;
  logic      tile_en [L][R][C];
  tile_cfg_t cfg [L];
  logic      x_valid [L][C];
  q8_t       x_data  [L][C];
  logic      x_ready [L][C];
  logic      h_valid [L][R];
  q8_t       h_data  [L][R];
  logic      h_is_y  [L][R];
  logic      h_ready [L][R];
  logic [15:0] mac_tiles;

  chipmunk_array #(.LAYERS(L), .ROWS(R), .COLS(C), .N(N), .UPB(UPB)) dut (
    .clk_i(clk), .rst_ni(rst_n), .cmd_valid_i(cmd_valid), .cmd_i(cmd), .tile_en_i(tile_en),
    .cfg_i(cfg), .chain_i(chain), .cmd_ready_o(cmd_ready), .busy_o(busy),
    .x_valid_i(x_valid), .x_data_i(x_data), .x_ready_o(x_ready),
    .h_valid_o(h_valid), .h_data_o(h_data), .h_is_y_o(h_is_y), .h_ready_i(h_ready),
    .mac_tiles_o(mac_tiles));

  always #5 clk = ~clk;

  // ---------------- host streams ----------------
  q8_t xq [L][C][$];
  q8_t hq [L][R][$];
  q8_t yq [L][R][$];
  int  cnt_load = 0, cnt_xbc = 0, cnt_ps = 0, cnt_hdist = 0, cnt_chain = 0, cnt_y = 0;
  int  cnt_stall = 0, cnt_mac = 0;

  always_ff @(posedge clk) begin
    for (int l = 0; l < L; l++) begin
      for (int c = 0; c < C; c++)
        if (x_valid[l][c] && x_ready[l][c]) begin
          void'(xq[l][c].pop_front());
          cnt_xbc <= cnt_xbc + 1;
        end
      for (int r = 0; r < R; r++) begin
        if (h_valid[l][r] && h_ready[l][r]) begin
          if (h_is_y[l][r]) begin yq[l][r].push_back(h_data[l][r]); cnt_y <= cnt_y + 1; end
          else hq[l][r].push_back(h_data[l][r]);
        end
        if (h_valid[l][r] && !h_ready[l][r]) cnt_stall <= cnt_stall + 1;
      end
    end
    cnt_mac <= cnt_mac + int'(mac_tiles);
  end

  // mechanisms seen inside the array
  always_ff @(posedge clk) begin
    for (int l = 0; l < L; l++)
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          if (dut.m_l_valid[l][r][c] && dut.m_l_ready[l][r][c]) cnt_ps <= cnt_ps + 1;
          if (dut.m_h_valid[l][r][c] && dut.m_h_ready[l][r][c]) cnt_hdist <= cnt_hdist + 1;
        end
    if (chain && dut.xs_go[1][0]) cnt_chain <= cnt_chain + 1;
  end

  always @(negedge clk) begin
    for (int l = 0; l < L; l++) begin
      for (int c = 0; c < C; c++) begin
        x_valid[l][c] <= (xq[l][c].size() > 0) && ($urandom_range(3) != 0);
        x_data[l][c]  <= (xq[l][c].size() > 0) ? xq[l][c][0] : '0;
      end
      for (int r = 0; r < R; r++) h_ready[l][r] <= ($urandom_range(3) != 0);
    end
  end

  // ---------------- reference model ----------------
  int W [L][R][C][N][D];
  int cst [L][R][N];       // c_t of the last-column tile of row r
  int hv  [L][R * N];      // h_t-1 of layer l, in blocks of n_h
  int exp_h [L][R][$];
  int exp_y [L][R][$];

  function automatic int local_sum(int l, int r, int c, int u, int g, int n_x, int n_h,
                                   ref int xv [C * N]);
    int acc;
    acc = 0;
    if (g < 4) for (int b = 0; b < n_x; b++) acc = mac(acc, W[l][r][c][u][g*2*N + b], xv[c*n_x + b]);
    for (int b = 0; b < n_h; b++)
      acc = mac(acc, W[l][r][c][u][(g < 4) ? g*2*N + N + b : 8*N + b], hv[l][c*n_h + b]);
    return acc;
  endfunction

  // row-accumulated pre-activation of gate g for unit u of row block r
  function automatic int row_sum(int l, int r, int u, int g, int n_x, int n_h, ref int xv [C * N]);
    int acc;
    acc = local_sum(l, r, 0, u, g, n_x, n_h, xv);
    for (int c = 1; c < C; c++) acc = add_w(local_sum(l, r, c, u, g, n_x, n_h, xv), rq(acc));
    return acc;
  endfunction

  function automatic void ref_layer(int l, int n_x, int n_h, bit dense, int n_y, ref int xv [C * N]);
    int hn [R * N];
    for (int r = 0; r < R; r++)
      for (int u = 0; u < n_h; u++) begin
        int acc, ig, fg, og, cn;
        int wl [D];
        for (int a = 0; a < D; a++) wl[a] = W[l][r][C-1][u][a];
        acc = row_sum(l, r, u, 0, n_x, n_h, xv);
        acc = mac(acc, wl[9*N+0], cst[l][r][u]); acc = add_w(acc, wl[9*N+3]); ig = sigm_ref(rq(acc));
        acc = row_sum(l, r, u, 1, n_x, n_h, xv);
        acc = mac(acc, wl[9*N+1], cst[l][r][u]); acc = add_w(acc, wl[9*N+4]); fg = sigm_ref(rq(acc));
        acc = add_w(row_sum(l, r, u, 2, n_x, n_h, xv), wl[9*N+5]);
        acc = ig * tanh_ref(rq(acc));
        acc = mac(acc, fg, cst[l][r][u]);
        cn = rq(acc);
        cst[l][r][u] = cn;
        acc = row_sum(l, r, u, 3, n_x, n_h, xv);
        acc = mac(acc, wl[9*N+2], cn); acc = add_w(acc, wl[9*N+6]); og = sigm_ref(rq(acc));
        hn[r*n_h + u] = rq(og * tanh_ref(cn));
        exp_h[l][r].push_back(hn[r*n_h + u]);
      end
    for (int k = 0; k < R * n_h; k++) hv[l][k] = hn[k];
    if (dense)
      for (int r = 0; r < R; r++)
        for (int u = 0; u < n_y; u++)
          exp_y[l][r].push_back(sigm_ref(rq(row_sum(l, r, u, 4, n_x, n_h, xv))));
  endfunction

  // ---------------- host tasks ----------------
  task automatic issue(cmd_e c, bit only_one, int ol, int orow, int ocol);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    for (int l = 0; l < L; l++)
      for (int r = 0; r < R; r++)
        for (int k = 0; k < C; k++)
          tile_en[l][r][k] = !only_one || (l == ol && r == orow && k == ocol);
    cmd_valid = 1; cmd = c;
    @(negedge clk);
    cmd_valid = 0; cmd = CMD_NOP;
  endtask

  task automatic wait_done();
    bit empty;
    do begin
      @(negedge clk);
      empty = 1;
      for (int l = 0; l < L; l++) for (int c = 0; c < C; c++) if (xq[l][c].size() != 0) empty = 0;
    end while (busy || !empty);
    repeat (4) @(negedge clk);
  endtask

  task automatic compare_outputs(string what);
    for (int l = 0; l < L; l++)
      for (int r = 0; r < R; r++) begin
        checks++;
        if (hq[l][r].size() != exp_h[l][r].size() || yq[l][r].size() != exp_y[l][r].size()) begin
          failures++;
          $display("%s: layer %0d row %0d got %0d h / %0d y, expected %0d / %0d", what, l, r,
                   hq[l][r].size(), yq[l][r].size(), exp_h[l][r].size(), exp_y[l][r].size());
        end
        for (int k = 0; k < hq[l][r].size() && k < exp_h[l][r].size(); k++) begin
          checks++;
          if (int'(hq[l][r][k]) != exp_h[l][r][k]) begin
            failures++;
            if (failures < 20) $display("%s: h[%0d][%0d][%0d] = %0d expected %0d", what, l, r, k,
                                        hq[l][r][k], exp_h[l][r][k]);
          end
        end
        for (int k = 0; k < yq[l][r].size() && k < exp_y[l][r].size(); k++) begin
          checks++;
          if (int'(yq[l][r][k]) != exp_y[l][r][k]) begin
            failures++;
            if (failures < 20) $display("%s: y[%0d][%0d][%0d] = %0d expected %0d", what, l, r, k,
                                        yq[l][r][k], exp_y[l][r][k]);
          end
        end
        hq[l][r].delete(); yq[l][r].delete(); exp_h[l][r].delete(); exp_y[l][r].delete();
      end
  endtask

  // one time step of both layers; chained: layer 1 takes layer 0's h
  task automatic frame(bit chained, int nx0, int nh, bit dense1, int ny);
    int xv0 [C * N], xv1 [C * N];
    cfg[0] = '{n_x: cnt_t'(nx0), n_h: cnt_t'(nh), n_y: '0, dense_en: 1'b0, first_col: 1'b0, last_col: 1'b0};
    cfg[1] = '{n_x: cnt_t'(nh),  n_h: cnt_t'(nh), n_y: cnt_t'(ny), dense_en: dense1, first_col: 1'b0, last_col: 1'b0};
    chain = chained;
    for (int k = 0; k < C * nx0; k++) begin xv0[k] = rnd(40); xq[0][k / nx0].push_back(q8_t'(xv0[k])); end
    ref_layer(0, nx0, nh, 0, 0, xv0);
    if (chained) for (int k = 0; k < C * nh; k++) xv1[k] = hv[0][k];
    else for (int k = 0; k < C * nh; k++) begin xv1[k] = rnd(40); xq[1][k / nh].push_back(q8_t'(xv1[k])); end
    ref_layer(1, nh, nh, dense1, ny, xv1);
    issue(CMD_FRAME, 0, 0, 0, 0);
    wait_done();
    compare_outputs(chained ? "chained frame" : "unchained frame");
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd_valid = 0; cmd = CMD_NOP; chain = 0;
    for (int l = 0; l < L; l++) begin
      cfg[l] = '0;
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) tile_en[l][r][c] = 0;
      for (int k = 0; k < R * N; k++) hv[l][k] = 0;
      for (int r = 0; r < R; r++) for (int u = 0; u < N; u++) cst[l][r][u] = 0;
    end
    for (int l = 0; l < L; l++) for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
      for (int u = 0; u < N; u++) for (int a = 0; a < D; a++)
        W[l][r][c][u][a] = (a < 9 * N) ? rnd(8) : rnd(24);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load every tile through its column's input stream
    for (int l = 0; l < L; l++) for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      for (int a = 0; a < D; a++) for (int u = 0; u < N; u++) xq[l][c].push_back(q8_t'(W[l][r][c][u][a]));
      issue(CMD_LOAD_W, 1, l, r, c);
      wait_done();
      cnt_load++;
    end
    issue(CMD_CLEAR, 0, 0, 0, 0);
    wait_done();
    frame(1, 5, 7, 1, 6);
    frame(1, 5, 7, 0, 0);
    frame(0, 3, 7, 1, 8);
    frame(1, 8, 7, 1, 8);
    checks += 8;
    if (cnt_load == 0)  begin failures++; $display("weight loading never happened"); end
    if (cnt_xbc == 0)   begin failures++; $display("x broadcast never happened"); end
    if (cnt_ps == 0)    begin failures++; $display("partial sums never passed"); end
    if (cnt_hdist == 0) begin failures++; $display("hidden state never distributed"); end
    if (cnt_chain == 0) begin failures++; $display("layers never chained"); end
    if (cnt_y == 0)     begin failures++; $display("dense output never produced"); end
    if (cnt_stall == 0) begin failures++; $display("output back-pressure never happened"); end
    if (cnt_mac == 0)   begin failures++; $display("no MAC cycles"); end
    $display("mechanisms: loads %0d x-broadcast %0d partial-sums %0d h-dist %0d chained %0d y %0d stalls %0d tile-MAC-cycles %0d",
             cnt_load, cnt_xbc, cnt_ps, cnt_hdist, cnt_chain, cnt_y, cnt_stall, cnt_mac);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
