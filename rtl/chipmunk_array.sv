// chipmunk_array: Chipmunk tiles wired as systolic arrays, one per LSTM layer.
//
// A layer too large for one tile is split over a ROWS x COLS array (Fig. 4):
// tile (i,j) holds the weights that connect input-state block j (x_j and h_j,
// at most N elements each) to output block i (at most N rows). Each step of a
// time step works as follows.
//   * input state loading: column j's x_j stream is broadcast to every tile of
//     column j; a byte moves only when all enabled tiles of the column take it.
//   * next state computation: for each gate the tiles of a row run their local
//     column loops; tile (i,j) adds the partial sums of (i,j-1) and passes the
//     result to (i,j+1); tile (i,LAST) applies the element-wise steps and
//     owns c_t of block i.
//   * hidden state distribution: tile (i,LAST) streams h_i, which is broadcast
//     to every tile of column i (hard-wired, so ROWS must equal COLS) and to
//     the host port h_out[layer][i].
// LAYERS such arrays are instantiated; with chain_i set, the h_i stream of
// layer l also feeds column i's input-state stream of layer l+1, so a deep
// network runs with every layer's weights resident, as in the 3 x 5 x 5
// configuration evaluated for the paper's speech-recognition workload. With
// chain_i clear, every layer takes x_j from its own host port (used to load
// weights and to run layers one at a time). y_t of a dense layer leaves
// through h_out only.
//
// Host interface: one command with a per-tile enable mask; it is issued to
// the enabled tiles together and accepted when all of them are idle. Each
// tile receives its layer's cfg_i entry with first_col/last_col set by its
// position. Streams are 8-bit data with valid/ready. A layer of 1 x 1 tiles
// is a single Chipmunk chip. The topology follows the paper; the enable mask,
// chaining switch and command port are this design's own choices.
// Lint reports rst_ni as both asynchronous and synchronous because each
// tile's handshake assertion is disabled during reset (see tile_ctrl); the
// flip-flops themselves all use the asynchronous reset.
module chipmunk_array
  import chipmunk_pkg::*;
#(
  parameter int unsigned LAYERS = 3,
  parameter int unsigned ROWS   = 5,
  parameter int unsigned COLS   = 5,
  parameter int unsigned N      = 96,
  parameter int unsigned UPB    = 8
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  // command
  input  logic      cmd_valid_i,
  input  cmd_e      cmd_i,
  input  logic      tile_en_i [LAYERS][ROWS][COLS],
  input  tile_cfg_t cfg_i [LAYERS],
  input  logic      chain_i,
  output logic      cmd_ready_o,
  output logic      busy_o,
  // input-state streams, one per layer and column
  input  logic      x_valid_i [LAYERS][COLS],
  input  q8_t       x_data_i  [LAYERS][COLS],
  output logic      x_ready_o [LAYERS][COLS],
  // hidden-state / dense-output streams, one per layer and row
  output logic      h_valid_o [LAYERS][ROWS],
  output q8_t       h_data_o  [LAYERS][ROWS],
  output logic      h_is_y_o  [LAYERS][ROWS],
  input  logic      h_ready_i [LAYERS][ROWS],
  // number of tiles doing a column-loop MAC in this cycle
  output logic [15:0] mac_tiles_o
);

  localparam int unsigned L = LAYERS, R = ROWS, C = COLS;

  // per-tile wires
  logic      t_cmd_ready [L][R][C];
  logic      t_busy      [L][R][C];
  logic      t_in_valid  [L][R][C];
  q8_t       t_in_data   [L][R][C];
  logic      t_in_ready  [L][R][C];
  in_sel_e   t_in_sel    [L][R][C];
  logic      t_out_valid [L][R][C];
  q8_t       t_out_data  [L][R][C];
  logic      t_out_ready [L][R][C];
  out_sel_e  t_out_sel   [L][R][C];
  logic      t_mac       [L][R][C];
  // port-mux side
  logic      m_x_valid   [L][R][C];
  logic      m_x_ready   [L][R][C];
  logic      m_l_valid   [L][R][C];
  q8_t       m_l_data    [L][R][C];
  logic      m_l_ready   [L][R][C];
  logic      m_h_valid   [L][R][C];
  logic      m_h_ready   [L][R][C];
  logic      m_ps_valid  [L][R][C];
  q8_t       m_ps_data   [L][R][C];
  logic      m_ps_ready  [L][R][C];
  logic      m_hv_valid  [L][R][C];
  q8_t       m_hv_data   [L][R][C];
  logic      m_hv_ready  [L][R][C];
  // networks
  q8_t       xs_data     [L][C];
  logic      xj_ready    [L][C];   // all enabled tiles of column c take x
  logic      xs_go       [L][C];   // x transfer happens (all destinations ready)
  logic      hn_is_h     [L][R];   // row r's last tile is sending h (not y)
  logic      hcol_ready  [L][R];   // all enabled tiles of column r take h
  logic      hn_others   [L][R];   // every destination but the host is ready
  logic      hn_go       [L][R];
  logic      cmd_all_ready;

  if (R != C) begin : g_bad_shape
    $error("chipmunk_array: hidden-state distribution needs ROWS == COLS");
  end

  // command broadcast
  always_comb begin
    cmd_all_ready = 1'b1;
    busy_o        = 1'b0;
    mac_tiles_o   = '0;
    for (int l = 0; l < L; l++)
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          if (tile_en_i[l][r][c] && !t_cmd_ready[l][r][c]) cmd_all_ready = 1'b0;
          if (t_busy[l][r][c]) busy_o = 1'b1;
          if (t_mac[l][r][c])  mac_tiles_o = mac_tiles_o + 16'd1;
        end
  end
  assign cmd_ready_o = cmd_all_ready;

  // joins of the broadcast networks
  always_comb begin
    for (int l = 0; l < L; l++) begin
      // a byte of x_j moves only if some tile of the column is enabled and all
      // enabled tiles of the column take it
      for (int c = 0; c < C; c++) begin
        logic any;
        any = 1'b0;
        xj_ready[l][c] = 1'b1;
        for (int r = 0; r < R; r++) begin
          if (tile_en_i[l][r][c]) any = 1'b1;
          if (tile_en_i[l][r][c] && !m_x_ready[l][r][c]) xj_ready[l][c] = 1'b0;
        end
        if (!any) xj_ready[l][c] = 1'b0;
      end
      for (int r = 0; r < R; r++) begin
        hcol_ready[l][r] = 1'b1;
        for (int k = 0; k < R; k++)
          if (tile_en_i[l][k][r] && !m_h_ready[l][k][r]) hcol_ready[l][r] = 1'b0;
      end
    end
  end

  for (genvar l = 0; l < L; l++) begin : g_layer
    // hidden-state network of each row
    for (genvar r = 0; r < R; r++) begin : g_hnet
      logic next_ready;
      if (l + 1 < L) begin : g_next
        assign next_ready = chain_i ? xj_ready[l+1][r] : 1'b1;
      end else begin : g_last
        assign next_ready = 1'b1;
      end
      assign hn_is_h[l][r]   = (t_out_sel[l][r][C-1] == OUT_H);
      assign hn_others[l][r] = hn_is_h[l][r] ? (hcol_ready[l][r] && next_ready) : 1'b1;
      assign hn_go[l][r]     = m_hv_valid[l][r][C-1] && hn_others[l][r] && h_ready_i[l][r];
      assign m_hv_ready[l][r][C-1] = hn_others[l][r] && h_ready_i[l][r];
      assign h_valid_o[l][r] = m_hv_valid[l][r][C-1] && hn_others[l][r];
      assign h_data_o[l][r]  = m_hv_data[l][r][C-1];
      assign h_is_y_o[l][r]  = !hn_is_h[l][r];
    end

    // input-state source of each column
    for (genvar c = 0; c < C; c++) begin : g_xsrc
      if (l > 0) begin : g_chain
        assign xs_data[l][c]   = chain_i ? m_hv_data[l-1][c][C-1] : x_data_i[l][c];
        assign xs_go[l][c]     = chain_i ? (hn_go[l-1][c] && hn_is_h[l-1][c])
                                         : (x_valid_i[l][c] && xj_ready[l][c]);
        assign x_ready_o[l][c] = chain_i ? 1'b0 : xj_ready[l][c];
      end else begin : g_host
        assign xs_data[l][c]   = x_data_i[l][c];
        assign xs_go[l][c]     = x_valid_i[l][c] && xj_ready[l][c];
        assign x_ready_o[l][c] = xj_ready[l][c];
      end
    end

    for (genvar r = 0; r < R; r++) begin : g_row
      for (genvar c = 0; c < C; c++) begin : g_col
        tile_cfg_t cfg;
        always_comb begin
          cfg           = cfg_i[l];
          cfg.first_col = (c == 0);
          cfg.last_col  = (c == C - 1);
        end

        // x broadcast: a tile sees valid only when every destination is ready
        assign m_x_valid[l][r][c] = xs_go[l][c];
        // hidden broadcast from tile (c, LAST) of the same layer
        assign m_h_valid[l][r][c] = hn_go[l][c] && hn_is_h[l][c];

        // left neighbour link (partial sums)
        if (c > 0) begin : g_left
          assign m_l_valid[l][r][c]    = m_ps_valid[l][r][c-1];
          assign m_l_data[l][r][c]     = m_ps_data[l][r][c-1];
          assign m_ps_ready[l][r][c-1] = m_l_ready[l][r][c];
        end else begin : g_noleft
          assign m_l_valid[l][r][c] = 1'b0;
          assign m_l_data[l][r][c]  = '0;
        end
        if (c == C - 1) begin : g_noright
          assign m_ps_ready[l][r][c] = 1'b0;
        end else begin : g_nohv
          assign m_hv_ready[l][r][c] = 1'b0;
        end

        port_mux u_pmux (
          .in_sel_i(t_in_sel[l][r][c]),
          .x_valid_i(m_x_valid[l][r][c]), .x_data_i(xs_data[l][c]), .x_ready_o(m_x_ready[l][r][c]),
          .left_valid_i(m_l_valid[l][r][c]), .left_data_i(m_l_data[l][r][c]),
          .left_ready_o(m_l_ready[l][r][c]),
          .hid_valid_i(m_h_valid[l][r][c]), .hid_data_i(m_hv_data[l][c][C-1]),
          .hid_ready_o(m_h_ready[l][r][c]),
          .tin_valid_o(t_in_valid[l][r][c]), .tin_data_o(t_in_data[l][r][c]),
          .tin_ready_i(t_in_ready[l][r][c]),
          .out_sel_i(t_out_sel[l][r][c]), .tout_valid_i(t_out_valid[l][r][c]),
          .tout_data_i(t_out_data[l][r][c]), .tout_ready_o(t_out_ready[l][r][c]),
          .ps_valid_o(m_ps_valid[l][r][c]), .ps_data_o(m_ps_data[l][r][c]),
          .ps_ready_i(m_ps_ready[l][r][c]),
          .hv_valid_o(m_hv_valid[l][r][c]), .hv_data_o(m_hv_data[l][r][c]),
          .hv_ready_i(m_hv_ready[l][r][c])
        );

        chipmunk_tile #(.N(N), .UPB(UPB)) u_tile (
          .clk_i, .rst_ni,
          .cmd_valid_i(cmd_valid_i && tile_en_i[l][r][c] && cmd_all_ready),
          .cmd_i, .cfg_i(cfg),
          .cmd_ready_o(t_cmd_ready[l][r][c]), .busy_o(t_busy[l][r][c]),
          .in_valid_i(t_in_valid[l][r][c]), .in_data_i(t_in_data[l][r][c]),
          .in_ready_o(t_in_ready[l][r][c]), .in_sel_o(t_in_sel[l][r][c]),
          .out_valid_o(t_out_valid[l][r][c]), .out_data_o(t_out_data[l][r][c]),
          .out_ready_i(t_out_ready[l][r][c]), .out_sel_o(t_out_sel[l][r][c]),
          .mac_cycle_o(t_mac[l][r][c])
        );
      end
    end
  end

endmodule
