// chipmunk_tile: one Chipmunk LSTM engine (the silicon prototype's core).
//
// N LSTM units work in parallel, one per row of the layer's matrix-vector
// products (96 in the prototype). Each unit reads one weight per cycle from
// its lane of the weight SRAM; N/UPB banks of UPB lanes each (12 banks of 8)
// share one address. x_t and h_t-1 live in two register banks outside the
// units; the element selected by the column index is broadcast to every unit.
// A sequencer (tile_ctrl) issues one micro-operation per cycle to all units.
// At the end of a time step the units' h_t either loads the h_t-1 bank
// directly (single-tile mode) or leaves through the output stream to be
// redistributed by the systolic array (see chipmunk_array).
//
// Ports: a command port (cmd/cfg with valid/ready), one 8-bit input stream
// and one 8-bit output stream with valid/ready, as in the paper, plus
// in_sel_o/out_sel_o telling the surrounding port mux which source the input
// listens to and what the output carries. mac_cycle_o is high in every cycle
// in which all N units perform a multiply-accumulate of a column loop.
// Everything is synchronous to clk_i with an asynchronous active-low reset.
// The units' acc_o outputs are left open: the tile reads each unit's result
// through h_o/y_o; acc_o exists for observing a unit on its own.
// Lint reports rst_ni as both asynchronous and synchronous here because the
// sequencer's handshake assertion is disabled during reset (see tile_ctrl).
module chipmunk_tile
  import chipmunk_pkg::*;
#(
  parameter int unsigned N   = 96,
  parameter int unsigned UPB = 8
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic      cmd_valid_i,
  input  cmd_e      cmd_i,
  input  tile_cfg_t cfg_i,
  output logic      cmd_ready_o,
  output logic      busy_o,
  input  logic      in_valid_i,
  input  q8_t       in_data_i,
  output logic      in_ready_o,
  output in_sel_e   in_sel_o,
  output logic      out_valid_o,
  output q8_t       out_data_o,
  input  logic      out_ready_i,
  output out_sel_e  out_sel_o,
  output logic      mac_cycle_o
);

  localparam int unsigned DEPTH = 9 * N + 7;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned NB    = N / UPB;
  localparam int unsigned BW    = (NB > 1) ? $clog2(NB) : 1;
  localparam int unsigned LW    = (UPB > 1) ? $clog2(UPB) : 1;

  cell_ctrl_t    ctrl;
  logic          sram_req, sram_we;
  logic [AW-1:0] sram_addr;
  logic [BW-1:0] sram_bank;
  logic [LW-1:0] sram_lane;
  q8_t           sram_wdata;
  logic          x_wr, h_wr, h_load_all, st_clr;
  idx_t          wr_idx, out_idx;
  q8_t           x_b, h_b;
  q8_t [N-1:0]   w, unit_h, unit_y;

  tile_ctrl #(.N(N), .UPB(UPB)) u_ctrl (
    .clk_i, .rst_ni,
    .cmd_valid_i, .cmd_i, .cfg_i, .cmd_ready_o, .busy_o,
    .in_valid_i, .in_data_i, .in_ready_o, .in_sel_o,
    .out_valid_o, .out_data_o, .out_ready_i, .out_sel_o,
    .out_idx_o(out_idx),
    .unit_h_i((32'(out_idx) < N) ? unit_h[out_idx] : q8_t'(0)),
    .unit_y_i((32'(out_idx) < N) ? unit_y[out_idx] : q8_t'(0)),
    .sram_req_o(sram_req), .sram_we_o(sram_we), .sram_addr_o(sram_addr),
    .sram_bank_o(sram_bank), .sram_lane_o(sram_lane), .sram_wdata_o(sram_wdata),
    .ctrl_o(ctrl),
    .x_wr_o(x_wr), .h_wr_o(h_wr), .wr_idx_o(wr_idx),
    .h_load_all_o(h_load_all), .st_clr_o(st_clr),
    .mac_cycle_o
  );

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic [UPB*8-1:0] rdata;
    logic             req;
    assign req = sram_req && (!sram_we || 32'(sram_bank) == b);
    weight_sram #(.LANES(UPB), .DEPTH(DEPTH)) u_sram (
      .clk_i,
      .req_i(req), .we_i(sram_we), .addr_i(sram_addr),
      .be_i(UPB'(1) << sram_lane),
      .wdata_i({UPB{sram_wdata}}),
      .rdata_o(rdata)
    );
    for (genvar l = 0; l < UPB; l++) begin : g_lane
      assign w[b*UPB + l] = q8_t'(rdata[l*8 +: 8]);
    end
  end

  state_bank #(.N(N)) u_xbank (
    .clk_i, .rst_ni, .clr_i(st_clr),
    .wr_en_i(x_wr), .wr_idx_i(wr_idx), .wr_data_i(in_data_i),
    .load_all_i(1'b0), .all_i('0),
    .rd_idx_i(ctrl.idx), .rd_data_o(x_b)
  );

  state_bank #(.N(N)) u_hbank (
    .clk_i, .rst_ni, .clr_i(st_clr),
    .wr_en_i(h_wr), .wr_idx_i(wr_idx), .wr_data_i(in_data_i),
    .load_all_i(h_load_all), .all_i(unit_h),
    .rd_idx_i(ctrl.idx), .rd_data_o(h_b)
  );

  for (genvar u = 0; u < N; u++) begin : g_unit
    lstm_unit u_unit (
      .clk_i, .rst_ni,
      .ctrl_i(ctrl), .w_i(w[u]), .x_i(x_b), .h_i(h_b),
      .z_en_i(32'(ctrl.idx) == u),
      .acc_o(), .h_o(unit_h[u]), .y_o(unit_y[u])
    );
  end

endmodule
