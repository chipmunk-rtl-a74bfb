// port_mux: the MUX/DEMUX in front of a tile's stream ports (Fig. 4).
//
// A tile has one input and one output stream port. In a systolic array its
// input is fed from one of three sources: the column's input-state stream x_j,
// the output of its left neighbour (i,j-1) carrying partial sums, or the
// hidden-state stream h_j coming back from tile (j, LAST). The tile's in_sel
// output chooses the source; only the chosen source sees ready. On the output
// side the tile's out_sel steers the stream either to the right neighbour
// (partial sums) or to the hidden-state/host network (h_t or y_t).
// Purely combinational; valid never depends on ready, so no loop is formed.
// The paper draws the block and its three inputs; the select signals driven
// by the tile are this design's choice.
module port_mux
  import chipmunk_pkg::*;
(
  input  in_sel_e  in_sel_i,
  // sources
  input  logic     x_valid_i,
  input  q8_t      x_data_i,
  output logic     x_ready_o,
  input  logic     left_valid_i,
  input  q8_t      left_data_i,
  output logic     left_ready_o,
  input  logic     hid_valid_i,
  input  q8_t      hid_data_i,
  output logic     hid_ready_o,
  // tile input port
  output logic     tin_valid_o,
  output q8_t      tin_data_o,
  input  logic     tin_ready_i,
  // tile output port
  input  out_sel_e out_sel_i,
  input  logic     tout_valid_i,
  input  q8_t      tout_data_i,
  output logic     tout_ready_o,
  // destinations
  output logic     ps_valid_o,
  output q8_t      ps_data_o,
  input  logic     ps_ready_i,
  output logic     hv_valid_o,
  output q8_t      hv_data_o,
  input  logic     hv_ready_i
);

  always_comb begin
    tin_valid_o = 1'b0;
    tin_data_o  = '0;
    unique case (in_sel_i)
      IN_X:      begin tin_valid_o = x_valid_i;    tin_data_o = x_data_i;    end
      IN_LEFT:   begin tin_valid_o = left_valid_i; tin_data_o = left_data_i; end
      IN_HIDDEN: begin tin_valid_o = hid_valid_i;  tin_data_o = hid_data_i;  end
      default: ;
    endcase
  end

  assign x_ready_o    = (in_sel_i == IN_X)      && tin_ready_i;
  assign left_ready_o = (in_sel_i == IN_LEFT)   && tin_ready_i;
  assign hid_ready_o  = (in_sel_i == IN_HIDDEN) && tin_ready_i;

  assign ps_valid_o   = tout_valid_i && (out_sel_i == OUT_PS);
  assign ps_data_o    = tout_data_i;
  assign hv_valid_o   = tout_valid_i && (out_sel_i == OUT_H || out_sel_i == OUT_Y);
  assign hv_data_o    = tout_data_i;
  assign tout_ready_o = (out_sel_i == OUT_PS) ? ps_ready_i : hv_ready_i;

endmodule
