// port_mux_tb: exhaustive test of the tile port MUX/DEMUX.
//
// For every input select, output select and combination of valid/ready
// bits it checks that the chosen source reaches the tile input and only it
// sees ready, and that the tile output reaches the destination chosen by
// out_sel with the matching ready.
module port_mux_tb;
  import chipmunk_pkg::*;
  int checks = 0, failures = 0;
  in_sel_e  isel;
  out_sel_e osel;
  logic xv, lv, hv, tr, tov, psr, hvr;
  q8_t  xd, ld, hd, tod;
  logic xr, lr, hr, tiv, tor, psv, hvv;
  q8_t  tid, psd, hvd;

  port_mux dut (.in_sel_i(isel), .x_valid_i(xv), .x_data_i(xd), .x_ready_o(xr),
    .left_valid_i(lv), .left_data_i(ld), .left_ready_o(lr),
    .hid_valid_i(hv), .hid_data_i(hd), .hid_ready_o(hr),
    .tin_valid_o(tiv), .tin_data_o(tid), .tin_ready_i(tr),
    .out_sel_i(osel), .tout_valid_i(tov), .tout_data_i(tod), .tout_ready_o(tor),
    .ps_valid_o(psv), .ps_data_o(psd), .ps_ready_i(psr),
    .hv_valid_o(hvv), .hv_data_o(hvd), .hv_ready_i(hvr));

  task automatic chk(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %b expected %b", what, got, exp); end
  endtask

  initial begin
    xd = 8'sd11; ld = 8'sd22; hd = 8'sd33; tod = -8'sd5;
    for (int s = 0; s < 4; s++)
      for (int o = 0; o < 4; o++)
        for (int v = 0; v < 128; v++) begin
          isel = in_sel_e'(s); osel = out_sel_e'(o);
          {xv, lv, hv, tr, tov, psr, hvr} = 7'(v);
          #1;
          chk(tiv, (s == 1) ? xv : (s == 2) ? lv : (s == 3) ? hv : 1'b0, "tin_valid");
          if (s != 0) begin
            checks++;
            if (tid != ((s == 1) ? xd : (s == 2) ? ld : hd)) failures++;
          end
          chk(xr, (s == 1) && tr, "x_ready");
          chk(lr, (s == 2) && tr, "left_ready");
          chk(hr, (s == 3) && tr, "hid_ready");
          chk(psv, tov && (o == 1), "ps_valid");
          chk(hvv, tov && (o == 2 || o == 3), "hv_valid");
          chk(tor, (o == 1) ? psr : hvr, "tout_ready");
          checks++;
          if (psd != tod || hvd != tod) failures++;
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
