// state_bank_tb: test of the x_t / h_t-1 register bank and its broadcast mux.
//
// Writes random elements one at a time, loads the whole bank in parallel,
// clears it, and after each step reads every index (and one index past N)
// through the mux, comparing with a model array.
module state_bank_tb;
  import chipmunk_pkg::*;
  localparam int N = 24;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic clr, wr_en, load_all;
  idx_t wr_idx, rd_idx;
  q8_t  wr_data, rd_data;
  q8_t [N-1:0] all;
  int model [N];

  state_bank #(.N(N)) dut (.clk_i(clk), .rst_ni(rst_n), .clr_i(clr), .wr_en_i(wr_en),
    .wr_idx_i(wr_idx), .wr_data_i(wr_data), .load_all_i(load_all), .all_i(all),
    .rd_idx_i(rd_idx), .rd_data_o(rd_data));

  always #5 clk = ~clk;

  task automatic check_all();
    for (int k = 0; k <= N; k++) begin
      rd_idx = idx_t'(k);
      #1;
      checks++;
      if (int'(rd_data) != ((k < N) ? model[k] : 0)) begin
        failures++;
        $display("idx %0d: %0d expected %0d", k, rd_data, (k < N) ? model[k] : 0);
      end
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 0; wr_en = 0; load_all = 0; wr_idx = 0; wr_data = 0; all = '0; rd_idx = 0;
    foreach (model[k]) model[k] = 0;
    @(negedge clk); rst_n = 1;
    check_all();
    for (int it = 0; it < 60; it++) begin
      @(negedge clk);
      wr_en = 1; wr_idx = idx_t'($urandom_range(N - 1)); wr_data = q8_t'($urandom);
      model[wr_idx] = int'(wr_data);
    end
    @(negedge clk); wr_en = 0;
    check_all();
    for (int k = 0; k < N; k++) begin all[k] = q8_t'($urandom); end
    load_all = 1;
    @(negedge clk); load_all = 0;
    for (int k = 0; k < N; k++) model[k] = int'(all[k]);
    check_all();
    clr = 1;
    @(negedge clk); clr = 0;
    foreach (model[k]) model[k] = 0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
