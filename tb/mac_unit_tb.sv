// mac_unit_tb: random test of the 8x8->16 MAC against a reference model.
//
// Drives random operands and a random mix of clear, accumulate-product,
// load-product and add-widened-addend operations, including long runs of
// large products that drive the accumulator into saturation, and compares
// the accumulator with chipmunk_ref_pkg after every clock edge.
module mac_unit_tb;
  import chipmunk_pkg::*;
  import chipmunk_ref_pkg::*;

  int checks = 0, failures = 0, sat_hits = 0;
  logic clk = 0, rst_n = 0;
  logic clr, en, use_add, load;
  q8_t  a, b, addend;
  acc_t acc;
  int   model;

  mac_unit dut (.clk_i(clk), .rst_ni(rst_n), .clr_i(clr), .en_i(en), .use_add_i(use_add),
                .load_i(load), .a_i(a), .b_i(b), .addend_i(addend), .acc_o(acc));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 0; en = 0; use_add = 0; load = 0; a = 0; b = 0; addend = 0;
    model = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 4000; it++) begin
      int r, term;
      @(negedge clk);
      r = int'($urandom_range(99));
      clr = (r < 3);
      en = (r >= 10);
      use_add = ($urandom_range(3) == 0);
      load = ($urandom_range(7) == 0);
      if ((it / 500) % 2 == 1) begin a = 8'sd127; b = 8'sd120; end  // saturation runs
      else begin a = q8_t'($urandom); b = q8_t'($urandom); end
      if ((it / 700) % 2 == 1) begin a = -8'sd128; b = 8'sd127; end
      addend = q8_t'($urandom);
      term = use_add ? int'(addend) * 32 : int'(a) * int'(b);
      if (clr)            model = 0;
      else if (en && load) model = term;
      else if (en) begin
        if (model + term > 32767 || model + term < -32768) sat_hits++;
        model = sat16(model + term);
      end
      @(posedge clk); #1;
      checks++;
      if (int'(acc) != model) begin
        failures++;
        if (failures < 10) $display("it %0d: acc %0d expected %0d", it, acc, model);
      end
    end
    checks++;
    if (sat_hits == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
