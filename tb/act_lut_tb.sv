// act_lut_tb: exhaustive check of the sigmoid and tanh lookup tables.
//
// Every one of the 256 inputs is applied to both tables and compared with
// the reference functions of chipmunk_ref_pkg (computed with real
// arithmetic at run time). Also checks monotonicity and the values at 0.
module act_lut_tb;
  import chipmunk_pkg::*;
  import chipmunk_ref_pkg::*;

  int checks = 0, failures = 0;
  q8_t a, ys, yt;

  act_lut #(.IS_TANH(1'b0)) u_sig (.a(a), .y(ys));
  act_lut #(.IS_TANH(1'b1)) u_tanh (.a(a), .y(yt));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int prev_s, prev_t;
    prev_s = -1000; prev_t = -1000;
    for (int v = -128; v < 128; v++) begin
      a = q8_t'(v);
      #1;
      checks += 2;
      if (int'(ys) != sigm_ref(v)) begin
        failures++; $display("sigm(%0d) = %0d, expected %0d", v, ys, sigm_ref(v));
      end
      if (int'(yt) != tanh_ref(v)) begin
        failures++; $display("tanh(%0d) = %0d, expected %0d", v, yt, tanh_ref(v));
      end
      checks += 2;
      if (int'(ys) < prev_s) failures++;
      if (int'(yt) < prev_t) failures++;
      prev_s = int'(ys); prev_t = int'(yt);
      if (v == 0) begin
        checks += 2;
        if (ys != 8'sd16) failures++;   // sigm(0) = 0.5
        if (yt != 8'sd0)  failures++;   // tanh(0) = 0
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
