// weight_sram_tb: write/read test of one weight SRAM bank.
//
// Fills the whole bank one byte lane at a time through the byte enables, as
// the tile's loader does, then reads every word back and checks the data
// and the one-cycle read latency. Also checks that a lane write leaves the
// other lanes of a word untouched.
module weight_sram_tb;
  localparam int LANES = 8, DEPTH = 871, AW = $clog2(DEPTH);
  int checks = 0, failures = 0;
  logic clk = 0;
  logic req, we;
  logic [AW-1:0] addr;
  logic [LANES-1:0] be;
  logic [LANES*8-1:0] wdata, rdata;
  logic [7:0] model [DEPTH][LANES];

  weight_sram #(.LANES(LANES), .DEPTH(DEPTH)) dut (
    .clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr), .be_i(be), .wdata_i(wdata), .rdata_o(rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = 0; we = 0; addr = 0; be = 0; wdata = 0;
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++)
      for (int l = 0; l < LANES; l++) begin
        logic [7:0] v;
        v = 8'($urandom);
        model[a][l] = v;
        req = 1; we = 1; addr = AW'(a); be = LANES'(1) << l; wdata = {LANES{v}};
        @(negedge clk);
      end
    // overwrite one lane of a few words
    for (int k = 0; k < 20; k++) begin
      int a, l;
      a = int'($urandom_range(DEPTH - 1)); l = int'($urandom_range(LANES - 1));
      model[a][l] = 8'($urandom);
      req = 1; we = 1; addr = AW'(a); be = LANES'(1) << l; wdata = {LANES{model[a][l]}};
      @(negedge clk);
    end
    for (int a = 0; a < DEPTH; a++) begin
      req = 1; we = 0; addr = AW'(a);
      @(posedge clk); #1;
      req = 0; addr = '0;     // data must stay from the last read
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (rdata[l*8 +: 8] !== model[a][l]) begin
          failures++;
          if (failures < 10) $display("addr %0d lane %0d: %h expected %h", a, l, rdata[l*8 +: 8], model[a][l]);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
