// tb_xoshiro128ss - checks the xoshiro128** generator against the reference
// model in pc_ref_pkg for 2000 outputs, that en=0 holds the output, and that
// reset reloads the seed.
module tb_xoshiro128ss;
  import pc_ref_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  logic [127:0] seed;
  logic [31:0] rnd;
  int checks = 0, failures = 0;
  xoshiro_ref ref_m;

  xoshiro128ss dut (.clk(clk), .rst_n(rst_n), .seed(seed), .en(en), .rnd(rnd));
  always #5 clk = ~clk;

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  initial begin
    seed = {32'h0123_4567, 32'h89AB_CDEF, 32'hDEAD_BEEF, 32'h0BAD_F00D};
    ref_m = new(32'h0123_4567, 32'h89AB_CDEF, 32'hDEAD_BEEF, 32'h0BAD_F00D);
    @(negedge clk); @(negedge clk); rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      en = ($urandom_range(0, 3) != 0);
      chk(rnd, ref_m.peek(), $sformatf("output %0d", i));
      @(negedge clk);
      if (en) ref_m.step();
    end
    en = 0;
    begin
      logic [31:0] held;
      held = rnd;
      repeat (5) @(negedge clk);
      chk(rnd, held, "hold with en=0");
    end
    rst_n = 0; @(negedge clk); rst_n = 1;
    ref_m = new(32'h0123_4567, 32'h89AB_CDEF, 32'hDEAD_BEEF, 32'h0BAD_F00D);
    chk(rnd, ref_m.peek(), "reset reloads seed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
