// tb_energy_unit - random states and per-p-bit sums; checks
// e = -sum_i s_i (6h + 3 sum2 + 2 sum3) and that valid comes exactly two
// cycles after start, holding the result until the next start.
module tb_energy_unit;
  import pbit_pkg::*;
  localparam int N = 40;
  logic clk = 0, rst_n = 0, start = 0;
  logic [N-1:0] s;
  weight_t h [N];
  acc_t sum2 [N], sum3 [N];
  logic signed [31:0] energy;
  logic valid;
  int checks = 0, failures = 0;

  energy_unit #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .start(start), .s(s), .h(h), .sum2(sum2), .sum3(sum3),
                            .energy(energy), .valid(valid));
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(negedge clk); @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      longint e;
      int lat;
      e = 0;
      for (int i = 0; i < N; i++) begin
        s[i] = 1'($urandom());
        h[i] = weight_t'($urandom_range(0, 8191));
        sum2[i] = acc_t'($urandom_range(0, 65535) - 32768);
        sum3[i] = acc_t'($urandom_range(0, 16383) - 8192);
        if (t == 0) begin s[i] = 1; h[i] = 13'sh1000; sum2[i] = -18'sd36864; sum3[i] = -18'sd12288; end
        if (s[i]) e -= 6 * longint'(h[i]) + 3 * longint'(sum2[i]) + 2 * longint'(sum3[i]);
      end
      start = 1; @(negedge clk); start = 0;
      lat = 1;
      while (!valid && lat < 10) begin @(negedge clk); lat++; end
      checks += 2;
      if (lat != 2) begin failures++; $display("FAIL latency %0d", lat); end
      if (longint'(energy) != e) begin failures++; $display("FAIL energy %0d exp %0d", energy, e); end
      @(negedge clk);
      checks += 2;
      if (valid) begin failures++; $display("FAIL valid not a pulse"); end
      if (longint'(energy) != e) begin failures++; $display("FAIL energy not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
