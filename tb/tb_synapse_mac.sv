// tb_synapse_mac - random weights, biases and neighbour spins; checks the
// 2-body sum, the 3-body sum (weight counted only when both spins are 1) and
// the total field against sums computed in the testbench.
module tb_synapse_mac;
  import pbit_pkg::*;
  localparam int K2 = 9, K3 = 3;
  weight_t j2 [K2];
  weight_t j3 [K3];
  weight_t h;
  logic [K2-1:0] s_j;
  logic [K3-1:0] s_a, s_b;
  acc_t sum2, sum3, field;
  int checks = 0, failures = 0;
  int n3 = 0;

  synapse_mac #(.K2(K2), .K3(K3)) dut (.j2(j2), .s_j(s_j), .j3(j3), .s_a(s_a), .s_b(s_b), .h(h),
                                      .sum2(sum2), .sum3(sum3), .field(field));

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int e2, e3;
      for (int k = 0; k < K2; k++) j2[k] = weight_t'($urandom_range(0, 8191));
      for (int p = 0; p < K3; p++) j3[p] = weight_t'($urandom_range(0, 8191));
      if (t < 4) begin  // corner: all weights at the most negative / positive value
        for (int k = 0; k < K2; k++) j2[k] = (t[0]) ? 13'sh0FFF : 13'sh1000;
        for (int p = 0; p < K3; p++) j3[p] = (t[0]) ? 13'sh0FFF : 13'sh1000;
      end
      h   = weight_t'($urandom_range(0, 8191));
      s_j = K2'($urandom());
      s_a = K3'($urandom());
      s_b = K3'($urandom());
      if (t < 4) begin s_j = '1; s_a = '1; s_b = '1; end
      #1;
      e2 = 0; e3 = 0;
      for (int k = 0; k < K2; k++) if (s_j[k]) e2 += int'(j2[k]);
      for (int p = 0; p < K3; p++) if (s_a[p] && s_b[p]) begin e3 += int'(j3[p]); n3++; end
      checks += 3;
      if (int'(sum2) != e2) begin failures++; $display("FAIL sum2 %0d exp %0d", sum2, e2); end
      if (int'(sum3) != e3) begin failures++; $display("FAIL sum3 %0d exp %0d", sum3, e3); end
      if (int'(field) != e2 + e3 + int'(h)) begin failures++; $display("FAIL field %0d exp %0d", field, e2 + e3 + int'(h)); end
    end
    checks++;
    if (n3 == 0) begin failures++; $display("FAIL 3-body path never active"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
