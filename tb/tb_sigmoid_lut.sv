// tb_sigmoid_lut - checks the activation table against 1/(1+exp(-x)) on the
// 1/16 grid with saturation at [-8,8), over every 2^-6 field step in
// [-12, 12] plus extreme fields, and that it is monotone.
module tb_sigmoid_lut;
  import pbit_pkg::*;
  import pc_ref_pkg::*;
  acc_t field;
  rnd_t prob, prev;
  int checks = 0, failures = 0;

  sigmoid_lut dut (.field(field), .prob(prob));

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    prev = '0;
    for (int f = -768; f <= 768; f++) begin
      field = acc_t'(f);
      #1;
      checks++;
      if (longint'(prob) != ref_prob(f)) begin
        failures++; $display("FAIL field %0d: got %h exp %h", f, prob, ref_prob(f));
      end
      checks++;
      if (prob < prev) begin failures++; $display("FAIL not monotone at %0d", f); end
      prev = prob;
    end
    // known points: sigmoid(0) = 0.5, extremes saturate
    field = 0; #1; checks++; if (prob != 32'h8000_0000) begin failures++; $display("FAIL p(0)=%h", prob); end
    field = acc_t'(131071); #1; checks++; if (longint'(prob) != ref_prob(2000)) begin failures++; $display("FAIL max"); end
    field = acc_t'(-131072); #1; checks++; if (prob > 32'd2000000) begin failures++; $display("FAIL min %h", prob); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
