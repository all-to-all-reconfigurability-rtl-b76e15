// tb_neighbor_mux - random state vectors and index sets (including
// out-of-range indices, which must read 0); checks every slot.
module tb_neighbor_mux;
  localparam int N = 100, K = 9, IW = 7;
  logic [N-1:0] states;
  logic [IW-1:0] idx [K];
  logic [K-1:0] m;
  int checks = 0, failures = 0;

  neighbor_mux #(.N(N), .K(K), .IW(IW)) dut (.states(states), .idx(idx), .m(m));

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int w = 0; w < N; w++) states[w] = 1'($urandom());
      for (int k = 0; k < K; k++) idx[k] = IW'($urandom_range(0, 127));
      #1;
      for (int k = 0; k < K; k++) begin
        logic e;
        e = (idx[k] < N) ? states[idx[k]] : 1'b0;
        checks++;
        if (m[k] !== e) begin failures++; $display("FAIL slot %0d idx %0d", k, idx[k]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
