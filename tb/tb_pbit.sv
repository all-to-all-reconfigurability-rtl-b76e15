// tb_pbit - one p-bit with random weights, bias, neighbour indices and a
// testbench-driven neighbour state vector. Each cycle either its colour phase
// or another phase is enabled; the state must follow the reference
// (field -> sigmoid table -> compare with xoshiro128** output) exactly, hold
// when its colour is not enabled, accept state writes, and over many updates
// at a fixed field of +1.0 be 1 with probability sigmoid(1) = 0.731.
module tb_pbit;
  import pbit_pkg::*;
  import pc_ref_pkg::*;
  localparam int N = 16, K2 = 9, K3 = 3, NC = 6, IW = 4, COLOR = 2;
  logic clk = 0, rst_n = 0;
  logic [127:0] seed;
  cfg_wr_t cfg;
  logic [NC-1:0] phase_en;
  logic [COLOR_W-1:0] color;
  logic [IW-1:0] idx2 [K2];
  logic [IW-1:0] idxa [K3];
  logic [IW-1:0] idxb [K3];
  logic [N-1:0] states;
  logic s;
  weight_t h_o;
  acc_t sum2, sum3;
  int checks = 0, failures = 0;
  int w2 [K2], w3 [K3], wh;
  xoshiro_ref rng;

  pbit #(.N(N), .K2(K2), .K3(K3), .NC(NC), .IW(IW)) dut (
    .clk(clk), .rst_n(rst_n), .seed(seed), .cfg(cfg), .sel(1'b1), .phase_en(phase_en), .color(color),
    .idx2(idx2), .idxa(idxa), .idxb(idxb), .states(states), .s(s), .h_o(h_o), .sum2(sum2), .sum3(sum3));
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(cfg_region_e region, int slot, int data);
    cfg = '0; cfg.en = 1; cfg.region = region; cfg.slot = 8'(slot); cfg.data = 32'(data);
    @(negedge clk);
    cfg = '0;
  endtask

  function automatic int ref_field();
    int f;
    f = wh;
    for (int k = 0; k < K2; k++) if (states[idx2[k]]) f += w2[k];
    for (int p = 0; p < K3; p++) if (states[idxa[p]] && states[idxb[p]]) f += w3[p];
    return f;
  endfunction

  initial begin
    int ones, upd;
    bit exp_s;
    cfg = '0; phase_en = '0; color = COLOR; states = '0;
    seed = {32'h1111_2222, 32'h3333_4444, 32'h5555_6666, 32'h7777_8889};
    rng = new(32'h1111_2222, 32'h3333_4444, 32'h5555_6666, 32'h7777_8889);
    for (int k = 0; k < K2; k++) idx2[k] = IW'($urandom_range(0, N - 1));
    for (int p = 0; p < K3; p++) begin idxa[p] = IW'($urandom_range(0, N - 1)); idxb[p] = IW'($urandom_range(0, N - 1)); end
    @(negedge clk); @(negedge clk); rst_n = 1;
    checks++; if (s !== 1'b0) begin failures++; $display("FAIL reset state"); end
    // weights in [-2, 2] so fields stay mostly inside the table range
    for (int k = 0; k < K2; k++) begin w2[k] = $urandom_range(0, 256) - 128; wr(CFG_J2, k, w2[k]); end
    for (int p = 0; p < K3; p++) begin w3[p] = $urandom_range(0, 256) - 128; wr(CFG_J3, p, w3[p]); end
    wh = $urandom_range(0, 128) - 64; wr(CFG_BIAS, 0, wh);
    checks++; if (int'(h_o) != wh) begin failures++; $display("FAIL bias readback"); end
    exp_s = 0; upd = 0;
    for (int t = 0; t < 3000; t++) begin
      int f;
      for (int w = 0; w < N; w++) states[w] = 1'($urandom());
      phase_en = '0;
      if ($urandom_range(0, 2) != 0) phase_en[COLOR] = 1'b1; else phase_en[$urandom_range(0, NC - 1) == COLOR ? 0 : 5] = 1'b1;
      #1;
      f = ref_field();
      checks++;
      if (int'(sum2) + int'(sum3) + int'(h_o) != f) begin failures++; $display("FAIL field t=%0d", t); end
      if (phase_en[COLOR]) begin
        exp_s = ref_prob(f) > longint'(rng.peek());
        rng.step();
        upd++;
      end
      @(negedge clk);
      checks++;
      if (s !== exp_s) begin failures++; $display("FAIL state t=%0d got %b exp %b", t, s, exp_s); end
      if (t % 500 == 7) begin  // host state write, no update in that cycle
        phase_en = '0;
        wr(CFG_STATE, 0, int'(!exp_s));
        exp_s = !exp_s;
        checks++; if (s !== exp_s) begin failures++; $display("FAIL state write"); end
      end
    end
    // statistics at a fixed field of +1.0 (64 units): P(s=1) = 0.7311
    for (int k = 0; k < K2; k++) begin w2[k] = 0; wr(CFG_J2, k, 0); end
    for (int p = 0; p < K3; p++) begin w3[p] = 0; wr(CFG_J3, p, 0); end
    wr(CFG_BIAS, 0, 64);
    ones = 0;
    phase_en = '0; phase_en[COLOR] = 1'b1;
    for (int t = 0; t < 8000; t++) begin @(negedge clk); ones += s; end
    checks++;
    if (ones < 5700 || ones > 6000) begin failures++; $display("FAIL P(s=1) at field 1.0: %0d/8000", ones); end
    $display("p-bit: %0d checked updates, P(s=1|I'=1.0) = %0d/8000", upd, ones);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
