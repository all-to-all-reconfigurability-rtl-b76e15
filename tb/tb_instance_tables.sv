// tb_instance_tables - fills three instances with random neighbour indices,
// pair indices and colours, selects each in turn and checks every output row;
// checks that an out-of-range instance select is ignored and that rows of one
// instance do not disturb another.
module tb_instance_tables;
  import pbit_pkg::*;
  localparam int N = 12, NI = 5, K2 = 9, K3 = 3, IW = 4, SW = 3;
  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg;
  logic [SW-1:0] inst_sel;
  logic [IW-1:0] cur_idx2 [N][K2];
  logic [IW-1:0] cur_idxa [N][K3];
  logic [IW-1:0] cur_idxb [N][K3];
  logic [COLOR_W-1:0] cur_color [N];
  int checks = 0, failures = 0;
  int e2 [NI][N][K2], ea [NI][N][K3], eb [NI][N][K3], ec [NI][N];

  instance_tables #(.N(N), .N_INST(NI), .K2(K2), .K3(K3), .IW(IW), .SW(SW)) dut (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .inst_sel(inst_sel),
    .cur_idx2(cur_idx2), .cur_idxa(cur_idxa), .cur_idxb(cur_idxb), .cur_color(cur_color));
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(cfg_region_e region, int inst, int pb, int slot, int data);
    cfg = '0; cfg.en = 1; cfg.region = region; cfg.inst = 8'(inst); cfg.pbit = 16'(pb);
    cfg.slot = 8'(slot); cfg.data = 32'(data);
    @(negedge clk);
    cfg = '0;
  endtask

  task automatic check_inst(int q);
    for (int i = 0; i < N; i++) begin
      for (int k = 0; k < K2; k++) begin checks++; if (int'(cur_idx2[i][k]) != e2[q][i][k]) begin failures++; $display("FAIL idx2 %0d %0d %0d", q, i, k); end end
      for (int p = 0; p < K3; p++) begin
        checks += 2;
        if (int'(cur_idxa[i][p]) != ea[q][i][p]) begin failures++; $display("FAIL idxa %0d %0d %0d", q, i, p); end
        if (int'(cur_idxb[i][p]) != eb[q][i][p]) begin failures++; $display("FAIL idxb %0d %0d %0d", q, i, p); end
      end
      checks++; if (int'(cur_color[i]) != ec[q][i]) begin failures++; $display("FAIL color %0d %0d", q, i); end
    end
  endtask

  initial begin
    cfg = '0;
    @(negedge clk); @(negedge clk); rst_n = 1;
    checks++; if (inst_sel != 0) begin failures++; $display("FAIL reset select"); end
    for (int q = 0; q < NI; q++)
      for (int i = 0; i < N; i++) begin
        for (int k = 0; k < K2; k++) begin e2[q][i][k] = $urandom_range(0, N - 1); wr(CFG_NEIGH, q, i, k, e2[q][i][k]); end
        for (int p = 0; p < K3; p++) begin
          ea[q][i][p] = $urandom_range(0, N - 1); wr(CFG_PAIR_J, q, i, p, ea[q][i][p]);
          eb[q][i][p] = $urandom_range(0, N - 1); wr(CFG_PAIR_K, q, i, p, eb[q][i][p]);
        end
        ec[q][i] = $urandom_range(0, 5); wr(CFG_COLOR, q, i, 0, ec[q][i]);
      end
    // out-of-range slot writes must be dropped
    wr(CFG_NEIGH, 1, 0, K2, 3);
    wr(CFG_PAIR_J, 1, 0, K3, 3);
    check_inst(0);
    for (int q = NI - 1; q >= 0; q--) begin
      wr(CFG_INST, 0, 0, 0, q);
      checks++; if (int'(inst_sel) != q) begin failures++; $display("FAIL select %0d", q); end
      check_inst(q);
    end
    wr(CFG_INST, 0, 0, 0, NI + 1);   // ignored
    checks++; if (inst_sel != 0) begin failures++; $display("FAIL out-of-range select taken"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
