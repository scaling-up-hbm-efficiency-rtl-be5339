// Testbench of topk_merge: random candidate sets (some entries empty) from
// 4 buffers of 8; the 8 results must be the 8 largest valid candidates, each
// with its own row, and done must rise r*k + 1 = 33 cycles after start.
module tb_topk_merge;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, done;
  logic [3:0][7:0] cand_valid = '0;
  logic [3:0][7:0][19:0] cand_val = '0;
  logic [3:0][7:0][31:0] cand_idx = '0;
  logic [7:0] res_valid;
  logic [7:0][19:0] res_val;
  logic [7:0][31:0] res_idx;
  int checks = 0, failures = 0;

  topk_merge dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      longint all[$], got[$];
      int lat;
      all.delete(); got.delete(); lat = 0;
      for (int l = 0; l < 4; l++) for (int i = 0; i < 8; i++) begin
        cand_valid[l][i] = (t % 4 == 0) ? (($urandom % 6) == 0) : (($urandom % 8) != 0);
        cand_val[l][i] = 20'($urandom % 1000);
        cand_idx[l][i] = 32'(l * 8 + i);
        if (cand_valid[l][i]) all.push_back(longint'(cand_val[l][i]));
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0; lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 33) begin failures++; $display("test %0d: done after %0d cycles", t, lat); end
      all.rsort();
      for (int i = 0; i < 8; i++) if (res_valid[i]) begin
        int l, e;
        l = int'(res_idx[i]) / 8; e = int'(res_idx[i]) % 8;
        checks++;
        if (!cand_valid[l][e] || cand_val[l][e] != res_val[i]) begin failures++; $display("bad result"); end
        got.push_back(longint'(res_val[i]));
      end
      got.rsort();
      checks++;
      if (got.size() != ((all.size() < 8) ? all.size() : 8)) begin failures++; $display("test %0d: %0d results", t, got.size()); end
      else foreach (got[i]) begin
        checks++;
        if (got[i] != all[i]) begin failures++; $display("test %0d rank %0d: %0d vs %0d", t, i, got[i], all[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
