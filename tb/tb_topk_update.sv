// Testbench of topk_update: random finished rows on the 4 lanes, with random
// lane occupancy, distinct values and some repeated values. At the end, each
// lane's buffer must hold exactly the 8 largest values offered on that lane,
// each with its own row. Then clear must empty every buffer.
module tb_topk_update;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear = 0;
  logic [3:0] in_valid = '0;
  logic [3:0][19:0] in_val = '0;
  logic [3:0][31:0] in_idx = '0;
  logic [3:0][7:0] cand_valid;
  logic [3:0][7:0][19:0] cand_val;
  logic [3:0][7:0][31:0] cand_idx;
  logic [3:0] replaced;
  int checks = 0, failures = 0;

  topk_update dut (.*);

  longint offered[4][$];
  longint val_of[longint];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int row;
    row = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      for (int l = 0; l < 4; l++) begin
        in_valid[l] = ($urandom % 3) != 0;
        in_val[l] = (n % 50 == 0) ? 20'd777 : 20'($urandom);
        in_idx[l] = 32'(row);
        if (in_valid[l]) begin offered[l].push_back(longint'(in_val[l])); val_of[row] = longint'(in_val[l]); end
        row++;
      end
    end
    @(negedge clk); in_valid = '0;
    @(negedge clk);
    for (int l = 0; l < 4; l++) begin
      longint got[$];
      got.delete();
      offered[l].rsort();
      for (int i = 0; i < 8; i++) begin
        checks += 2;
        if (!cand_valid[l][i]) begin failures++; $display("lane %0d entry %0d empty", l, i); end
        if (!val_of.exists(cand_idx[l][i]) || val_of[cand_idx[l][i]] != longint'(cand_val[l][i])) begin
          failures++; $display("lane %0d entry %0d row/value mismatch", l, i);
        end
        got.push_back(longint'(cand_val[l][i]));
      end
      got.rsort();
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (got[i] != offered[l][i]) begin failures++; $display("lane %0d rank %0d: %0d vs %0d", l, i, got[i], offered[l][i]); end
      end
    end
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    checks++;
    if (cand_valid != '0) begin failures++; $display("clear did not empty the buffers"); end
    // fewer than k rows: entries fill in order of arrival
    @(negedge clk); in_valid = 4'b0001; in_val[0] = 20'd5; in_idx[0] = 32'd9;
    @(negedge clk); in_valid = '0;
    @(negedge clk);
    checks++;
    if ($countones(cand_valid[0]) != 1 || cand_val[0][0] != 20'd5 || cand_idx[0][0] != 32'd9) begin
      failures++; $display("single insert wrong");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
