// Testbench of summary_stage. Random partitions (tb_bscsr_pkg) are cut into
// packets; the testbench forms each packet's per-row sums itself and feeds
// them in. Every row the reference model keeps must come out exactly once,
// with its full dot product (parts from several packets added) and its row
// number; no dropped row may come out; the dropped count and the end-of-
// partition flag must match. Three partitions exercise new_row = 0, more than
// r rows finishing in a packet, and clear between runs.
module tb_summary_stage;
  import tb_bscsr_pkg::*;
  typedef bscsr_matrix #(.B(15), .V(20), .IW(10), .PW(4), .R(4), .K(8), .M(1024)) mat_t;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear = 0, in_valid = 0, in_new_row = 0, in_last = 0;
  logic [14:0][19:0] in_sum = '0;
  logic [3:0] in_nrows = '0;
  logic [3:0] out_valid;
  logic [3:0][19:0] out_val;
  logic [3:0][31:0] out_idx;
  logic out_last;
  logic [3:0] out_dropped;
  int checks = 0, failures = 0;

  summary_stage dut (.*);

  longint got_val[longint];
  int     got_cnt[longint];
  int     drops, lasts;

  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < 4; l++) if (out_valid[l]) begin
      longint i;
      i = longint'(out_idx[l]);
      got_cnt[i] = got_cnt.exists(i) ? got_cnt[i] + 1 : 1;
      got_val[i] = longint'(out_val[l]);
    end
    drops += int'(out_dropped);
    lasts += int'(out_last);
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(mat_t m, string tag);
    got_val.delete(); got_cnt.delete(); drops = 0; lasts = 0;
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    foreach (m.pkts[p]) begin
      logic [511:0] pk = m.pkts[p];
      logic [14:0][19:0] s = '0;
      int rows = 0;
      for (int b = 0; b < 15; b++) if (pk[1 + 4*b +: 4] != 0) begin
        int lo = (b == 0) ? 0 : int'(pk[1 + 4*(b-1) +: 4]);
        longint acc = 0;
        for (int j = lo; j < int'(pk[1 + 4*b +: 4]); j++)
          acc += (longint'(pk[211 + 20*j +: 20]) * m.x[pk[61 + 10*j +: 10]]) >> 19;
        s[b] = 20'(acc);
        rows++;
      end
      @(negedge clk);
      in_valid = 1; in_sum = s; in_nrows = 4'(rows); in_new_row = pk[0];
      in_last = (p == m.pkts.size() - 1);
      if ($urandom % 3 == 0) begin @(negedge clk); in_valid = 0; end
    end
    @(negedge clk); in_valid = 0; in_last = 0;
    repeat (3) @(negedge clk);
    for (int i = 0; i < m.nrows; i++) begin
      checks++;
      if (m.dropped[i]) begin
        if (got_cnt.exists(i)) begin failures++; $display("%s: dropped row %0d emitted", tag, i); end
      end else if (!got_cnt.exists(i) || got_cnt[i] != 1 || got_val[i] != m.rowsum[i]) begin
        failures++;
        $display("%s: row %0d count %0d val %0d exp %0d", tag, i,
                 got_cnt.exists(i) ? got_cnt[i] : 0, got_val.exists(i) ? got_val[i] : -1, m.rowsum[i]);
      end
    end
    checks += 3;
    if (got_cnt.size() != m.nrows - m.n_dropped) begin failures++; $display("%s: %0d rows out", tag, got_cnt.size()); end
    if (drops != m.n_dropped) begin failures++; $display("%s: drops %0d vs %0d", tag, drops, m.n_dropped); end
    if (lasts != 1) begin failures++; $display("%s: last seen %0d times", tag, lasts); end
    $display("%s: %0d rows, %0d packets, %0d continued, %0d dropped", tag, m.nrows, m.pkts.size(), m.n_cont, m.n_dropped);
  endtask

  initial begin
    mat_t m1, m2, m3;
    repeat (3) @(posedge clk);
    rst_n = 1;
    m1 = new(300, 1, 4, 200000);   run(m1, "short");
    m2 = new(100, 10, 45, 100000); run(m2, "long");
    m3 = new(500, 1, 30, 100000);  run(m3, "mixed");
    checks++;
    if (m1.n_dropped == 0 || m2.n_cont == 0) begin failures++; $display("mechanism not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
