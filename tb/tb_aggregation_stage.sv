// Testbench of aggregation_stage: random products with random row splits
// (cumulative ptr with zero padding, including full 15-row packets and
// saturating sums). Checks every row sum, the row count and the flags one
// cycle after the input.
module tb_aggregation_stage;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_new_row = 0, in_last = 0, out_valid, out_new_row, out_last;
  logic [14:0][19:0] in_prod = '0, out_sum;
  logic [14:0][3:0]  in_ptr = '0;
  logic [3:0] out_nrows;
  int checks = 0, failures = 0;

  aggregation_stage dut (.*);

  typedef struct { longint sum[15]; int nrows; logic nr, last; } exp_t;
  exp_t q[$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t e;
    checks++;
    if (q.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = q.pop_front();
      checks += 2;
      if (int'(out_nrows) != e.nrows) begin failures++; $display("nrows %0d vs %0d", out_nrows, e.nrows); end
      if (out_new_row !== e.nr || out_last !== e.last) begin failures++; $display("flags"); end
      for (int b = 0; b < 15; b++) begin
        checks++;
        if (longint'(out_sum[b]) != e.sum[b]) begin failures++; $display("row %0d: %h vs %h", b, out_sum[b], e.sum[b]); end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      exp_t e;
      int used, rows, cum;
      logic [14:0][19:0] pr;
      logic [14:0][3:0]  pt;
      longint big;
      big = (n % 5 == 0) ? 20'hFFFFF : 20'h3FFFF;
      for (int j = 0; j < 15; j++) pr[j] = 20'(longint'($urandom) % big);
      used = (n % 3 == 0) ? 15 : 1 + int'($urandom % 15);  // non-zeros in the packet
      pt = '0; cum = 0; rows = 0;
      while (cum < used) begin
        int len;
        len = (n % 4 == 0) ? 1 : 1 + int'($urandom % 5);
        if (cum + len > used) len = used - cum;
        pt[rows] = 4'(cum + len);
        cum += len; rows++;
      end
      e.nrows = rows;
      for (int b = 0; b < 15; b++) begin
        longint s;
        int lo;
        s = 0;
        lo = (b == 0) ? 0 : int'(pt[b-1]);
        if (b < rows) for (int j = lo; j < int'(pt[b]); j++) s += longint'(pr[j]);
        e.sum[b] = (s > 20'hFFFFF) ? 20'hFFFFF : s;
      end
      @(negedge clk);
      in_valid = ($urandom % 5) != 0;
      in_prod = pr; in_ptr = pt; in_new_row = 1'($urandom); in_last = 1'($urandom);
      e.nr = in_new_row; e.last = in_last;
      if (in_valid) q.push_back(e);
    end
    @(negedge clk); in_valid = 0;
    repeat (4) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d outputs missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
