// Testbench of scatter_stage: random BS-CSR packets, some in back-to-back
// cycles and some with gaps; a one-cycle-latency array plays the x store. Each
// output must appear exactly two cycles after its input and carry
// trunc(val * x[idx]) (saturated above 2.0) for all 15 lanes plus the
// unchanged ptr, new_row and last fields.
module tb_scatter_stage;
  import topk_spmv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_last = 0, out_valid, out_new_row, out_last;
  logic [511:0] in_pkt = '0;
  logic [14:0][9:0]  x_raddr;
  logic [14:0][19:0] x_rdata, out_prod;
  logic [14:0][3:0]  out_ptr;
  logic [19:0] xmem [1024];
  int checks = 0, failures = 0;

  scatter_stage dut (.*);

  always_ff @(posedge clk)
    for (int j = 0; j < 15; j++) x_rdata[j] <= xmem[x_raddr[j]];

  typedef struct { logic [511:0] pkt; logic last; longint t; } item_t;
  item_t q[$];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Checker
  always @(posedge clk) if (rst_n && out_valid) begin
    item_t it;
    checks++;
    if (q.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      it = q.pop_front();
      if (cyc - it.t != 2) begin failures++; $display("latency %0d", cyc - it.t); end
      if (out_new_row !== it.pkt[0] || out_last !== it.last) begin failures++; $display("flags"); end
      for (int j = 0; j < 15; j++) begin
        longint a, b, p, e;
        a = longint'(it.pkt[211 + 20*j +: 20]);
        b = longint'(xmem[it.pkt[61 + 10*j +: 10]]);
        p = a * b;
        e = (p >= (longint'(1) << 39)) ? 20'hFFFFF : (p >> 19);
        checks += 2;
        if (longint'(out_prod[j]) != e) begin failures++; $display("lane %0d: %h vs %h", j, out_prod[j], e); end
        if (out_ptr[j] !== it.pkt[1 + 4*j +: 4]) begin failures++; $display("ptr %0d", j); end
      end
    end
  end

  initial begin
    for (int i = 0; i < 1024; i++) xmem[i] = 20'($urandom);
    xmem[5] = 20'hFFFFF;   // close to 2.0: products saturate
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      logic [511:0] p;
      for (int w = 0; w < 16; w++) p[32*w +: 32] = $urandom;
      if (n % 7 == 0) p[61 +: 10] = 10'd5;
      if (n % 7 == 0) p[211 +: 20] = 20'hFFFF0;
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      in_pkt = p; in_last = 1'($urandom);
      if (in_valid) begin item_t it; it.pkt = p; it.last = in_last; it.t = cyc; q.push_back(it); end
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d outputs missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
