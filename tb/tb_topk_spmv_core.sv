// Self-checking testbench of one Top-K SpMV core at its default sizes
// (B = 15, V = 20, k = 8, r = 4, M = 1024).
//
// A behavioural HBM channel holds random BS-CSR partitions. Four runs are
// made: short rows (many rows finish in one packet, so rows are dropped by the
// r limit), long rows (rows span packets, new_row = 0) and a run over more
// than one 256-beat burst, and a partition whose best rows are in its final
// packet. Each run's results, read back from the model's
// memory, are compared with the reference model in tb_bscsr_pkg, and the run
// time is checked against the one-packet-per-cycle rate.
module tb_topk_spmv_core;
  import topk_spmv_pkg::*;
  import tb_bscsr_pkg::*;

  typedef bscsr_matrix #(.B(15), .V(20), .IW(10), .PW(4), .R(4), .K(8), .M(1024)) mat_t;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  axi_addr_t mat_addr = '0, out_addr = '0;
  logic [31:0] num_pkts = '0;
  logic x_we = 0;
  logic [9:0] x_waddr = '0;
  logic [19:0] x_wdata = '0;

  logic ar_valid, ar_ready, r_valid, r_ready, aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready;
  axi_a_t ar, aw; axi_r_t r; axi_w_t w; logic [1:0] b_resp;

  topk_spmv_core dut (
    .clk, .rst_n, .start, .mat_addr, .num_pkts, .out_addr, .busy, .done,
    .x_we, .x_waddr, .x_wdata,
    .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .aw_valid, .aw_ready, .aw, .w_valid, .w_ready, .w, .b_valid, .b_ready, .b_resp
  );

  hbm_model #(.LATENCY(8), .STALL_PCT(0)) u_hbm (
    .clk, .rst_n, .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .aw_valid, .aw_ready, .aw, .w_valid, .w_ready, .w, .b_valid, .b_ready, .b_resp
  );

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(mat_t m, string tag);
    longint t0, t1;
    bit vld[]; longint rv[], ri[];
    // load x
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); x_we = 1; x_waddr = 10'(i); x_wdata = 20'(m.x[i]);
    end
    @(negedge clk); x_we = 0;
    // load matrix at 16 KB aligned address
    foreach (m.pkts[p]) u_hbm.mem[longint'(32'h40000 >> 6) + p] = m.pkts[p];
    mat_addr = 33'h40000; out_addr = 33'h1000; num_pkts = m.pkts.size();
    @(negedge clk); start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    wait (done); t1 = cyc;
    @(negedge clk);
    vld = new[8]; rv = new[8]; ri = new[8];
    for (int i = 0; i < 8; i++) begin
      logic [63:0] wd = u_hbm.mem[33'h1000 >> 6][64*i +: 64];
      vld[i] = (wd[31:0] != 32'hFFFF_FFFF);
      ri[i]  = longint'(wd[31:0]);
      rv[i]  = longint'(wd[63:32]);
    end
    failures += m.check(vld, rv, ri, checks, tag);
    // rate: one packet per cycle plus a fixed overhead
    checks++;
    if (t1 - t0 < longint'(m.pkts.size()) || t1 - t0 > longint'(m.pkts.size()) + 80) begin
      failures++;
      $display("%s: run took %0d cycles for %0d packets", tag, t1 - t0, m.pkts.size());
    end
    $display("%s: %0d rows, %0d packets, %0d cycles, %0d continued, %0d dropped",
             tag, m.nrows, m.pkts.size(), t1 - t0, m.n_cont, m.n_dropped);
  endtask

  initial begin
    mat_t m1, m2, m3, m4;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    // short rows: up to 15 rows per packet, more than r finish
    m1 = new(400, 1, 3, 200000);
    run(m1, "short rows");
    checks++; if (m1.n_dropped == 0) begin failures++; $display("no row was dropped"); end
    // long rows spanning packets
    m2 = new(150, 16, 40, 100000);
    run(m2, "long rows");
    checks++; if (m2.n_cont == 0) begin failures++; $display("no continued row"); end
    // more than one burst
    m3 = new(1000, 2, 8, 150000);
    run(m3, "multi-burst");
    checks++; if (m3.pkts.size() <= 256) begin failures++; $display("single burst only"); end
    // the best rows sit in the last packet
    m4 = new(80, 16, 20, 100000);
    m4.boost_last(2, 200000);
    run(m4, "best rows last");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
