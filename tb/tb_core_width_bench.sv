// Bench for one Top-K SpMV core built at a given value width V and packet
// size B, used by tb_value_widths.
//
// It loads a random x and two random partitions (one of short rows, where
// more than r rows finish per packet and rows are dropped, and one of long
// rows that span packets) into a behavioural HBM channel, runs the core on
// each and compares the k results, read back from the channel, with the
// reference model, whose products are truncated to Q1.(V-1) like the RTL.
// Values and x are drawn below MAXCODE so that no row sum saturates. The run
// time must be one packet per cycle plus a bounded overhead.
//
// Ports: clk and rst_n in; finished rises when both runs are over, with the
// counts of checks made and failed on checks_o and failures_o.
module tb_core_width_bench
  import topk_spmv_pkg::*;
  import tb_bscsr_pkg::*;
#(
  parameter int unsigned B       = 15,
  parameter int unsigned V       = 20,
  parameter longint      MAXCODE = 200000
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks_o,
  output int   failures_o
);
  typedef bscsr_matrix #(.B(B), .V(V), .IW(10), .PW(4), .R(4), .K(8), .M(1024)) mat_t;

  logic start = 0, busy, done;
  axi_addr_t mat_addr = '0, out_addr = '0;
  logic [31:0] num_pkts = '0;
  logic x_we = 0;
  logic [9:0] x_waddr = '0;
  logic [V-1:0] x_wdata = '0;

  logic ar_valid, ar_ready, r_valid, r_ready, aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready;
  axi_a_t ar, aw; axi_r_t r; axi_w_t w; logic [1:0] b_resp;

  topk_spmv_core #(.B(B), .V(V)) dut (
    .clk, .rst_n, .start, .mat_addr, .num_pkts, .out_addr, .busy, .done,
    .x_we, .x_waddr, .x_wdata,
    .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .aw_valid, .aw_ready, .aw, .w_valid, .w_ready, .w, .b_valid, .b_ready, .b_resp
  );

  hbm_model #(.LATENCY(8), .STALL_PCT(10)) u_hbm (
    .clk, .rst_n, .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .aw_valid, .aw_ready, .aw, .w_valid, .w_ready, .w, .b_valid, .b_ready, .b_resp
  );

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  assign checks_o = checks;
  assign failures_o = failures;

  task automatic run(mat_t m, string tag);
    longint t0, t1;
    bit vld[]; longint rv[], ri[];
    logic [63:0] wd;
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); x_we = 1; x_waddr = 10'(i); x_wdata = V'(m.x[i]);
    end
    @(negedge clk); x_we = 0;
    foreach (m.pkts[p]) u_hbm.mem[longint'(32'h40000 >> 6) + p] = m.pkts[p];
    mat_addr = 33'h40000; out_addr = 33'h1000; num_pkts = m.pkts.size();
    @(negedge clk); start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    wait (done); t1 = cyc;
    @(negedge clk);
    vld = new[8]; rv = new[8]; ri = new[8];
    for (int i = 0; i < 8; i++) begin
      wd = u_hbm.mem[33'h1000 >> 6][64*i +: 64];
      vld[i] = (wd[31:0] != 32'hFFFF_FFFF);
      ri[i]  = longint'(wd[31:0]);
      rv[i]  = longint'(wd[63:32]);
    end
    failures += m.check(vld, rv, ri, checks, tag);
    checks++;
    // stalls of the memory model may add cycles; 10% of packets allowed
    if (t1 - t0 < longint'(m.pkts.size()) ||
        t1 - t0 > longint'(m.pkts.size()) * 11 / 10 + 100) begin
      failures++;
      $display("%s: run took %0d cycles for %0d packets", tag, t1 - t0, m.pkts.size());
    end
    $display("%s (V=%0d, B=%0d): %0d rows, %0d packets, %0d cycles, %0d continued, %0d dropped",
             tag, V, B, m.nrows, m.pkts.size(), t1 - t0, m.n_cont, m.n_dropped);
  endtask

  initial begin
    mat_t m1, m2;
    finished = 0;
    wait (rst_n);
    repeat (5) @(posedge clk);
    m1 = new(300, 1, 3, MAXCODE);
    run(m1, "short rows");
    checks++; if (m1.n_dropped == 0) begin failures++; $display("no row was dropped"); end
    m2 = new(120, 16, 40, MAXCODE / 2);
    run(m2, "long rows");
    checks++; if (m2.n_cont == 0) begin failures++; $display("no continued row"); end
    finished = 1;
  end

endmodule
