// Workload testbench: scaled-down versions of the evaluated matrix families
// on the 32-core accelerator at its default sizes.
//
// The evaluated matrices have millions of rows; here each core gets a
// partition of a few hundred rows with the same row-length statistics:
//   uniform     non-zeros per row uniform with mean 20, M = 1024
//   gamma       non-zeros per row from Gamma(k = 3, theta = 4/3), scaled to
//               mean 40, M = 512
//   glove-like  12 to 23 non-zeros per row (2.4e7-4.6e7 non-zeros over 2e6
//               rows), M = 1024
// For each, one complete operation is run. Every core's results are checked
// against the reference model; the approximation precision of the 32 x 8
// results against the exact Top-K of the whole matrix is computed for
// K = 8, 32 and 100 and must equal what the model predicts; the throughput
// (non-zeros per cycle over the whole run) is reported and the run must take
// no more than the largest partition's packet count plus a fixed overhead.
module tb_workloads;
  import topk_spmv_pkg::*;
  import tb_bscsr_pkg::*;
  typedef bscsr_matrix #(.B(15), .V(20), .IW(10), .PW(4), .R(4), .K(8), .M(1024)) mat_t;

  localparam int C = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  logic [C-1:0] core_done;
  axi_addr_t [C-1:0] mat_addr = '0, out_addr = '0;
  logic [C-1:0][31:0] num_pkts = '0;
  logic x_we = 0;
  logic [9:0] x_waddr = '0;
  logic [19:0] x_wdata = '0;
  logic [C-1:0] ar_valid, ar_ready, r_valid, r_ready, aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready;
  axi_a_t [C-1:0] ar, aw;
  axi_r_t [C-1:0] r;
  axi_w_t [C-1:0] w;
  logic [C-1:0][1:0] b_resp;

  topk_spmv_top dut (.*);

  // Packets are served straight from the generated partitions: a small
  // in-order AXI4 read responder per core with fixed latency.
  logic [511:0] pk_mem [C][$];
  for (genvar c = 0; c < C; c++) begin : g_mem
    int q_beats[$];
    longint q_word[$];
    int beat;
    initial begin ar_ready[c] = 0; r_valid[c] = 0; r[c] = '0; aw_ready[c] = 0; w_ready[c] = 0; b_valid[c] = 0; b_resp[c] = 0; beat = 0; end
    always @(posedge clk) begin
      ar_ready[c] <= 1;
      aw_ready[c] <= 1;
      w_ready[c]  <= 1;
      if (ar_valid[c] && ar_ready[c]) begin
        q_beats.push_back(int'(ar[c].len) + 1);
        q_word.push_back((longint'(ar[c].addr) - longint'(33'h40000)) >> 6);
      end
      if (r_valid[c] && r_ready[c]) begin
        beat++;
        if (beat == q_beats[0]) begin void'(q_beats.pop_front()); void'(q_word.pop_front()); beat = 0; end
      end
      if (q_beats.size() > 0) begin
        r_valid[c]  <= 1;
        r[c].data   <= pk_mem[c][q_word[0] + beat];
        r[c].last   <= (beat == q_beats[0] - 1);
        r[c].resp   <= 0;
      end else r_valid[c] <= 0;
      if (w_valid[c] && w_ready[c] && w[c].last) b_valid[c] <= 1;
      else if (b_ready[c]) b_valid[c] <= 0;
    end
  end

  logic [C-1:0][511:0] res_word;
  always @(posedge clk)
    for (int c = 0; c < C; c++)
      if (w_valid[c] && w_ready[c]) res_word[c] <= w[c].data;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int gamma_len(real mean);
    real g = 0.0;
    for (int i = 0; i < 3; i++) g += -$ln((real'($urandom % 1000000) + 1.0) / 1000001.0) * (4.0 / 3.0);
    g = g * mean / 4.0;  // Gamma(3, 4/3) has mean 4
    return (g < 1.0) ? 1 : ((g > 100.0) ? 100 : int'(g));
  endfunction

  task automatic run(string name, int kind, int rows_per_core, int ncols);
    mat_t m[C];
    longint t0, t1, total_nnz = 0;
    int max_pkts = 0;
    longint gsum[$];         // global row sums, (core, row) flattened
    int     gcore[$], grow[$];
    bit     returned[longint];
    bit     model_kept[longint];
    for (int c = 0; c < C; c++) begin
      int lens[$];
      for (int i = 0; i < rows_per_core; i++)
        case (kind)
          0: lens.push_back(1 + int'($urandom % 39));
          1: lens.push_back(gamma_len(40.0));
          default: lens.push_back(12 + int'($urandom % 12));
        endcase
      m[c] = new(1, 1, 1, 1);
      if (c > 0) m[c].x = m[0].x;
      else foreach (m[0].x[i]) m[0].x[i] = (i < ncols) ? longint'($urandom % 80000) : 0;
      m[c].set_rows(lens, 80000, ncols);
      pk_mem[c] = m[c].pkts;
      mat_addr[c] = 33'h40000; out_addr[c] = 33'h1000; num_pkts[c] = 32'(m[c].pkts.size());
      if (m[c].pkts.size() > max_pkts) max_pkts = m[c].pkts.size();
      total_nnz += m[c].row_of.size();
      for (int i = 0; i < m[c].nrows; i++) begin
        gsum.push_back(m[c].rowsum[i]); gcore.push_back(c); grow.push_back(i);
      end
    end
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); x_we = 1; x_waddr = 10'(i); x_wdata = 20'(m[0].x[i]);
    end
    @(negedge clk); x_we = 0;
    @(negedge clk); start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    wait (done); t1 = cyc;
    @(negedge clk);
    for (int c = 0; c < C; c++) begin
      bit vld[]; longint rv[], ri[], ev[$];
      vld = new[8]; rv = new[8]; ri = new[8];
      for (int i = 0; i < 8; i++) begin
        logic [63:0] wd;
        wd = res_word[c][64*i +: 64];
        vld[i] = (wd[31:0] != 32'hFFFF_FFFF);
        ri[i] = longint'(wd[31:0]);
        rv[i] = longint'(wd[63:32]);
        if (vld[i]) returned[longint'(c) * 1000000 + ri[i]] = 1;
      end
      failures += m[c].check(vld, rv, ri, checks, $sformatf("%s core %0d", name, c));
      // model: kept rows at or above the core's 8th best kept value
      m[c].expected(ev);
      for (int i = 0; i < m[c].nrows; i++)
        if (!m[c].dropped[i] && ev.size() > 0 && m[c].rowsum[i] >= ev[ev.size()-1])
          model_kept[longint'(c) * 1000000 + i] = 1;
    end
    // precision of the approximate Top-K against the exact one
    begin
      int order[$];
      int ks[3] = '{8, 32, 100};
      foreach (gsum[i]) order.push_back(i);
      order.sort() with (-gsum[item]);
      foreach (ks[j]) begin
        int hit = 0, mhit = 0;
        for (int i = 0; i < ks[j]; i++) begin
          longint key = longint'(gcore[order[i]]) * 1000000 + grow[order[i]];
          if (returned.exists(key)) hit++;
          if (model_kept.exists(key)) mhit++;
        end
        checks++;
        // ties at a core's 8th value can let the model count one row more
        if (hit > mhit || mhit - hit > 1) begin
          failures++; $display("%s K=%0d: %0d hits, model %0d", name, ks[j], hit, mhit);
        end
        $display("%s: precision at K=%0d is %0.3f", name, ks[j], real'(hit) / ks[j]);
      end
    end
    checks++;
    if (t1 - t0 > longint'(max_pkts) + 120) begin
      failures++; $display("%s: %0d cycles for %0d packets", name, t1 - t0, max_pkts);
    end
    $display("%s: %0d rows, %0d non-zeros, %0d cycles, %0.1f non-zeros per cycle (32 x 15 = 480 peak)",
             name, C * rows_per_core, total_nnz, t1 - t0, real'(total_nnz) / real'(t1 - t0));
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    run("uniform", 0, 400, 1024);
    run("gamma", 1, 250, 512);
    run("glove-like", 2, 500, 1024);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
