// End-to-end testbench of the 32-core accelerator at its default sizes.
//
// Every core gets its own behavioural HBM channel (some of them stalling at
// random) and its own random partition; all cores share one x. Two complete
// operations are run, with a new x and new partitions in the second, in which
// one core also gets an empty partition. Each core's 8 results, read back from
// its channel, are checked against the reference model; the run time is
// checked against one packet per cycle per core plus a bounded overhead.
// The testbench also counts how often each mechanism of the design occurred
// (rows continued across packets, rows dropped by the r limit, Top-k
// replacements in a full buffer, multi-burst partitions, HBM stalls, an empty
// partition) and counts a failure for any that never did.
module tb_topk_spmv_top;
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

  for (genvar c = 0; c < C; c++) begin : g_hbm
    hbm_model #(.LATENCY(8 + c % 5), .STALL_PCT((c % 4 == 3) ? 20 : 0)) u_hbm (
      .clk, .rst_n,
      .ar_valid(ar_valid[c]), .ar_ready(ar_ready[c]), .ar(ar[c]),
      .r_valid(r_valid[c]), .r_ready(r_ready[c]), .r(r[c]),
      .aw_valid(aw_valid[c]), .aw_ready(aw_ready[c]), .aw(aw[c]),
      .w_valid(w_valid[c]), .w_ready(w_ready[c]), .w(w[c]),
      .b_valid(b_valid[c]), .b_ready(b_ready[c]), .b_resp(b_resp[c])
    );
  end

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // Mechanism counters.
  longint n_cont = 0, n_drop = 0, n_multi = 0, n_empty = 0, n_stall_cores = 0, n_full_replace = 0;
  always @(posedge clk)
    for (int l = 0; l < 4; l++)
      if (dut.g_core[0].u_core.replaced[l] && dut.g_core[0].u_core.cand_valid[l] == '1) n_full_replace++;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_mem(int c, longint word, logic [511:0] d);
    case (c)
      0: g_hbm[0].u_hbm.mem[word] = d;   1: g_hbm[1].u_hbm.mem[word] = d;
      2: g_hbm[2].u_hbm.mem[word] = d;   3: g_hbm[3].u_hbm.mem[word] = d;
      4: g_hbm[4].u_hbm.mem[word] = d;   5: g_hbm[5].u_hbm.mem[word] = d;
      6: g_hbm[6].u_hbm.mem[word] = d;   7: g_hbm[7].u_hbm.mem[word] = d;
      8: g_hbm[8].u_hbm.mem[word] = d;   9: g_hbm[9].u_hbm.mem[word] = d;
      10: g_hbm[10].u_hbm.mem[word] = d; 11: g_hbm[11].u_hbm.mem[word] = d;
      12: g_hbm[12].u_hbm.mem[word] = d; 13: g_hbm[13].u_hbm.mem[word] = d;
      14: g_hbm[14].u_hbm.mem[word] = d; 15: g_hbm[15].u_hbm.mem[word] = d;
      16: g_hbm[16].u_hbm.mem[word] = d; 17: g_hbm[17].u_hbm.mem[word] = d;
      18: g_hbm[18].u_hbm.mem[word] = d; 19: g_hbm[19].u_hbm.mem[word] = d;
      20: g_hbm[20].u_hbm.mem[word] = d; 21: g_hbm[21].u_hbm.mem[word] = d;
      22: g_hbm[22].u_hbm.mem[word] = d; 23: g_hbm[23].u_hbm.mem[word] = d;
      24: g_hbm[24].u_hbm.mem[word] = d; 25: g_hbm[25].u_hbm.mem[word] = d;
      26: g_hbm[26].u_hbm.mem[word] = d; 27: g_hbm[27].u_hbm.mem[word] = d;
      28: g_hbm[28].u_hbm.mem[word] = d; 29: g_hbm[29].u_hbm.mem[word] = d;
      30: g_hbm[30].u_hbm.mem[word] = d; default: g_hbm[31].u_hbm.mem[word] = d;
    endcase
  endtask

  // The result word is also visible on the W channel: capture it there.
  logic [C-1:0][511:0] res_word;
  always @(posedge clk)
    for (int c = 0; c < C; c++)
      if (w_valid[c] && w_ready[c]) res_word[c] <= w[c].data;

  task automatic run(int round);
    mat_t m[C];
    longint t0, t1;
    int max_pkts = 0;
    for (int c = 0; c < C; c++) begin
      int kind = (c + round) % 4;
      int nr = (round == 1 && c == 5) ? 0 : 60 + int'($urandom % 60);
      case (kind)
        0: m[c] = new(nr * 3, 1, 3, 200000);       // short rows: r limit
        1: m[c] = new(nr, 15, 40, 100000);         // rows across packets
        2: m[c] = new(nr * 2, 1, 20, 150000);      // mixed
        default: m[c] = new(nr * 6, 2, 12, 150000); // > 256 packets: several bursts
      endcase
      if (c > 0) begin m[c].x = m[0].x; m[c].compute_sums(); end
      foreach (m[c].pkts[p]) write_mem(c, (longint'(32'h40000) >> 6) + longint'(p), m[c].pkts[p]);
      mat_addr[c] = 33'h40000; out_addr[c] = 33'h1000; num_pkts[c] = 32'(m[c].pkts.size());
      if (m[c].pkts.size() > max_pkts) max_pkts = m[c].pkts.size();
      n_cont += m[c].n_cont; n_drop += m[c].n_dropped;
      if (m[c].pkts.size() > 256) n_multi++;
      if (m[c].pkts.size() == 0) n_empty++;
    end
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); x_we = 1; x_waddr = 10'(i); x_wdata = 20'(m[0].x[i]);
    end
    @(negedge clk); x_we = 0;
    @(negedge clk); start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    wait (done); t1 = cyc;
    @(negedge clk);
    checks++;
    if (core_done != '1) begin failures++; $display("core_done %h", core_done); end
    for (int c = 0; c < C; c++) begin
      bit vld[]; longint rv[], ri[];
      vld = new[8]; rv = new[8]; ri = new[8];
      for (int i = 0; i < 8; i++) begin
        logic [63:0] wd = res_word[c][64*i +: 64];
        vld[i] = (wd[31:0] != 32'hFFFF_FFFF);
        ri[i] = longint'(wd[31:0]);
        rv[i] = longint'(wd[63:32]);
      end
      failures += m[c].check(vld, rv, ri, checks, $sformatf("round %0d core %0d", round, c));
    end
    // Stalling channels deliver less than a beat per cycle; bound the time
    // by the packet count of the largest partition, allowing for the stalls.
    checks++;
    if (t1 - t0 < longint'(max_pkts) || t1 - t0 > longint'(max_pkts) * 13 / 10 + 120) begin
      failures++; $display("round %0d took %0d cycles for %0d packets", round, t1 - t0, max_pkts);
    end
    $display("round %0d: largest partition %0d packets, %0d cycles", round, max_pkts, t1 - t0);
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    run(0);
    run(1);
    for (int c = 3; c < C; c += 4) n_stall_cores++;
    $display("mechanisms: continued=%0d dropped=%0d full-buffer replacements(core 0)=%0d multi-burst=%0d empty=%0d stalling channels=%0d",
             n_cont, n_drop, n_full_replace, n_multi, n_empty, n_stall_cores);
    checks += 6;
    if (n_cont == 0)         begin failures++; $display("no row continued across packets"); end
    if (n_drop == 0)         begin failures++; $display("no row dropped by the r limit"); end
    if (n_full_replace == 0) begin failures++; $display("no replacement in a full Top-k buffer"); end
    if (n_multi == 0)        begin failures++; $display("no multi-burst partition"); end
    if (n_empty == 0)        begin failures++; $display("no empty partition"); end
    if (g_hbm[3].u_hbm.r_stalls == 0) begin failures++; $display("no HBM stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
