// Testbench of hbm_reader with the behavioural HBM model stalling 30% of the
// time and a consumer that pops at random. Streams of 1, 200, 256, 600 and
// 1000 packets must arrive complete and in order with the last flag on the
// final packet only; every burst must be INCR, 64-byte beats, at most 256
// beats long, contiguous from the base address; the FIFO must never
// overflow (assertion inside the reader).
module tb_hbm_reader;
  import topk_spmv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy;
  axi_addr_t base_addr = '0;
  logic [31:0] num_pkts = '0;
  logic ar_valid, ar_ready, r_valid, r_ready;
  axi_a_t ar; axi_r_t r;
  logic aw_valid = 0, aw_ready, w_valid = 0, w_ready, b_valid, b_ready = 1;
  axi_a_t aw = '0; axi_w_t w = '0; logic [1:0] b_resp;
  logic pkt_valid, pkt_last, pkt_pop;
  logic [511:0] pkt_data;
  int checks = 0, failures = 0;

  hbm_reader dut (.*);
  hbm_model #(.LATENCY(12), .STALL_PCT(30)) u_hbm (.*);

  logic pop_en;
  assign pkt_pop = pkt_valid && pop_en;
  always @(negedge clk) pop_en = ($urandom % 4) != 0;

  axi_addr_t next_addr;
  int rx, bursts;
  longint n_exp;

  always @(posedge clk) if (rst_n) begin
    if (ar_valid && ar_ready) begin
      bursts++;
      checks++;
      if (ar.addr != next_addr || ar.size != 3'd6 || ar.burst != 2'b01 || int'(ar.len) > 255) begin
        failures++; $display("bad AR addr=%h len=%0d", ar.addr, ar.len);
      end
      next_addr = next_addr + axi_addr_t'((int'(ar.len) + 1) * 64);
    end
    if (pkt_pop) begin
      checks++;
      if (pkt_data != {16{32'(rx) ^ 32'hA5A5_0000}} || pkt_last != (longint'(rx) == n_exp - 1)) begin
        failures++; $display("packet %0d wrong (last=%b)", rx, pkt_last);
      end
      rx++;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sizes[5] = '{1, 200, 256, 600, 1000};
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (sizes[s]) begin
      base_addr = axi_addr_t'(33'h1_0000_0000 + s * 33'h10_0000);
      for (int i = 0; i < sizes[s]; i++)
        u_hbm.mem[(longint'(base_addr) >> 6) + i] = {16{32'(i) ^ 32'hA5A5_0000}};
      n_exp = sizes[s]; rx = 0; bursts = 0; next_addr = base_addr;
      num_pkts = 32'(sizes[s]);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (rx < sizes[s]) @(negedge clk);
      repeat (5) @(negedge clk);
      checks += 3;
      if (rx != sizes[s]) begin failures++; $display("%0d of %0d packets", rx, sizes[s]); end
      if (bursts != (sizes[s] + 255) / 256) begin failures++; $display("%0d bursts", bursts); end
      if (busy || pkt_valid) begin failures++; $display("not idle after stream"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
