// Testbench of result_writer with the behavioural HBM model: writes random
// result sets (some results empty) to several addresses and checks the stored
// 512-bit word (row in the low 32 bits of each 64-bit field, value in the
// high 32, 0xFFFFFFFF for an empty result), the single-beat burst and the
// done pulse.
module tb_result_writer;
  import topk_spmv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, done;
  axi_addr_t out_addr = '0;
  logic [7:0] res_valid = '0;
  logic [7:0][19:0] res_val = '0;
  logic [7:0][31:0] res_idx = '0;
  logic ar_valid = 0, ar_ready, r_valid, r_ready = 1;
  axi_a_t ar = '0, aw; axi_r_t r; axi_w_t w;
  logic aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready;
  logic [1:0] b_resp;
  int checks = 0, failures = 0, aw_count = 0, done_count = 0;

  result_writer dut (.*);
  hbm_model #(.LATENCY(4), .STALL_PCT(0)) u_hbm (.*);

  always @(posedge clk) begin
    if (aw_valid && aw_ready) begin
      aw_count++;
      checks++;
      if (aw.len != 0 || aw.addr != out_addr) begin failures++; $display("bad AW"); end
    end
    if (done) done_count++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      logic [511:0] wd;
      for (int i = 0; i < 8; i++) begin
        res_valid[i] = ($urandom % 5) != 0;
        res_val[i] = 20'($urandom);
        res_idx[i] = $urandom % 32'h7FFF_FFFF;
      end
      out_addr = axi_addr_t'((t + 1) * 64 * 3);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      wait (done);
      @(negedge clk);
      wd = u_hbm.mem[longint'(out_addr) >> 6];
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (res_valid[i] ? (wd[64*i +: 64] != {12'd0, res_val[i], res_idx[i]})
                         : (wd[64*i +: 64] != {32'd0, 32'hFFFF_FFFF})) begin
          failures++; $display("test %0d result %0d: %h", t, i, wd[64*i +: 64]);
        end
      end
    end
    checks += 2;
    if (aw_count != 10) begin failures++; $display("%0d bursts", aw_count); end
    if (done_count != 10) begin failures++; $display("%0d done pulses", done_count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
