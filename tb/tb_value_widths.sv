// Testbench of the core at the two wider fixed-point widths of the design
// family: 25-bit values (Q1.24) with B = 13 non-zeros per packet and 32-bit
// values (Q1.31) with B = 11, the largest B for which B*(4 + 10 + V) + 1 fits
// the 512-bit packet. The default 20-bit core (B = 15) is covered by
// tb_topk_spmv_core and the top-level testbenches.
//
// Each width runs in its own tb_core_width_bench, concurrently; the value
// bound scales with the width so the values are the same fractions of one
// as in the 20-bit tests. A watchdog ends the run if a core hangs.
module tb_value_widths;
  import tb_bscsr_pkg::*;   // reference model used by the benches
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic fin25, fin32;
  int c25, f25, c32, f32;

  tb_core_width_bench #(.B(13), .V(25), .MAXCODE(longint'(200000) << 5)) u_q24 (
    .clk, .rst_n, .finished(fin25), .checks_o(c25), .failures_o(f25));
  tb_core_width_bench #(.B(11), .V(32), .MAXCODE(longint'(200000) << 12)) u_q31 (
    .clk, .rst_n, .finished(fin32), .checks_o(c32), .failures_o(f32));

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c25 + c32 + 1, f25 + f32 + 1);
    $finish;
  end

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1;
    wait (fin25 && fin32);
    checks = c25 + c32;
    failures = f25 + f32;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
