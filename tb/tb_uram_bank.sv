// Testbench of uram_bank: random writes, then reads on both ports, checking
// the data and the one-cycle read latency against a shadow array.
module tb_uram_bank;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [9:0] waddr = '0, raddr_a = '0, raddr_b = '0;
  logic [19:0] wdata = '0, rdata_a, rdata_b;
  logic [19:0] shadow [1024];
  int checks = 0, failures = 0;

  uram_bank #(.DEPTH(1024), .WIDTH(20)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); we = 1; waddr = 10'(i); wdata = 20'($urandom); shadow[i] = wdata;
    end
    for (int n = 0; n < 300; n++) begin
      @(negedge clk); we = 1; waddr = 10'($urandom); wdata = 20'($urandom); shadow[waddr] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 500; n++) begin
      logic [9:0] a, b;
      a = 10'($urandom); b = 10'($urandom);
      @(negedge clk); raddr_a = a; raddr_b = b;
      @(posedge clk); #1;
      checks += 2;
      if (rdata_a !== shadow[a]) begin failures++; $display("port a @%0d: %h vs %h", a, rdata_a, shadow[a]); end
      if (rdata_b !== shadow[b]) begin failures++; $display("port b @%0d: %h vs %h", b, rdata_b, shadow[b]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
