// Testbench of x_vector_store: loads x, then makes 15 random lookups per cycle
// and checks every returned word one cycle later against a shadow copy.
module tb_x_vector_store;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [9:0] waddr = '0;
  logic [19:0] wdata = '0;
  logic [14:0][9:0]  raddr = '0;
  logic [14:0][19:0] rdata;
  logic [19:0] shadow [1024];
  int checks = 0, failures = 0;

  x_vector_store #(.LOOKUPS(15), .DEPTH(1024), .WIDTH(20)) dut (.*);

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
    @(negedge clk); we = 0;
    for (int n = 0; n < 300; n++) begin
      logic [14:0][9:0] a;
      for (int j = 0; j < 15; j++) a[j] = 10'($urandom);
      @(negedge clk); raddr = a;
      @(posedge clk); #1;
      for (int j = 0; j < 15; j++) begin
        checks++;
        if (rdata[j] !== shadow[a[j]]) begin
          failures++; $display("lookup %0d @%0d: %h vs %h", j, a[j], rdata[j], shadow[a[j]]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
