// One on-chip copy of the dense vector x, as held in a URAM bank.
//
// A URAM bank offers two read ports, so each bank serves two of the B random
// lookups a core makes per cycle (x_vector_store replicates the bank). Both
// reads are synchronous: the word at raddr_a / raddr_b appears on
// rdata_a / rdata_b one clock later. The single write port loads x before a
// run. The two-read-port limit is the paper's; the one-cycle read latency and
// the write port used for loading are this design's choices. The contents are
// not reset: x must be written before it is read.
module uram_bank #(
  parameter int unsigned DEPTH  = 1024,
  parameter int unsigned WIDTH  = 20,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr_a,
  input  logic [AW-1:0]    raddr_b,
  output logic [WIDTH-1:0] rdata_a,
  output logic [WIDTH-1:0] rdata_b
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata_a <= mem[raddr_a];
    rdata_b <= mem[raddr_b];
  end

endmodule
