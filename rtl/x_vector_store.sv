// Replicated on-chip store of the dense vector x.
//
// A core looks up x at B arbitrary positions in every cycle. Each URAM bank has
// two read ports, so the store keeps ceil(B/2) identical copies of x: lookup j
// is served by port (j mod 2) of copy (j / 2). A write goes to every copy at
// once, so the copies never differ. Reads have one cycle of latency. The
// replication factor is the paper's; the mapping of lookups to ports is this
// design's choice.
module x_vector_store #(
  parameter int unsigned LOOKUPS = 15,    // B
  parameter int unsigned DEPTH   = 1024,  // M
  parameter int unsigned WIDTH   = 20,    // V
  localparam int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned COPIES = (LOOKUPS + 1) / 2
) (
  input  logic                           clk,
  input  logic                           we,
  input  logic [AW-1:0]                  waddr,
  input  logic [WIDTH-1:0]               wdata,
  input  logic [LOOKUPS-1:0][AW-1:0]     raddr,
  output logic [LOOKUPS-1:0][WIDTH-1:0]  rdata
);

  // Lookup lists padded to an even count so every bank has two ports driven.
  logic [2*COPIES-1:0][AW-1:0]    addr_pad;
  logic [2*COPIES-1:0][WIDTH-1:0] data_pad;

  always_comb begin
    addr_pad = '0;
    addr_pad[LOOKUPS-1:0] = raddr;
  end

  for (genvar c = 0; c < COPIES; c++) begin : g_copy
    uram_bank #(.DEPTH(DEPTH), .WIDTH(WIDTH)) u_bank (
      .clk     (clk),
      .we      (we),
      .waddr   (waddr),
      .wdata   (wdata),
      .raddr_a (addr_pad[2*c]),
      .raddr_b (addr_pad[2*c+1]),
      .rdata_a (data_pad[2*c]),
      .rdata_b (data_pad[2*c+1])
    );
  end

  assign rdata = data_pad[LOOKUPS-1:0];

endmodule
