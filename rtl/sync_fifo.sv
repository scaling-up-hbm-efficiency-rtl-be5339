// Single-clock first-in first-out buffer.
//
// Holds up to DEPTH words. push writes wdata when the FIFO is not full; pop
// removes the head when it is not empty. rdata shows the head word
// combinationally (first-word fall-through). count gives the fill level.
// Pushing into a full FIFO or popping an empty one is a protocol error that
// the assertions below report.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             push,
  input  logic [WIDTH-1:0] wdata,
  input  logic             pop,
  output logic [WIDTH-1:0] rdata,
  output logic             empty,
  output logic             full,
  output logic [CW-1:0]    count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;

  function automatic logic [AW-1:0] next(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  assign empty = (count == '0);
  assign full  = (count == CW'(DEPTH));
  assign rdata = mem[rptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else if (clear) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= next(wptr);
      if (pop)  rptr <= next(rptr);
      count <= count + CW'(push) - CW'(pop);
    end
  end

  always_ff @(posedge clk)
    if (push) mem[wptr] <= wdata;

  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full || pop)
    else $error("sync_fifo: push while full");
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty)
    else $error("sync_fifo: pop while empty");

endmodule
