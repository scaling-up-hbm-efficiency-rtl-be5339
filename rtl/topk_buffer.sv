// Buffer of the k best (value, row) pairs seen so far.
//
// The buffer holds k entries, each with a valid bit. In every cycle an argmin
// over the entries finds the current worst one: an empty entry if there is
// one, otherwise the entry with the smallest value (the lowest position on a
// tie). An offered pair with in_valid high replaces that worst entry when the
// worst entry is empty or when in_val >= its value, the update rule of the
// paper's algorithm. One pair can be offered per cycle; the update is visible
// on the outputs in the next cycle. clear empties the buffer. The entries are
// kept in no particular order.
module topk_buffer
  import topk_spmv_pkg::*;
#(
  parameter int unsigned K  = TOP_K,
  parameter int unsigned V  = VAL_W,
  parameter int unsigned RW = ROW_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 in_valid,
  input  logic [V-1:0]         in_val,
  input  logic [RW-1:0]        in_idx,
  output logic [K-1:0]         ent_valid,
  output logic [K-1:0][V-1:0]  ent_val,
  output logic [K-1:0][RW-1:0] ent_idx,
  output logic                 replaced    // in_valid was accepted this cycle
);

  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1;

  logic [KW-1:0] worst_pos;
  logic [V-1:0]  worst_val;
  logic          worst_empty;

  // argmin: empty entries first, then the smallest value.
  always_comb begin
    worst_pos   = '0;
    worst_val   = ent_val[0];
    worst_empty = !ent_valid[0];
    for (int i = 1; i < K; i++) begin
      if (!worst_empty && (!ent_valid[i] || ent_val[i] < worst_val)) begin
        worst_pos   = KW'(i);
        worst_val   = ent_val[i];
        worst_empty = !ent_valid[i];
      end
    end
  end

  assign replaced = in_valid && (worst_empty || in_val >= worst_val);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ent_valid <= '0;
      ent_val   <= '0;
      ent_idx   <= '0;
    end else if (clear) begin
      ent_valid <= '0;
      ent_val   <= '0;
      ent_idx   <= '0;
    end else if (replaced) begin
      ent_valid[worst_pos] <= 1'b1;
      ent_val[worst_pos]   <= in_val;
      ent_idx[worst_pos]   <= in_idx;
    end
  end

endmodule
