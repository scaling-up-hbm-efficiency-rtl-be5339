// Stage 4 of a core: Top-k update for up to r finished rows per cycle.
//
// Up to r rows finish in the same packet, and each must be considered in the
// same cycle to keep one packet per cycle. The stage therefore keeps r
// independent Top-k buffers, one per lane of the summary stage; lane l only
// updates buffer l. Together the buffers hold r*k candidates, a superset of
// the partition's k best rows; topk_merge reduces them at the end of the run.
// An entry is replaced when the new row's value is at least the buffer's
// current minimum (see topk_buffer).
//
// Timing: one set of lanes per cycle, no stall; an update shows on the
// candidate outputs one cycle later. clear empties all buffers. The r
// independent buffers of size k are the paper's; the lane-to-buffer mapping
// is this design's choice.
module topk_update
  import topk_spmv_pkg::*;
#(
  parameter int unsigned R  = ROWS_PER_PKT,
  parameter int unsigned K  = TOP_K,
  parameter int unsigned V  = VAL_W,
  parameter int unsigned RW = ROW_W
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clear,
  input  logic [R-1:0]                 in_valid,
  input  logic [R-1:0][V-1:0]          in_val,
  input  logic [R-1:0][RW-1:0]         in_idx,
  output logic [R-1:0][K-1:0]          cand_valid,
  output logic [R-1:0][K-1:0][V-1:0]   cand_val,
  output logic [R-1:0][K-1:0][RW-1:0]  cand_idx,
  output logic [R-1:0]                 replaced
);

  for (genvar l = 0; l < R; l++) begin : g_lane
    topk_buffer #(.K(K), .V(V), .RW(RW)) u_buf (
      .clk       (clk),
      .rst_n     (rst_n),
      .clear     (clear),
      .in_valid  (in_valid[l]),
      .in_val    (in_val[l]),
      .in_idx    (in_idx[l]),
      .ent_valid (cand_valid[l]),
      .ent_val   (cand_val[l]),
      .ent_idx   (cand_idx[l]),
      .replaced  (replaced[l])
    );
  end

endmodule
