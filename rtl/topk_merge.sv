// Final reduction of a core's r*k Top-k candidates to k results.
//
// After the last packet, the r buffers of the update stage hold r*k candidate
// rows. On start the merge copies them into a local register file and feeds
// them, one per cycle, into a single Top-k buffer of size k, skipping empty
// candidates. It then raises done with the k results on res_*; they stay
// there until the next start. The results are not sorted.
//
// Timing: start is a one-cycle pulse; done rises r*k + 1 cycles later and
// stays high until the next start. The paper draws this reduction as a tree
// under the buffers without describing it; this sequential version, which
// needs only one comparator set, is this design's choice (it costs r*k cycles
// once per run).
module topk_merge
  import topk_spmv_pkg::*;
#(
  parameter int unsigned R  = ROWS_PER_PKT,
  parameter int unsigned K  = TOP_K,
  parameter int unsigned V  = VAL_W,
  parameter int unsigned RW = ROW_W,
  localparam int unsigned N  = R * K,
  localparam int unsigned NW = $clog2(N + 1),
  localparam int unsigned PIW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [R-1:0][K-1:0]          cand_valid,
  input  logic [R-1:0][K-1:0][V-1:0]   cand_val,
  input  logic [R-1:0][K-1:0][RW-1:0]  cand_idx,
  output logic                         done,
  output logic [K-1:0]                 res_valid,
  output logic [K-1:0][V-1:0]          res_val,
  output logic [K-1:0][RW-1:0]         res_idx
);

  logic [N-1:0]         c_valid;
  logic [N-1:0][V-1:0]  c_val;
  logic [N-1:0][RW-1:0] c_idx;
  logic [NW-1:0]        pos;
  logic                 busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      pos  <= '0;
    end else if (start) begin
      busy <= 1'b1;
      done <= 1'b0;
      pos  <= '0;
    end else if (busy) begin
      if (pos == NW'(N - 1)) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
      pos <= pos + NW'(1);
    end
  end

  always_ff @(posedge clk) begin
    if (start) begin
      c_valid <= cand_valid;
      c_val   <= cand_val;
      c_idx   <= cand_idx;
    end
  end

  logic unused_replaced;
  logic [PIW-1:0] sel;
  assign sel = pos[PIW-1:0];

  topk_buffer #(.K(K), .V(V), .RW(RW)) u_final (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (start),
    .in_valid  (busy && c_valid[sel]),
    .in_val    (c_val[sel]),
    .in_idx    (c_idx[sel]),
    .ent_valid (res_valid),
    .ent_val   (res_val),
    .ent_idx   (res_idx),
    .replaced  (unused_replaced)
  );

endmodule
