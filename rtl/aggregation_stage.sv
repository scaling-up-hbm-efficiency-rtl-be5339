// Stage 2 of a core: sum the products that belong to the same row.
//
// Inside a BS-CSR packet, ptr[b] is the cumulative number of non-zeros up to
// the end of the packet's b-th row, so row b owns products
// ptr[b-1] .. ptr[b]-1 (with ptr[-1] = 0). Entries of ptr after the last row
// are 0, which makes their range empty. The stage forms all B row sums at once
// with a masked adder per row, and also counts the rows in the packet (the
// non-zero ptr entries). Sums are kept in the same unsigned Q1.(V-1) format
// as the products and saturate at the largest code.
//
// Timing: one packet per cycle, outputs registered, one cycle of latency.
// The per-packet segmented sum is the paper's; saturation and the row-count
// output are this design's choices.
module aggregation_stage
  import topk_spmv_pkg::*;
#(
  parameter int unsigned B  = PKT_NNZ,
  parameter int unsigned V  = VAL_W,
  parameter int unsigned PW = PTR_W,
  localparam int unsigned CW = $clog2(B + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [B-1:0][V-1:0]  in_prod,
  input  logic [B-1:0][PW-1:0] in_ptr,
  input  logic                 in_new_row,
  input  logic                 in_last,
  output logic                 out_valid,
  output logic [B-1:0][V-1:0]  out_sum,    // out_sum[b]: sum of the packet's row b
  output logic [CW-1:0]        out_nrows,  // rows present in the packet
  output logic                 out_new_row,
  output logic                 out_last
);

  localparam int unsigned SW = V + CW;  // wide enough for B terms

  logic [B-1:0][V-1:0] sum_d;
  logic [CW-1:0]       nrows_d;

  always_comb begin
    nrows_d = '0;
    for (int b = 0; b < B; b++) begin
      logic [PW-1:0] lo, hi;
      logic [SW-1:0] acc;
      lo  = (b == 0) ? '0 : in_ptr[b-1];
      hi  = in_ptr[b];
      acc = '0;
      for (int j = 0; j < B; j++)
        if (PW'(j) >= lo && PW'(j) < hi) acc += SW'(in_prod[j]);
      sum_d[b] = (acc >= SW'({V{1'b1}})) ? '1 : acc[V-1:0];
      if (in_ptr[b] != '0) nrows_d += CW'(1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    out_sum     <= sum_d;
    out_nrows   <= nrows_d;
    out_new_row <= in_new_row;
    out_last    <= in_last;
  end

endmodule
