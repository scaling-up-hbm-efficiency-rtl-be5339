// Stage 3 of a core: book-keeping of rows split across packets.
//
// A BS-CSR packet carries no row numbers. This stage keeps, between packets,
// the partial sum of the previous packet's last row ("last row value") and
// that row's index, and numbers the rows by counting them. For every packet it
// builds B+1 slots:
//   slot 0    the previous packet's last row. It is finished when the packet's
//             new_row bit is 1; when new_row is 0 its value is instead added
//             to the packet's first row, which continues it.
//   slot j+1  the packet's row j. It is finished when another row follows it
//             in the packet; the packet's last row is held back as the new
//             "last row value", except in the partition's last packet, where
//             it is finished too.
// Only r finished rows per packet are passed on (the first r in slot order);
// further finished rows of the same packet are dropped, and their number is
// reported on out_dropped. Row indices count from 0 within the partition.
//
// Timing: one packet per cycle, outputs registered, one cycle of latency.
// clear (one cycle, between runs) forgets the held row and restarts the row
// count. The slot scheme, the new_row rule and the r limit are the paper's;
// which finished rows are kept when more than r finish, the flush of the last
// row at the end of the partition and saturating sums are this design's
// choices.
module summary_stage
  import topk_spmv_pkg::*;
#(
  parameter int unsigned B  = PKT_NNZ,
  parameter int unsigned V  = VAL_W,
  parameter int unsigned R  = ROWS_PER_PKT,
  parameter int unsigned RW = ROW_W,
  localparam int unsigned CW = $clog2(B + 1),
  localparam int unsigned S  = B + 1         // slots per packet
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 in_valid,
  input  logic [B-1:0][V-1:0]  in_sum,
  input  logic [CW-1:0]        in_nrows,
  input  logic                 in_new_row,
  input  logic                 in_last,
  output logic [R-1:0]         out_valid,   // lane carries a finished row
  output logic [R-1:0][V-1:0]  out_val,
  output logic [R-1:0][RW-1:0] out_idx,
  output logic                 out_last,    // the partition's last packet passed
  output logic [CW-1:0]        out_dropped  // finished rows beyond r in this packet
);

  // Held state: the last row of the previous packet.
  logic          pend_valid;
  logic [V-1:0]  pend_val;
  logic [RW-1:0] pend_idx;   // all ones before the first row

  function automatic logic [V-1:0] sat_add(logic [V-1:0] a, logic [V-1:0] b);
    logic [V:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[V] ? '1 : s[V-1:0];
  endfunction

  logic [S-1:0]         fin;
  logic [S-1:0][V-1:0]  sval;
  logic [S-1:0][RW-1:0] sidx;
  logic [RW-1:0]        base;
  logic                 cont;

  always_comb begin
    // The first row continues the held one only when new_row is 0.
    cont = pend_valid && !in_new_row;
    base = cont ? pend_idx : pend_idx + RW'(1);

    sval[0] = pend_val;
    sidx[0] = pend_idx;
    fin[0]  = pend_valid && (in_new_row || (in_last && in_nrows == '0));

    for (int j = 0; j < B; j++) begin
      sval[j+1] = (j == 0 && cont) ? sat_add(in_sum[0], pend_val) : in_sum[j];
      sidx[j+1] = base + RW'(j);
      fin[j+1]  = (CW'(j) < in_nrows) && ((CW'(j + 1) < in_nrows) || in_last);
    end
  end

  // Keep the first R finished slots.
  logic [R-1:0]         lane_v;
  logic [R-1:0][V-1:0]  lane_val;
  logic [R-1:0][RW-1:0] lane_idx;
  logic [CW-1:0]        dropped;

  always_comb begin
    int unsigned rank;
    lane_v   = '0;
    lane_val = '0;
    lane_idx = '0;
    dropped  = '0;
    rank     = 0;
    for (int s = 0; s < S; s++) begin
      if (fin[s]) begin
        for (int l = 0; l < R; l++)
          if (rank == l) begin
            lane_v[l]   = 1'b1;
            lane_val[l] = sval[s];
            lane_idx[l] = sidx[s];
          end
        if (rank >= R) dropped += CW'(1);
        rank++;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_valid  <= 1'b0;
      pend_val    <= '0;
      pend_idx    <= '1;
      out_valid   <= '0;
      out_last    <= 1'b0;
      out_dropped <= '0;
    end else if (clear) begin
      pend_valid  <= 1'b0;
      pend_val    <= '0;
      pend_idx    <= '1;
      out_valid   <= '0;
      out_last    <= 1'b0;
      out_dropped <= '0;
    end else begin
      out_valid   <= in_valid ? lane_v : '0;
      out_last    <= in_valid && in_last;
      out_dropped <= in_valid ? dropped : '0;
      if (in_valid) begin
        if (in_nrows != '0) begin
          pend_val   <= sval[in_nrows];
          pend_idx   <= sidx[in_nrows];
          pend_valid <= !in_last;
        end else if (fin[0] || in_last) begin
          pend_valid <= 1'b0;
        end
        if (in_last) pend_idx <= '1;
      end
    end
  end

  always_ff @(posedge clk) begin
    out_val <= lane_val;
    out_idx <= lane_idx;
  end

endmodule
