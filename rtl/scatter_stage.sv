// Stage 1 of a core: scatter lookups into x and point-wise products.
//
// For each BS-CSR packet the stage sends the B column indices idx[j] to the
// replicated x store and multiplies every returned x[idx[j]] with val[j].
// Values and x are unsigned fixed point Q1.F with F = V-1; the 2V-bit product
// is truncated back to Q1.F and saturates at the largest code (it cannot
// exceed 1.0 for L2-normalised data). The ptr and new_row fields travel
// along unchanged for the later stages.
//
// Timing: fully pipelined, one packet per cycle, no stall. The x lookups are
// issued combinationally from in_pkt in the cycle in_valid is high, x_rdata is
// expected one cycle later, and out_* are valid two cycles after the input.
// The lookup-and-multiply function is the paper's; the packet bit positions
// (see topk_spmv_pkg), truncation and saturation are this design's choices.
module scatter_stage
  import topk_spmv_pkg::*;
#(
  parameter int unsigned B   = PKT_NNZ,
  parameter int unsigned V   = VAL_W,
  parameter int unsigned IW  = IDX_W,
  parameter int unsigned PW  = PTR_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // packet stream
  input  logic                     in_valid,
  input  logic [DATA_W-1:0]        in_pkt,
  input  logic                     in_last,     // last packet of the partition
  // x lookups
  output logic [B-1:0][IW-1:0]     x_raddr,
  input  logic [B-1:0][V-1:0]      x_rdata,
  // products
  output logic                     out_valid,
  output logic [B-1:0][V-1:0]      out_prod,
  output logic [B-1:0][PW-1:0]     out_ptr,
  output logic                     out_new_row,
  output logic                     out_last
);

  localparam int unsigned F      = V - 1;
  localparam int unsigned IDX_LO = idx_off(B, PW);
  localparam int unsigned VAL_LO = val_off(B, PW, IW);

  initial assert (VAL_LO + B * V <= DATA_W)
    else $error("BS-CSR packet of %0d bits does not fit in %0d", VAL_LO + B * V, DATA_W);

  // Cycle 0: unpack the packet, issue the lookups.
  always_comb
    for (int j = 0; j < B; j++) x_raddr[j] = in_pkt[IDX_LO + j*IW +: IW];

  logic                 s1_valid, s1_new_row, s1_last;
  logic [B-1:0][V-1:0]  s1_val;
  logic [B-1:0][PW-1:0] s1_ptr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
    end else begin
      s1_valid <= in_valid;
    end
  end

  always_ff @(posedge clk) begin
    s1_new_row <= in_pkt[0];
    s1_last    <= in_last;
    for (int j = 0; j < B; j++) begin
      s1_val[j] <= in_pkt[VAL_LO + j*V +: V];
      s1_ptr[j] <= in_pkt[1 + j*PW +: PW];
    end
  end

  // Cycle 1: x has arrived, multiply.
  logic [B-1:0][V-1:0] prod_q;
  always_comb begin
    for (int j = 0; j < B; j++) begin
      logic [2*V-1:0] p;
      p = s1_val[j] * x_rdata[j];
      // Q2.2F -> Q1.F: drop F fraction bits, saturate when the 2^1 bit is set
      if (p[2*V-1]) prod_q[j] = '1;
      else          prod_q[j] = p[F +: V];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= s1_valid;
  end

  always_ff @(posedge clk) begin
    out_prod    <= prod_q;
    out_ptr     <= s1_ptr;
    out_new_row <= s1_new_row;
    out_last    <= s1_last;
  end

endmodule
