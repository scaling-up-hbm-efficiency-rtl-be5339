// One Top-K SpMV core: the approximate Top-k of one matrix partition.
//
// The core streams its partition of the sparse matrix A, in BS-CSR packets,
// from its own HBM pseudo-channel and keeps the k rows with the largest dot
// product with the dense vector x. It is a four-stage dataflow pipeline that
// accepts one 512-bit packet per cycle:
//   hbm_reader         AXI4 bursts from HBM into a packet FIFO
//   scatter_stage      B lookups into x (x_vector_store) and B products
//   aggregation_stage  per-row sums inside the packet
//   summary_stage      rows split across packets, finished rows, row numbers,
//                      at most r finished rows per packet
//   topk_update        r independent Top-k buffers
// After the last packet, topk_merge reduces the r*k candidates to k results
// and result_writer stores them in HBM at out_addr.
//
// Interface: load x through x_we/x_waddr/x_wdata while the core is idle
// (broadcast to every copy). Pulse start with mat_addr, num_pkts and out_addr
// valid; busy stays high until the results are written, then done pulses for
// one cycle. Row indices in the results count from 0 within the partition.
//
// Timing: packets flow at one per cycle whenever HBM delivers them; the fixed
// overhead of a run is the HBM latency, 5 pipeline cycles, r*k + 1 merge
// cycles and one AXI write. The stage split, the single HBM channel per core,
// the URAM replication and the r and k limits are the paper's; the control
// sequence, the merge and the result format are this design's choices.
module topk_spmv_core
  import topk_spmv_pkg::*;
#(
  parameter int unsigned B          = PKT_NNZ,
  parameter int unsigned V          = VAL_W,
  parameter int unsigned IW         = IDX_W,
  parameter int unsigned PW         = PTR_W,
  parameter int unsigned M          = VEC_LEN,
  parameter int unsigned K          = TOP_K,
  parameter int unsigned R          = ROWS_PER_PKT,
  parameter int unsigned RW         = ROW_W,
  parameter int unsigned FIFO_DEPTH = 2 * MAX_BURST,
  parameter int unsigned BURST      = MAX_BURST,
  localparam int unsigned XAW       = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned CW        = $clog2(B + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // control
  input  logic              start,
  input  axi_addr_t         mat_addr,
  input  logic [31:0]       num_pkts,
  input  axi_addr_t         out_addr,
  output logic              busy,
  output logic              done,
  // loading of x
  input  logic              x_we,
  input  logic [XAW-1:0]    x_waddr,
  input  logic [V-1:0]      x_wdata,
  // AXI4 master towards the HBM pseudo-channel
  output logic              ar_valid,
  input  logic              ar_ready,
  output axi_a_t            ar,
  input  logic              r_valid,
  output logic              r_ready,
  input  axi_r_t            r,
  output logic              aw_valid,
  input  logic              aw_ready,
  output axi_a_t            aw,
  output logic              w_valid,
  input  logic              w_ready,
  output axi_w_t            w,
  input  logic              b_valid,
  output logic              b_ready,
  input  logic [1:0]        b_resp
);

  typedef enum logic [2:0] {C_IDLE, C_RUN, C_DRAIN, C_MERGE, C_WRITE} cstate_e;
  cstate_e state;

  logic run_start;  // first cycle of a run
  assign run_start = (state == C_IDLE) && start;

  // ---------------------------------------------------------------- reader
  logic              pkt_valid, pkt_last, pkt_pop, rd_busy;
  logic [DATA_W-1:0] pkt_data;

  hbm_reader #(.FIFO_DEPTH(FIFO_DEPTH), .BURST(BURST)) u_reader (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (run_start),
    .base_addr (mat_addr),
    .num_pkts  (num_pkts),
    .busy      (rd_busy),
    .ar_valid  (ar_valid),
    .ar_ready  (ar_ready),
    .ar        (ar),
    .r_valid   (r_valid),
    .r_ready   (r_ready),
    .r         (r),
    .pkt_valid (pkt_valid),
    .pkt_data  (pkt_data),
    .pkt_last  (pkt_last),
    .pkt_pop   (pkt_pop)
  );

  assign pkt_pop = (state == C_RUN) && pkt_valid;

  // ---------------------------------------------------------------- stage 1
  logic [B-1:0][IW-1:0] x_raddr;
  logic [B-1:0][V-1:0]  x_rdata;
  logic [B-1:0][XAW-1:0] x_raddr_m;

  always_comb
    for (int j = 0; j < B; j++) x_raddr_m[j] = XAW'(x_raddr[j]);

  x_vector_store #(.LOOKUPS(B), .DEPTH(M), .WIDTH(V)) u_x (
    .clk   (clk),
    .we    (x_we),
    .waddr (x_waddr),
    .wdata (x_wdata),
    .raddr (x_raddr_m),
    .rdata (x_rdata)
  );

  logic                 s1_valid, s1_new_row, s1_last;
  logic [B-1:0][V-1:0]  s1_prod;
  logic [B-1:0][PW-1:0] s1_ptr;

  scatter_stage #(.B(B), .V(V), .IW(IW), .PW(PW)) u_scatter (
    .clk         (clk),
    .rst_n       (rst_n),
    .in_valid    (pkt_pop),
    .in_pkt      (pkt_data),
    .in_last     (pkt_last),
    .x_raddr     (x_raddr),
    .x_rdata     (x_rdata),
    .out_valid   (s1_valid),
    .out_prod    (s1_prod),
    .out_ptr     (s1_ptr),
    .out_new_row (s1_new_row),
    .out_last    (s1_last)
  );

  // ---------------------------------------------------------------- stage 2
  logic                s2_valid, s2_new_row, s2_last;
  logic [B-1:0][V-1:0] s2_sum;
  logic [CW-1:0]       s2_nrows;

  aggregation_stage #(.B(B), .V(V), .PW(PW)) u_aggr (
    .clk         (clk),
    .rst_n       (rst_n),
    .in_valid    (s1_valid),
    .in_prod     (s1_prod),
    .in_ptr      (s1_ptr),
    .in_new_row  (s1_new_row),
    .in_last     (s1_last),
    .out_valid   (s2_valid),
    .out_sum     (s2_sum),
    .out_nrows   (s2_nrows),
    .out_new_row (s2_new_row),
    .out_last    (s2_last)
  );

  // ---------------------------------------------------------------- stage 3
  logic [R-1:0]         s3_valid;
  logic [R-1:0][V-1:0]  s3_val;
  logic [R-1:0][RW-1:0] s3_idx;
  logic                 s3_last;
  logic [CW-1:0]        s3_dropped;

  summary_stage #(.B(B), .V(V), .R(R), .RW(RW)) u_summary (
    .clk         (clk),
    .rst_n       (rst_n),
    .clear       (run_start),
    .in_valid    (s2_valid),
    .in_sum      (s2_sum),
    .in_nrows    (s2_nrows),
    .in_new_row  (s2_new_row),
    .in_last     (s2_last),
    .out_valid   (s3_valid),
    .out_val     (s3_val),
    .out_idx     (s3_idx),
    .out_last    (s3_last),
    .out_dropped (s3_dropped)
  );

  // ---------------------------------------------------------------- stage 4
  logic [R-1:0][K-1:0]         cand_valid;
  logic [R-1:0][K-1:0][V-1:0]  cand_val;
  logic [R-1:0][K-1:0][RW-1:0] cand_idx;
  logic [R-1:0]                replaced;

  topk_update #(.R(R), .K(K), .V(V), .RW(RW)) u_update (
    .clk        (clk),
    .rst_n      (rst_n),
    .clear      (run_start),
    .in_valid   (s3_valid),
    .in_val     (s3_val),
    .in_idx     (s3_idx),
    .cand_valid (cand_valid),
    .cand_val   (cand_val),
    .cand_idx   (cand_idx),
    .replaced   (replaced)
  );

  // ---------------------------------------------------------------- merge, write-back
  logic                 merge_start, merge_done, wr_start, wr_done;
  logic [K-1:0]         res_valid;
  logic [K-1:0][V-1:0]  res_val;
  logic [K-1:0][RW-1:0] res_idx;

  assign merge_start = (state == C_DRAIN);

  topk_merge #(.R(R), .K(K), .V(V), .RW(RW)) u_merge (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (merge_start),
    .cand_valid (cand_valid),
    .cand_val   (cand_val),
    .cand_idx   (cand_idx),
    .done       (merge_done),
    .res_valid  (res_valid),
    .res_val    (res_val),
    .res_idx    (res_idx)
  );

  axi_addr_t out_addr_q;
  logic      empty_run;
  assign wr_start = (state == C_MERGE) && merge_done;

  result_writer #(.K(K), .V(V), .RW(RW)) u_writer (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (wr_start),
    .out_addr  (out_addr_q),
    .res_valid (res_valid),
    .res_val   (res_val),
    .res_idx   (res_idx),
    .done      (wr_done),
    .aw_valid  (aw_valid),
    .aw_ready  (aw_ready),
    .aw        (aw),
    .w_valid   (w_valid),
    .w_ready   (w_ready),
    .w         (w),
    .b_valid   (b_valid),
    .b_ready   (b_ready),
    .b_resp    (b_resp)
  );

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= C_IDLE;
      out_addr_q <= '0;
      empty_run  <= 1'b0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        C_IDLE:  if (start) begin
                   state      <= C_RUN;
                   out_addr_q <= out_addr;
                   empty_run  <= (num_pkts == 0);
                 end
        C_RUN:   if (s3_last || empty_run) state <= C_DRAIN;
        C_DRAIN: state <= C_MERGE;
        C_MERGE: if (merge_done) state <= C_WRITE;
        C_WRITE: if (wr_done) begin state <= C_IDLE; done <= 1'b1; end
        default: state <= C_IDLE;
      endcase
    end
  end

  assign busy = (state != C_IDLE);

  // Stage 1 reads x while a run is active; x must not change meanwhile.
  assert property (@(posedge clk) disable iff (!rst_n) x_we |-> !busy)
    else $error("topk_spmv_core: x written during a run");

  logic unused;
  assign unused = rd_busy ^ (|replaced) ^ (|s3_dropped);

endmodule
