// Multi-core approximate Top-K SpMV accelerator.
//
// The sparse matrix A (N rows, one sparse embedding per row) is cut into C
// partitions of consecutive rows, each stored in BS-CSR form in its own HBM
// pseudo-channel. C independent topk_spmv_core instances, one per channel,
// each find the k best rows of their partition against the same dense vector
// x. The C*k results together approximate the Top-K of the whole product for
// any K <= C*k; no result is lost unless more than k of the true Top-K fall
// into one partition. The host combines the C*k results (partition p's row i
// is global row p*N/C + i for equal partitions).
//
// Interface: x is loaded once through x_we/x_waddr/x_wdata and broadcast to
// every core. start launches all cores together with per-core matrix
// address, packet count and result address; busy is high while any core is
// working and done pulses when the last one has written its results.
// core_done[c] shows which cores have finished the current run. Each core has
// a full AXI4 master port (AR, R, AW, W, B) given as arrays indexed by core.
//
// Some AXI output bits are constant by design: r_ready is held high (the
// reader only asks for a burst when its FIFO has room for all of it), every
// write strobe is all ones, and the size and burst fields are fixed at 64-byte
// INCR beats. They stay as ports so each core's port is a complete AXI4
// master.
//
// The core count, one HBM channel per core and the broadcast of x follow the
// paper; the common start and the done gathering are this design's choices.
module topk_spmv_top
  import topk_spmv_pkg::*;
#(
  parameter int unsigned C          = NUM_CORES,
  parameter int unsigned B          = PKT_NNZ,
  parameter int unsigned V          = VAL_W,
  parameter int unsigned IW         = IDX_W,
  parameter int unsigned PW         = PTR_W,
  parameter int unsigned M          = VEC_LEN,
  parameter int unsigned K          = TOP_K,
  parameter int unsigned R          = ROWS_PER_PKT,
  parameter int unsigned FIFO_DEPTH = 2 * MAX_BURST,
  parameter int unsigned BURST      = MAX_BURST,
  localparam int unsigned XAW       = (M > 1) ? $clog2(M) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  axi_addr_t [C-1:0]     mat_addr,
  input  logic [C-1:0][31:0]    num_pkts,
  input  axi_addr_t [C-1:0]     out_addr,
  output logic                  busy,
  output logic                  done,
  output logic [C-1:0]          core_done,
  input  logic                  x_we,
  input  logic [XAW-1:0]        x_waddr,
  input  logic [V-1:0]          x_wdata,
  output logic [C-1:0]          ar_valid,
  input  logic [C-1:0]          ar_ready,
  output axi_a_t [C-1:0]        ar,
  input  logic [C-1:0]          r_valid,
  output logic [C-1:0]          r_ready,
  input  axi_r_t [C-1:0]        r,
  output logic [C-1:0]          aw_valid,
  input  logic [C-1:0]          aw_ready,
  output axi_a_t [C-1:0]        aw,
  output logic [C-1:0]          w_valid,
  input  logic [C-1:0]          w_ready,
  output axi_w_t [C-1:0]        w,
  input  logic [C-1:0]          b_valid,
  output logic [C-1:0]          b_ready,
  input  logic [C-1:0][1:0]     b_resp
);

  logic [C-1:0] c_busy, c_done;
  logic         running;

  for (genvar c = 0; c < C; c++) begin : g_core
    topk_spmv_core #(
      .B(B), .V(V), .IW(IW), .PW(PW), .M(M), .K(K), .R(R),
      .FIFO_DEPTH(FIFO_DEPTH), .BURST(BURST)
    ) u_core (
      .clk      (clk),
      .rst_n    (rst_n),
      .start    (start && !running),
      .mat_addr (mat_addr[c]),
      .num_pkts (num_pkts[c]),
      .out_addr (out_addr[c]),
      .busy     (c_busy[c]),
      .done     (c_done[c]),
      .x_we     (x_we),
      .x_waddr  (x_waddr),
      .x_wdata  (x_wdata),
      .ar_valid (ar_valid[c]),
      .ar_ready (ar_ready[c]),
      .ar       (ar[c]),
      .r_valid  (r_valid[c]),
      .r_ready  (r_ready[c]),
      .r        (r[c]),
      .aw_valid (aw_valid[c]),
      .aw_ready (aw_ready[c]),
      .aw       (aw[c]),
      .w_valid  (w_valid[c]),
      .w_ready  (w_ready[c]),
      .w        (w[c]),
      .b_valid  (b_valid[c]),
      .b_ready  (b_ready[c]),
      .b_resp   (b_resp[c])
    );
  end

  // Gather the per-core completions of one run.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running   <= 1'b0;
      core_done <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        running   <= 1'b1;
        core_done <= '0;
      end else if (running) begin
        core_done <= core_done | c_done;
        if ((core_done | c_done) == '1) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end

  assign busy = running;

  logic unused;
  assign unused = ^c_busy;

endmodule
