// AXI4 write master that stores a core's k results in its HBM pseudo-channel.
//
// At the end of a run the core writes its k (row, value) results once, to
// byte address out_addr. Each result takes 64 bits: the row index in the low
// 32 bits and the value, zero-extended, in the high 32 bits; an empty result
// is written as row 0xFFFFFFFF, value 0. Eight results fill one 512-bit beat,
// so k = 8 needs a single-beat burst. The writer sends AW, then the W beats
// (all byte strobes set, wlast on the final beat), waits for the B response
// and pulses done for one cycle.
//
// Timing: start is a one-cycle pulse and the results must stay stable until
// done. Writing the results to HBM at the end of the computation is the
// paper's; the 64-bit result format and the single burst are this design's
// choices.
module result_writer
  import topk_spmv_pkg::*;
#(
  parameter int unsigned K  = TOP_K,
  parameter int unsigned V  = VAL_W,
  parameter int unsigned RW = ROW_W,
  localparam int unsigned PER_BEAT = DATA_W / 64,
  localparam int unsigned BEATS    = (K + PER_BEAT - 1) / PER_BEAT
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  axi_addr_t            out_addr,
  input  logic [K-1:0]         res_valid,
  input  logic [K-1:0][V-1:0]  res_val,
  input  logic [K-1:0][RW-1:0] res_idx,
  output logic                 done,
  // AXI4 write channels
  output logic                 aw_valid,
  input  logic                 aw_ready,
  output axi_a_t               aw,
  output logic                 w_valid,
  input  logic                 w_ready,
  output axi_w_t               w,
  input  logic                 b_valid,
  output logic                 b_ready,
  input  logic [1:0]           b_resp
);

  initial assert (V <= 32 && RW <= 32) else $error("result_writer: fields exceed 32 bits");

  typedef enum logic [1:0] {S_IDLE, S_AW, S_W, S_B} state_e;
  state_e state;

  localparam int unsigned BW = (BEATS > 1) ? $clog2(BEATS) : 1;
  logic [BW-1:0] beat;

  // All results as one line of 64-bit words.
  logic [BEATS*PER_BEAT-1:0][63:0] words;
  always_comb begin
    words = '0;
    for (int i = 0; i < BEATS * PER_BEAT; i++) words[i] = {32'd0, 32'hFFFF_FFFF};
    for (int i = 0; i < K; i++)
      if (res_valid[i]) words[i] = {32'(res_val[i]), 32'(res_idx[i])};
  end

  assign aw_valid = (state == S_AW);
  assign aw.addr  = out_addr;
  assign aw.len   = 8'(BEATS - 1);
  assign aw.size  = AXI_SIZE_64B;
  assign aw.burst = AXI_BURST_INCR;

  assign w_valid  = (state == S_W);
  assign w.data   = words[beat*PER_BEAT +: PER_BEAT];
  assign w.strb   = '1;
  assign w.last   = (beat == BW'(BEATS - 1));
  assign b_ready  = (state == S_B);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      beat  <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin state <= S_AW; beat <= '0; end
        S_AW:   if (aw_ready) state <= S_W;
        S_W:    if (w_ready) begin
                  if (w.last) state <= S_B;
                  else        beat  <= beat + BW'(1);
                end
        S_B:    if (b_valid) begin state <= S_IDLE; done <= 1'b1; end
        default: state <= S_IDLE;
      endcase
    end
  end

  logic unused_resp;
  assign unused_resp = ^b_resp;

endmodule
