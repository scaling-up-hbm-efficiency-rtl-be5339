// Behavioural model of one HBM pseudo-channel seen as an AXI4 slave.
//
// Not synthesizable; it stands in for the FPGA card's HBM memory and its
// controller in the testbenches. Memory is a sparse array of 512-bit words
// indexed by byte address / 64, filled and inspected by the testbench through
// mem. Read bursts (INCR, any length up to 256) are queued and answered in
// order after LATENCY cycles; when STALL_PCT > 0, ar_ready and r_valid are
// withheld at random that percentage of the cycles, to exercise
// back-pressure. Writes accept one AW, then its W beats, then answer OKAY on B.
module hbm_model
  import topk_spmv_pkg::*;
#(
  parameter int unsigned LATENCY   = 8,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       ar_valid,
  output logic       ar_ready,
  input  axi_a_t     ar,
  output logic       r_valid,
  input  logic       r_ready,
  output axi_r_t     r,
  input  logic       aw_valid,
  output logic       aw_ready,
  input  axi_a_t     aw,
  input  logic       w_valid,
  output logic       w_ready,
  input  axi_w_t     w,
  output logic       b_valid,
  input  logic       b_ready,
  output logic [1:0] b_resp
);

  axi_data_t mem [longint];

  typedef struct { longint word; int beats; longint due; } burst_t;
  burst_t rq[$];
  longint cycle;
  int     beat_in_burst;
  longint ar_bursts, r_beats, r_stalls, w_beats;

  logic   aw_got;
  longint aw_word;
  int     w_cnt;

  function automatic bit stall();
    return (STALL_PCT > 0) && (($urandom % 100) < STALL_PCT);
  endfunction

  function automatic axi_data_t rd(longint word);
    return mem.exists(word) ? mem[word] : '0;
  endfunction

  initial begin
    ar_ready = 0; r_valid = 0; r = '0; aw_ready = 0; w_ready = 0;
    b_valid = 0; b_resp = 2'b00; cycle = 0; beat_in_burst = 0;
    ar_bursts = 0; r_beats = 0; r_stalls = 0; w_beats = 0;
    aw_got = 0; aw_word = 0; w_cnt = 0;
  end

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (!rst_n) begin
      ar_ready <= 0; r_valid <= 0; aw_ready <= 0; w_ready <= 0; b_valid <= 0;
      rq.delete(); beat_in_burst = 0; aw_got <= 0;
    end else begin
      // ---- read address
      if (ar_valid && ar_ready) begin
        burst_t bu;
        bu.word  = longint'(ar.addr) >> 6;
        bu.beats = int'(ar.len) + 1;
        bu.due   = cycle + LATENCY;
        rq.push_back(bu);
        ar_bursts++;
      end
      ar_ready <= !stall();
      // ---- read data
      if (r_valid && r_ready) begin
        r_beats++;
        beat_in_burst++;
        if (beat_in_burst == rq[0].beats) begin
          void'(rq.pop_front());
          beat_in_burst = 0;
        end
      end
      if (!r_valid || r_ready) begin
        if (rq.size() > 0 && rq[0].due <= cycle && !stall()) begin
          r_valid <= 1;
          r.data  <= rd(rq[0].word + beat_in_burst);
          r.resp  <= 2'b00;
          r.last  <= (beat_in_burst == rq[0].beats - 1);
        end else begin
          if (rq.size() > 0) r_stalls++;
          r_valid <= 0;
        end
      end
      // ---- write
      aw_ready <= !aw_got;
      if (aw_valid && aw_ready && !aw_got) begin
        aw_got  <= 1;
        aw_word <= longint'(aw.addr) >> 6;
        w_cnt   <= 0;
        aw_ready <= 0;
      end
      w_ready <= aw_got;
      if (w_valid && w_ready) begin
        for (int i = 0; i < DATA_W / 8; i++)
          if (w.strb[i]) begin
            axi_data_t cur;
            cur = rd(aw_word + w_cnt);
            cur[8*i +: 8] = w.data[8*i +: 8];
            mem[aw_word + w_cnt] = cur;
          end
        w_cnt <= w_cnt + 1;
        w_beats++;
        if (w.last) begin
          b_valid <= 1;
          w_ready <= 0;
          aw_got  <= 0;
        end
      end
      if (b_valid && b_ready) b_valid <= 0;
    end
  end

endmodule
