// AXI4 read master that streams one matrix partition from an HBM pseudo-channel.
//
// On start the reader fetches num_pkts consecutive 512-bit BS-CSR packets
// beginning at byte address base_addr, in INCR bursts of up to 256 beats (the
// last burst may be shorter), and pushes them into a packet FIFO together with
// a flag marking the partition's last packet. A burst is requested only when
// the FIFO has room for all the beats that are already requested and for the
// new burst, so R data never needs to wait (rready is tied high) and memory
// transfers stay decoupled from computation. Several bursts may be in flight;
// the AXI slave must return them in order (single ID).
//
// Interface: AR and R channels of AXI4 (valid/ready handshakes); the consumer
// side is the FIFO's first-word-fall-through head (pkt_valid, pkt_data,
// pkt_last, pkt_pop). busy is high from start until the last beat has been
// received. The 512-bit width and the maximum-length 256-beat bursts are the
// paper's. Note that a 256-beat, 64-byte burst spans 16 KB, beyond the 4 KB
// boundary of the general AXI4 rule; the paper states 256-beat bursts and this
// design follows it, with base_addr aligned to 16 KB. The credit scheme and the
// FIFO depth are this design's choices.
module hbm_reader
  import topk_spmv_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 2 * MAX_BURST,
  parameter int unsigned BURST      = MAX_BURST,
  localparam int unsigned CW        = $clog2(FIFO_DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  axi_addr_t         base_addr,
  input  logic [31:0]       num_pkts,
  output logic              busy,
  // AXI4 read address and data channels
  output logic              ar_valid,
  input  logic              ar_ready,
  output axi_a_t            ar,
  input  logic              r_valid,
  output logic              r_ready,
  input  axi_r_t            r,
  // packet stream towards the core
  output logic              pkt_valid,
  output logic [DATA_W-1:0] pkt_data,
  output logic              pkt_last,
  input  logic              pkt_pop
);

  localparam int unsigned BEAT_BYTES = DATA_W / 8;

  initial assert (FIFO_DEPTH >= BURST && BURST >= 1 && BURST <= MAX_BURST)
    else $error("hbm_reader: FIFO_DEPTH must hold one burst of 1..256 beats");

  logic [31:0]  req_left;   // packets not yet requested
  logic [31:0]  rcv_left;   // packets not yet received
  axi_addr_t    req_addr;
  logic [CW:0]  in_flight;  // beats requested but not yet received
  logic [CW-1:0] fifo_count;
  logic         fifo_empty, fifo_full;
  logic [31:0]  burst_len;

  assign burst_len = (req_left < 32'(BURST)) ? req_left : 32'(BURST);

  // Issue a burst only if the FIFO can absorb every beat in flight plus it.
  logic room;
  assign room = ((CW+1)'(fifo_count) + in_flight + (CW+1)'(burst_len))
                <= (CW+1)'(FIFO_DEPTH);

  assign ar_valid  = busy && (req_left != 0) && room;
  assign ar.addr   = req_addr;
  assign ar.len    = 8'(burst_len - 1);
  assign ar.size   = AXI_SIZE_64B;
  assign ar.burst  = AXI_BURST_INCR;
  assign r_ready   = 1'b1;

  logic ar_fire, r_fire;
  assign ar_fire = ar_valid && ar_ready;
  assign r_fire  = r_valid && r_ready && busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      req_left  <= '0;
      rcv_left  <= '0;
      req_addr  <= '0;
      in_flight <= '0;
    end else if (start) begin
      busy      <= (num_pkts != 0);
      req_left  <= num_pkts;
      rcv_left  <= num_pkts;
      req_addr  <= base_addr;
      in_flight <= '0;
    end else begin
      if (ar_fire) begin
        req_left <= req_left - burst_len;
        req_addr <= req_addr + AXI_ADDR_W'(burst_len * BEAT_BYTES);
      end
      if (r_fire) begin
        rcv_left <= rcv_left - 1;
        if (rcv_left == 1) busy <= 1'b0;
      end
      in_flight <= in_flight + (ar_fire ? (CW+1)'(burst_len) : '0) - (CW+1)'(r_fire);
    end
  end

  logic [DATA_W:0] fifo_rdata;

  sync_fifo #(.WIDTH(DATA_W + 1), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk   (clk),
    .rst_n (rst_n),
    .clear (start),
    .push  (r_fire),
    .wdata ({rcv_left == 1, r.data}),
    .pop   (pkt_pop && !fifo_empty),
    .rdata (fifo_rdata),
    .empty (fifo_empty),
    .full  (fifo_full),
    .count (fifo_count)
  );

  assign pkt_valid = !fifo_empty;
  assign pkt_data  = fifo_rdata[DATA_W-1:0];
  assign pkt_last  = fifo_rdata[DATA_W];

  // AXI4 rules on the master side.
  assert property (@(posedge clk) disable iff (!rst_n)
                   ar_valid && !ar_ready |=> ar_valid && $stable(ar))
    else $error("hbm_reader: AR changed before handshake");
  assert property (@(posedge clk) disable iff (!rst_n) r_fire |-> !fifo_full)
    else $error("hbm_reader: beat arrived with the FIFO full");

endmodule
