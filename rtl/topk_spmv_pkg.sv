// Shared constants and types of the Top-K SpMV accelerator.
//
// The accelerator multiplies a sparse matrix A, stored in the Block-Streaming
// CSR (BS-CSR) layout, by a dense vector x and keeps only the k largest entries
// of the product in each of c independent cores. This package holds the
// default sizes of the main configuration (20-bit fixed point, 15 non-zeros
// per 512-bit packet, k = 8, 32 cores), the AXI4 channel structs every core
// uses towards its HBM pseudo-channel, and the functions that locate the
// fields of a BS-CSR packet.
//
// BS-CSR packet (one 512-bit HBM beat) as laid out here, LSB first:
//   bit 0                         new_row (1: the packet's first row is a new
//                                 row; 0: it continues the previous packet's
//                                 last row)
//   bits 1 .. B*PTR_W             ptr[j], PTR_W bits each: cumulative number of
//                                 non-zeros up to the end of the j-th row of
//                                 the packet; unused entries are 0
//   next B*IDX_W bits             idx[j]: column of non-zero j
//   next B*V bits                 val[j]: value of non-zero j, unsigned Q1.(V-1)
//   remaining bits                unused, zero
// The field sizes and their order follow the paper's packet drawing; the exact
// bit positions are this design's choice.
package topk_spmv_pkg;

  // Main configuration.
  localparam int unsigned DATA_W   = 512;   // HBM port width and packet size
  localparam int unsigned NUM_CORES = 32;   // one core per HBM pseudo-channel
  localparam int unsigned PKT_NNZ  = 15;    // B, non-zeros per packet
  localparam int unsigned VAL_W    = 20;    // V, Q1.19 unsigned fixed point
  localparam int unsigned IDX_W    = 10;    // column index bits (M <= 1024)
  localparam int unsigned PTR_W    = 4;     // ceil(log2(B+1))
  localparam int unsigned VEC_LEN  = 1024;  // M, entries of x held on chip
  localparam int unsigned TOP_K    = 8;     // k, results kept per core
  localparam int unsigned ROWS_PER_PKT = 4; // r, finished rows tracked per packet
  localparam int unsigned ROW_W    = 32;    // row index width of a result

  // AXI4 subset used on each HBM pseudo-channel.
  localparam int unsigned AXI_ADDR_W = 33;  // 8 GB of HBM
  localparam int unsigned MAX_BURST  = 256; // beats per AXI4 INCR burst

  typedef logic [AXI_ADDR_W-1:0] axi_addr_t;
  typedef logic [DATA_W-1:0]     axi_data_t;

  typedef struct packed {
    axi_addr_t  addr;
    logic [7:0] len;    // beats - 1
    logic [2:0] size;   // log2(bytes per beat)
    logic [1:0] burst;  // 2'b01 = INCR
  } axi_a_t;            // AR and AW channel payload

  typedef struct packed {
    axi_data_t  data;
    logic [1:0] resp;
    logic       last;
  } axi_r_t;

  typedef struct packed {
    axi_data_t           data;
    logic [DATA_W/8-1:0] strb;
    logic                last;
  } axi_w_t;

  localparam logic [2:0] AXI_SIZE_64B = 3'd6;
  localparam logic [1:0] AXI_BURST_INCR = 2'b01;

  // Offsets of the BS-CSR fields inside a packet.
  function automatic int unsigned idx_off(int unsigned b, int unsigned pw);
    return 1 + b * pw;
  endfunction
  function automatic int unsigned val_off(int unsigned b, int unsigned pw, int unsigned iw);
    return 1 + b * pw + b * iw;
  endfunction

endpackage
