// lcp_pkg -- types and constants shared by the latency-tailored systolic
// accelerator.
//
// The array is 32 cells wide and 64 rows deep, as in the paper. Operands are
// 16-bit signed integers: the paper's peak figures (64 operations per byte
// of streamed data) work out only for 2-byte operands, and its lossless
// quantisation uses 3.13 fixed point, so results are rescaled by 13 fraction
// bits when they leave the array. Accumulator width, index widths and the
// header layout are this design's own choices; the paper does not give them.
//
// A block in the input stream starts with one header word (blk_hdr_t in the
// low bits of a stream word), followed by `length` data words, each a vector
// of COLS operands with element c in bits [c*DATA_W +: DATA_W].
package lcp_pkg;

  // Array geometry (paper: 32 wide, 64 deep).
  localparam int unsigned COLS_DEF  = 32;
  localparam int unsigned ROWS_DEF  = 64;
  // Stationary-buffer slots per cell (not given by the paper).
  localparam int unsigned SBUF_DEF  = 4;

  // Operand and accumulator widths.
  localparam int unsigned DATA_W = 16;  // 2-byte operands
  localparam int unsigned FRAC_W = 13;  // 3.13 fixed point
  localparam int unsigned ACC_W  = 40;  // partial-sum width (own choice)

  // Header field widths (own choice).
  localparam int unsigned IDX_W  = 8;   // block index i
  localparam int unsigned LEN_W  = 16;  // block length / row index
  localparam int unsigned KCNT_W = 10;  // reduction-slice index and count
  localparam int unsigned ADDR_W = 32;  // memory word address

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [ADDR_W-1:0]        addr_t;

  // Block type t: stationary blocks initialise the buffers, streaming blocks
  // are processed.
  typedef enum logic {
    BLK_STREAM = 1'b0,
    BLK_STAT   = 1'b1
  } blk_type_e;

  // Block header. For a streaming block, k_idx/k_cnt say which of the k_cnt
  // 32-wide slices of the reduction dimension this block carries; the last
  // slice ends the layer's work for these outputs and triggers pooling and
  // activation. pool_log2 gives the pooling window (1, 2, 4 or 8 rows) and
  // relu enables the activation.
  typedef struct packed {
    logic              relu;
    logic [1:0]        pool_log2;
    logic [KCNT_W-1:0] k_cnt;
    logic [KCNT_W-1:0] k_idx;
    logic [LEN_W-1:0]  length;
    logic [IDX_W-1:0]  blk;
    blk_type_e         t;
  } blk_hdr_t;

  localparam int unsigned HDR_W = $bits(blk_hdr_t);

  // Tag that travels down the array and through the adder tree with every
  // streaming vector.
  typedef struct packed {
    logic [LEN_W-1:0] row;       // element index within the block
    logic [IDX_W-1:0] blk;       // block index i
    logic             acc;       // add the partial sum read from memory
    logic             last;      // last reduction slice: pool + activate
    logic             row_last;  // last element of the block
    logic [1:0]       pool_log2;
    logic             relu;
  } tag_t;

  localparam int unsigned TAG_W = $bits(tag_t);

  // Rescale a 3.13 x 3.13 product sum back to a 3.13 operand, saturating.
  function automatic data_t requantize(acc_t v);
    acc_t s;
    s = v >>> FRAC_W;
    if (s > acc_t'(2**(DATA_W-1) - 1))   return data_t'(2**(DATA_W-1) - 1);
    if (s < -acc_t'(2**(DATA_W-1)))      return data_t'(-(2**(DATA_W-1)));
    return data_t'(s);
  endfunction

endpackage
