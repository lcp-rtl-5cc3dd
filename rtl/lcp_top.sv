// lcp_top -- latency-tailored weight-stationary accelerator.
//
// Block stream in, results out:
//
//   s_* --> lcp_fifo --> lcp_stream_decoder --+--> stationary load chain --+
//                                             |                            |
//                                             +--> lcp_indexing (tags)     |
//                                             |                            v
//                                             +--> streaming vector --> lcp_systolic_array
//                                                  (row 0 only)        COLS x ROWS cells,
//                                                                      adder tree per row
//                                                                             |
//            rd_* <-- lcp_mem_if <-- pre_tag (one stage before the sum) <-----+
//            rd_data ---------------> lcp_act_pool x ROWS <--- sum, tag ------+
//            wr_* <-- lcp_mem_if <-- (row, col, value) results
//
// A streaming vector of COLS operands entering row 0 produces, ROWS cycles
// apart at most, one dot product per array row: output element (row, col)
// with row = the vector's position in its block and col = (i << log2 ROWS) +
// array row. Reduction dimensions wider than COLS are processed slice by
// slice, with partial sums kept in memory (psum_base region) and added back;
// the last slice is pooled, activated and written to the out_base region.
//
// Memory side. The LPDDR2 device itself is outside this design. Its stream
// of blocks arrives on s_* (valid/ready, one COLS*DATA_W-bit word per cycle),
// and the result path has one read and one write port per array row:
// rd_en/rd_addr must be answered on rd_data on the next clock, and wr_en
// writes are always accepted. Configuration inputs set the address map.
//
// Status: stall is high while a stationary word waits for its slot,
// blk_done pulses as the last vector of a streaming block enters the array,
// idle is high when no work is buffered or in flight.
//
// Latency: a streaming word accepted on s_* at edge e (FIFO empty) is on the
// wr_* port of array row r after edge e + 2 + log2(COLS) + r: 7 cycles for
// row 0 and 70 for row 63 of the default array. One vector can enter every
// cycle, so a block of L vectors finishes L - 1 cycles after that.
//
// The structure follows the paper's microarchitecture; the handshakes, the
// header format and the address map are this design's choices, described in
// the modules that implement them.
module lcp_top
  import lcp_pkg::*;
#(
  parameter int unsigned COLS       = lcp_pkg::COLS_DEF,
  parameter int unsigned ROWS       = lcp_pkg::ROWS_DEF,
  parameter int unsigned DEPTH      = lcp_pkg::SBUF_DEF,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned W      = COLS * DATA_W,
  localparam int unsigned SW     = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned RW     = $clog2(ROWS),
  localparam int unsigned COL_W  = IDX_W + RW,
  localparam int unsigned SUM_W  = 2*DATA_W + $clog2(COLS)
) (
  input  logic         clk,
  input  logic         rst_n,
  // block stream from memory
  input  logic         s_valid,
  output logic         s_ready,
  input  logic [W-1:0] s_data,
  // address map
  input  addr_t        psum_base,
  input  addr_t        out_base,
  input  addr_t        row_pitch,
  // per-row partial-sum reads (one cycle latency)
  output logic         rd_en   [ROWS],
  output addr_t        rd_addr [ROWS],
  input  acc_t         rd_data [ROWS],
  // per-row result writes
  output logic         wr_en   [ROWS],
  output addr_t        wr_addr [ROWS],
  output acc_t         wr_data [ROWS],
  // status
  output logic         stall,
  output logic         blk_done,
  output logic         idle
);

  // ---- input FIFO ---------------------------------------------------------
  logic         f_valid, f_ready;
  logic [W-1:0] f_data;
  // Fill level, kept for debug.
  logic [$clog2(FIFO_DEPTH > 1 ? FIFO_DEPTH : 2):0] f_count;

  lcp_fifo #(.W(W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid (s_valid), .in_ready (s_ready), .in_data (s_data),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data),
    .count    (f_count)
  );

  // ---- stream decoder -------------------------------------------------------
  logic             hdr_load, elem, ld_en, dec_idle;
  blk_hdr_t         hdr;
  data_t            vec    [COLS];
  data_t            ld_vec [COLS];
  logic [SW-1:0]    ld_slot;
  logic [DEPTH-1:0] slot_busy;

  lcp_stream_decoder #(.COLS(COLS), .ROWS(ROWS), .DEPTH(DEPTH)) u_dec (
    .clk, .rst_n,
    .s_valid(f_valid), .s_ready(f_ready), .s_data(f_data),
    .slot_busy,
    .hdr_load, .hdr, .elem, .vec,
    .ld_en, .ld_slot, .ld_vec,
    .stall, .idle(dec_idle)
  );

  // ---- indexing --------------------------------------------------------------
  tag_t             in_tag;
  logic [IDX_W-1:0] pre_blk [ROWS];
  logic [IDX_W-1:0] out_blk [ROWS];
  logic [COL_W-1:0] pre_col [ROWS];
  logic [COL_W-1:0] out_col [ROWS];

  lcp_indexing #(.ROWS(ROWS)) u_idx (
    .clk, .rst_n,
    .hdr_load, .hdr, .elem,
    .tag(in_tag), .blk_done,
    .col_blk(out_blk), .col(out_col)
  );

  // The pre-stage columns use the same <<log2(ROWS), +r rule.
  for (genvar r = 0; r < ROWS; r++) begin : g_precol
    assign pre_col[r] = {pre_blk[r], RW'(r)};
  end

  // ---- array -------------------------------------------------------------------
  logic                    pre_valid [ROWS];
  tag_t                    pre_tag   [ROWS];
  logic                    out_valid [ROWS];
  tag_t                    out_tag   [ROWS];
  logic signed [SUM_W-1:0] out_sum   [ROWS];
  logic                    array_busy;

  lcp_systolic_array #(.COLS(COLS), .ROWS(ROWS), .DEPTH(DEPTH)) u_array (
    .clk, .rst_n,
    .in_valid(elem), .in_tag, .in_vec(vec),
    .ld_en, .ld_slot, .ld_vec,
    .slot_busy,
    .pre_valid, .pre_tag,
    .out_valid, .out_tag, .out_sum,
    .busy(array_busy)
  );

  // ---- activation & pooling, one lane per row ------------------------------------
  logic             res_valid [ROWS];
  logic             res_final [ROWS];
  logic [LEN_W-1:0] res_row   [ROWS];
  logic [COL_W-1:0] res_col   [ROWS];
  acc_t             res_data  [ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_lane
    assign pre_blk[r] = pre_tag[r].blk;
    assign out_blk[r] = out_tag[r].blk;

    lcp_act_pool #(.SUM_W(SUM_W), .COL_W(COL_W)) u_ap (
      .clk, .rst_n,
      .in_valid(out_valid[r]), .in_tag(out_tag[r]), .in_col(out_col[r]),
      .in_sum  (out_sum[r]),   .psum  (rd_data[r]),
      .wr_valid(res_valid[r]), .wr_final(res_final[r]),
      .wr_row  (res_row[r]),   .wr_col  (res_col[r]),
      .wr_data (res_data[r])
    );
  end

  // ---- memory interface --------------------------------------------------------------
  lcp_mem_if #(.ROWS(ROWS), .COL_W(COL_W)) u_mif (
    .psum_base, .out_base, .row_pitch,
    .pre_valid, .pre_tag, .pre_col,
    .rd_en, .rd_addr,
    .res_valid, .res_final, .res_row, .res_col, .res_data,
    .wr_en, .wr_addr, .wr_data
  );

  // Idle: nothing buffered, no block open, nothing left in the pipelines.
  always_comb begin
    idle = dec_idle && !f_valid && !array_busy;
    for (int r = 0; r < ROWS; r++) idle = idle && !res_valid[r];
  end

endmodule
