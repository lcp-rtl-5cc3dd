// lcp_indexing -- row/column indexing and end-of-layer detection.
//
// The accelerator is data driven: results carry their own coordinates, and
// the memory interface later writes them to the place these name.
//
// Row index. When a streaming block's header arrives (hdr_load), its index i,
// length and reduction-slice fields are latched and the element counter is
// cleared. Each accepted streaming element (elem) takes the counter value as
// its row index, and the counter steps until it reaches length, then returns
// to zero (paper, Fig. 8a item 4: "row = i; if i < length; i++; row = 0").
// The tag it produces also says whether this is the last element of the block
// (row_last), whether a partial sum must be added (acc, every slice but the
// first) and whether this slice ends the layer's reduction (last, found by
// comparing the slice index with the slice count). The "last?" signal starts
// pooling and activation downstream.
//
// Column index. A stationary block fills all ROWS array rows, so array row r
// produces output column (i << log2(ROWS)) + r: the "<< 6" and "+1" chain of
// the paper's figure for ROWS = 64. col_blk/col are the per-row form of this,
// used wherever a row's tag has to be turned into a column.
//
// Timing: tag is combinational from the latched header and the counter; the
// counter advances on the clock edge that accepts elem.
module lcp_indexing
  import lcp_pkg::*;
#(
  parameter int unsigned ROWS  = lcp_pkg::ROWS_DEF,
  localparam int unsigned RW    = $clog2(ROWS),
  localparam int unsigned COL_W = IDX_W + RW
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             hdr_load,
  input  blk_hdr_t         hdr,
  input  logic             elem,
  output tag_t             tag,
  output logic             blk_done,
  // per-row column formation
  input  logic [IDX_W-1:0] col_blk [ROWS],
  output logic [COL_W-1:0] col     [ROWS]
);

  blk_hdr_t         hdr_q;
  logic [LEN_W-1:0] cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hdr_q <= '0;
      cnt_q <= '0;
    end else if (hdr_load) begin
      hdr_q <= hdr;
      cnt_q <= '0;
    end else if (elem) begin
      cnt_q <= (cnt_q + 1'b1 < hdr_q.length) ? cnt_q + 1'b1 : '0;
    end
  end

  always_comb begin
    tag.row       = cnt_q;
    tag.blk       = hdr_q.blk;
    tag.acc       = (hdr_q.k_idx != '0);
    tag.last      = (hdr_q.k_idx + 1'b1 == hdr_q.k_cnt);
    tag.row_last  = (cnt_q + 1'b1 == hdr_q.length);
    tag.pool_log2 = hdr_q.pool_log2;
    tag.relu      = hdr_q.relu;
  end

  assign blk_done = elem && tag.row_last;

  for (genvar r = 0; r < ROWS; r++) begin : g_col
    assign col[r] = {col_blk[r], RW'(r)};
  end

endmodule
