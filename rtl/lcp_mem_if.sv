// lcp_mem_if -- memory interface of the result path.
//
// Results leave the array as (row, column, value) triples. This block maps
// the coordinates to physical word addresses, for all ROWS lanes at once:
//   partial sums   psum_base + row * row_pitch + col
//   final results  out_base  + row * row_pitch + col
// where row_pitch is the number of output columns of the layer. Partial-sum
// reads use the same map; they are issued from the stage before the adder
// tree's last, so that a memory with one cycle of read latency returns the
// value in the cycle the sum is ready.
//
// The paper states that the memory interface uses the row and column indices
// to write results to their physical locations; the row-major map, the
// separate partial-sum region and the one-cycle read latency are this
// design's choices. Reads and writes are combinational from the lanes' tags.
module lcp_mem_if
  import lcp_pkg::*;
#(
  parameter int unsigned ROWS  = lcp_pkg::ROWS_DEF,
  parameter int unsigned COL_W = IDX_W + 6
) (
  input  addr_t             psum_base,
  input  addr_t             out_base,
  input  addr_t             row_pitch,
  // partial-sum read requests from the adder trees
  input  logic              pre_valid [ROWS],
  input  tag_t              pre_tag   [ROWS],
  input  logic [COL_W-1:0]  pre_col   [ROWS],
  output logic              rd_en     [ROWS],
  output addr_t             rd_addr   [ROWS],
  // results from the activation/pooling lanes
  input  logic              res_valid [ROWS],
  input  logic              res_final [ROWS],
  input  logic [LEN_W-1:0]  res_row   [ROWS],
  input  logic [COL_W-1:0]  res_col   [ROWS],
  input  acc_t              res_data  [ROWS],
  output logic              wr_en     [ROWS],
  output addr_t             wr_addr   [ROWS],
  output acc_t              wr_data   [ROWS]
);

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      rd_en[r]   = pre_valid[r] && pre_tag[r].acc;
      rd_addr[r] = psum_base + addr_t'(pre_tag[r].row) * row_pitch
                 + addr_t'(pre_col[r]);
      wr_en[r]   = res_valid[r];
      wr_addr[r] = (res_final[r] ? out_base : psum_base)
                 + addr_t'(res_row[r]) * row_pitch + addr_t'(res_col[r]);
      wr_data[r] = res_data[r];
    end
  end

endmodule
