// lcp_act_pool -- partial-sum accumulation, pooling and activation of one
// array row.
//
// Every sum leaving a row's adder tree passes through one of these lanes.
//   1. Accumulate: when the reduction dimension of a layer is wider than the
//      array (COLS), it is cut into k_cnt slices processed one after another.
//      For every slice but the first (tag.acc) the partial sum of the earlier
//      slices, read back from memory (psum), is added.
//   2. Select ("last?"): for every slice but the last the running sum goes back
//      to memory unchanged, as a partial result (wr_final = 0, full ACC_W).
//   3. Pool and activate: on the last slice the sum enters a max-pooling
//      window of 2**pool_log2 consecutive rows; when the window closes (or the
//      block ends) its maximum goes through ReLU if enabled, is rescaled from
//      the 3.13 x 3.13 product format back to a 3.13 operand with saturation,
//      and is written out as a final result for pooled row row >> pool_log2.
//
// The paper places the adder with its memory feedback, the last? multiplexer,
// pooling and then activation in this order behind each row; it does not say
// which pooling or activation functions, window shape or rounding. Max
// pooling over consecutive rows of a block (the host orders a 2-D window's
// members consecutively), ReLU and truncating requantisation are this
// design's choices. Max pooling and ReLU commute, so the order is immaterial.
//
// Timing: in_* and psum are used in the same cycle; wr_* is registered, one
// cycle later. There is no back-pressure: results are always accepted.
module lcp_act_pool
  import lcp_pkg::*;
#(
  parameter int unsigned SUM_W = 2*DATA_W + 5,
  parameter int unsigned COL_W = IDX_W + 6
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  tag_t                    in_tag,
  input  logic [COL_W-1:0]        in_col,
  input  logic signed [SUM_W-1:0] in_sum,
  input  acc_t                    psum,
  output logic                    wr_valid,
  output logic                    wr_final,
  output logic [LEN_W-1:0]        wr_row,
  output logic [COL_W-1:0]        wr_col,
  output acc_t                    wr_data
);

  acc_t             v, m, a;
  acc_t             max_q;
  logic             open_q;     // a pooling window has members already
  logic             win_end;
  logic [LEN_W-1:0] pmask;

  always_comb begin
    v       = acc_t'(in_sum) + (in_tag.acc ? psum : '0);
    m       = (open_q && max_q > v) ? max_q : v;
    pmask   = LEN_W'((1 << in_tag.pool_log2) - 1);
    win_end = ((in_tag.row & pmask) == pmask) || in_tag.row_last;
    a       = (in_tag.relu && m < 0) ? '0 : m;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      max_q    <= '0;
      open_q   <= 1'b0;
      wr_valid <= 1'b0;
      wr_final <= 1'b0;
      wr_row   <= '0;
      wr_col   <= '0;
      wr_data  <= '0;
    end else begin
      wr_valid <= 1'b0;
      if (in_valid) begin
        wr_col <= in_col;
        if (!in_tag.last) begin
          wr_valid <= 1'b1;
          wr_final <= 1'b0;
          wr_row   <= in_tag.row;
          wr_data  <= v;
        end else if (win_end) begin
          wr_valid <= 1'b1;
          wr_final <= 1'b1;
          wr_row   <= in_tag.row >> in_tag.pool_log2;
          wr_data  <= acc_t'(requantize(a));
          open_q   <= 1'b0;
        end else begin
          max_q    <= m;
          open_q   <= 1'b1;
        end
      end
    end
  end

endmodule
