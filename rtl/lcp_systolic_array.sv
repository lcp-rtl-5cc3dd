// lcp_systolic_array -- weight-stationary multiplier array with per-row
// adder trees.
//
// COLS x ROWS cells (32 x 64 in the paper). Only the first row is connected to
// memory: a streaming vector of COLS operands enters row 0 and moves down one
// row per clock through the cells' R1 registers, so row r sees it r cycles
// after row 0. Each row multiplies it element-wise with the stationary operands
// its cells hold in the slot selected by the vector's block index, and the
// row's adder tree sums the COLS products in log2(COLS) pipelined stages. Row r
// thus yields the dot product of the vector with stationary row r: one input
// vector produces ROWS outputs, one per row, skewed by one cycle per row.
//
// The tag (tag_t) that comes with a vector is carried along the rows in
// registers parallel to R1 and through the adder tree with the products.
//
// Stationary loading: while ld_en is high the COLS-wide word ld_vec enters
// slot ld_slot of row 0 and that slot's old contents shift one row down, in
// every column at once. Pouring ROWS words fills one slot of the whole array;
// the first word poured ends in the last row. slot_busy flags the slots still
// used by vectors inside the R1 chain: loading such a slot would change the
// operands under them, so the stream decoder waits for it to clear.
//
// busy is high while any vector is inside the array or its adder trees.
//
// Timing: a vector presented with in_valid at edge e is in row r's R1 after
// edge e+1+r, and row r's sum is on out_* after edge e+1+r+log2(COLS).
module lcp_systolic_array
  import lcp_pkg::*;
#(
  parameter int unsigned COLS  = lcp_pkg::COLS_DEF,
  parameter int unsigned ROWS  = lcp_pkg::ROWS_DEF,
  parameter int unsigned DEPTH = lcp_pkg::SBUF_DEF,
  localparam int unsigned SW     = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned LEVELS = $clog2(COLS),
  localparam int unsigned SUM_W  = 2*DATA_W + LEVELS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // streaming input (to row 0)
  input  logic                     in_valid,
  input  tag_t                     in_tag,
  input  data_t                    in_vec [COLS],
  // stationary load (to row 0)
  input  logic                     ld_en,
  input  logic [SW-1:0]            ld_slot,
  input  data_t                    ld_vec [COLS],
  output logic [DEPTH-1:0]         slot_busy,
  // per-row results
  output logic                     pre_valid [ROWS],
  output tag_t                     pre_tag   [ROWS],
  output logic                     out_valid [ROWS],
  output tag_t                     out_tag   [ROWS],
  output logic signed [SUM_W-1:0]  out_sum   [ROWS],
  output logic                     busy
);

  // Per-row streaming valid/tag registers, parallel to the cells' R1.
  logic row_v [ROWS];
  tag_t row_t [ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) begin
        row_v[r] <= 1'b0;
        row_t[r] <= '0;
      end
    end else begin
      row_v[0] <= in_valid;
      row_t[0] <= in_tag;
      for (int r = 1; r < ROWS; r++) begin
        row_v[r] <= row_v[r-1];
        row_t[r] <= row_t[r-1];
      end
    end
  end

  // Slots read by vectors that are still in the R1 chain.
  always_comb begin
    slot_busy = '0;
    for (int r = 0; r < ROWS; r++)
      if (row_v[r]) slot_busy[SW'(row_t[r].blk)] = 1'b1;
  end

  // Streaming and load chains between rows: chain[r] feeds row r.
  data_t s_chain  [ROWS+1][COLS];
  data_t ld_chain [ROWS+1][COLS];

  for (genvar c = 0; c < COLS; c++) begin : g_in
    assign s_chain[0][c]  = in_vec[c];
    assign ld_chain[0][c] = ld_vec[c];
  end

  logic tree_busy [ROWS];

  always_comb begin
    busy = 1'b0;
    for (int r = 0; r < ROWS; r++) busy = busy || row_v[r] || tree_busy[r];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    logic signed [2*DATA_W-1:0] prod [COLS];

    for (genvar c = 0; c < COLS; c++) begin : g_cell
      lcp_cell #(.DEPTH(DEPTH)) u_cell (
        .clk, .rst_n,
        .s_in   (s_chain[r][c]),
        .s_out  (s_chain[r+1][c]),
        .ld_en,
        .ld_slot,
        .ld_in  (ld_chain[r][c]),
        .ld_out (ld_chain[r+1][c]),
        .rd_slot(SW'(row_t[r].blk)),
        .prod   (prod[c])
      );
    end

    lcp_adder_tree #(.N(COLS), .IN_W(2*DATA_W), .TAG_W(TAG_W)) u_tree (
      .clk, .rst_n,
      .in_valid (row_v[r]),
      .in_tag   (row_t[r]),
      .in_data  (prod),
      .pre_valid(pre_valid[r]),
      .pre_tag  (pre_tag[r]),
      .out_valid(out_valid[r]),
      .out_tag  (out_tag[r]),
      .out_sum  (out_sum[r]),
      .busy     (tree_busy[r])
    );
  end

endmodule
