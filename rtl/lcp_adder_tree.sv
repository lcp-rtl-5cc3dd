// lcp_adder_tree -- pipelined binary adder tree of one array row.
//
// Reduces the N products of a row to one sum. Level k adds pairs of level k-1
// values and is registered, so the tree has log2(N) pipeline stages: five for
// the paper's 32-wide rows. A valid bit and a tag (the streaming vector's
// indices) move through the stages with the data.
//
// Besides the sum, the tree exposes the valid/tag of the stage before the last
// (pre_valid/pre_tag). The memory interface uses it to issue the partial-sum
// read one cycle ahead, so that the read data arrives together with the sum.
//
// busy is high while any stage holds a valid vector.
//
// Timing: in_* sampled at an edge appear on out_* LEVELS edges later. The
// structure follows the paper; the widths grow by one bit per level.
module lcp_adder_tree #(
  parameter int unsigned N      = 32,
  parameter int unsigned IN_W   = 32,
  parameter int unsigned TAG_W  = 1,
  localparam int unsigned LEVELS = $clog2(N),
  localparam int unsigned OUT_W  = IN_W + LEVELS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [TAG_W-1:0]        in_tag,
  input  logic signed [IN_W-1:0]  in_data [N],
  output logic                    pre_valid,
  output logic [TAG_W-1:0]        pre_tag,
  output logic                    out_valid,
  output logic [TAG_W-1:0]        out_tag,
  output logic signed [OUT_W-1:0] out_sum,
  output logic                    busy
);

  // lvl[k][j]: value j of level k; level 0 is the (sign-extended) input.
  logic signed [OUT_W-1:0] lvl   [LEVELS+1][N];
  logic                    vld   [LEVELS+1];
  logic [TAG_W-1:0]        tag   [LEVELS+1];

  always_comb begin
    for (int j = 0; j < N; j++) lvl[0][j] = OUT_W'(in_data[j]);
    vld[0] = in_valid;
    tag[0] = in_tag;
  end

  for (genvar k = 1; k <= LEVELS; k++) begin : g_lvl
    localparam int unsigned NK = N >> k;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vld[k] <= 1'b0;
        tag[k] <= '0;
        for (int j = 0; j < N; j++) lvl[k][j] <= '0;
      end else begin
        vld[k] <= vld[k-1];
        tag[k] <= tag[k-1];
        for (int j = 0; j < N; j++)
          lvl[k][j] <= (j < NK) ? lvl[k-1][2*j] + lvl[k-1][2*j+1] : '0;
      end
    end
  end

  assign pre_valid = vld[LEVELS-1];
  assign pre_tag   = tag[LEVELS-1];
  assign out_valid = vld[LEVELS];
  assign out_tag   = tag[LEVELS];
  assign out_sum   = lvl[LEVELS][0];

  // Any vector inside the registered stages.
  always_comb begin
    busy = 1'b0;
    for (int k = 1; k <= LEVELS; k++) busy = busy || vld[k];
  end

  initial begin
    assert (N >= 2 && (1 << LEVELS) == N)
      else $error("lcp_adder_tree: N must be a power of two >= 2");
  end

endmodule
