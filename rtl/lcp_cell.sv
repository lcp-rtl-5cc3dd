// lcp_cell -- one cell of the systolic multiplier array.
//
// A cell holds the streaming register R1, a stationary buffer and one signed
// multiplier. Every clock R1 takes the streaming operand arriving from the
// cell above (or from memory, for the first row) and passes its previous value
// on to the cell below through s_out, so a streaming vector moves down one row
// per cycle. The multiplier forms R1 x stationary[rd_slot]; the product is
// combinational and goes to the row's adder tree, which registers it.
//
// Unlike a MAC-based systolic cell there is no accumulator here: additions are
// done by the per-row adder tree, as the paper describes. The stationary
// buffer's load chain (ld_*) passes straight through the cell to the cell
// below.
//
// Timing: s_out and prod reflect s_in one clock later.
module lcp_cell
  import lcp_pkg::*;
#(
  parameter int unsigned DEPTH = lcp_pkg::SBUF_DEF,
  localparam int unsigned SW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // streaming operand chain (R1)
  input  data_t                     s_in,
  output data_t                     s_out,
  // stationary buffer load chain
  input  logic                      ld_en,
  input  logic [SW-1:0]             ld_slot,
  input  data_t                     ld_in,
  output data_t                     ld_out,
  // multiplier
  input  logic [SW-1:0]             rd_slot,
  output logic signed [2*DATA_W-1:0] prod
);

  data_t r1_q;
  data_t w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r1_q <= '0;
    else        r1_q <= s_in;
  end

  assign s_out = r1_q;

  lcp_stat_buffer #(.DEPTH(DEPTH)) u_buf (
    .clk, .rst_n,
    .ld_en, .ld_slot, .ld_in, .ld_out,
    .rd_slot, .rd_data(w)
  );

  assign prod = r1_q * w;

endmodule
