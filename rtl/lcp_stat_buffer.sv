// lcp_stat_buffer -- stationary-operand buffer of one array cell.
//
// Each cell keeps DEPTH stationary operands (weights), one per slot, so that a
// layer whose stationary matrix is larger than the array, or several layers of
// a branch, can switch between stationary blocks without reloading them from
// memory. The multiplier reads the slot named by rd_slot (the low bits of the
// block index i that travels with the streaming data).
//
// Loading: the buffers of one column form a shift chain, like the streaming
// registers. When ld_en is high, slot ld_slot takes ld_in (the same slot of the
// cell above, or the memory word for the first row) and the old content of
// that slot leaves on ld_out towards the cell below. Other slots keep their
// contents, so a new block can be poured into one slot while the others are
// in use. ld_out and rd_data are combinational reads of the registers.
//
// The paper describes the buffer, its per-cell placement, its selection by i
// and its column chaining; the slot count and the per-slot shift are this
// design's choices. Reset clears every slot to zero.
module lcp_stat_buffer
  import lcp_pkg::*;
#(
  parameter int unsigned DEPTH = lcp_pkg::SBUF_DEF,
  localparam int unsigned SW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ld_en,
  input  logic [SW-1:0] ld_slot,
  input  data_t         ld_in,
  output data_t         ld_out,
  input  logic [SW-1:0] rd_slot,
  output data_t         rd_data
);

  data_t slot_q [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < DEPTH; s++) slot_q[s] <= '0;
    end else if (ld_en) begin
      slot_q[ld_slot] <= ld_in;
    end
  end

  assign ld_out  = slot_q[ld_slot];
  assign rd_data = slot_q[rd_slot];

endmodule
