// lcp_fifo -- synchronous FIFO with valid/ready on both sides.
//
// Decouples the memory stream from the array so that a stall of the array
// (a stationary load waiting for its slot) does not reach the memory in the
// same cycle. DEPTH words of W bits are kept in a register array with read and
// write pointers; a word can be written and read in the same cycle, also when
// the FIFO is full. The output is the head entry, valid while the FIFO is not
// empty.
//
// The paper mentions FIFO buffers used for pipelining on the chip without
// describing them; this FIFO, its depth and its handshake are this design's
// own. Input handshake rule (asserted): once in_valid is high without
// in_ready, the word is held until it is accepted.
module lcp_fifo #(
  parameter int unsigned W     = 512,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned PW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [PW:0]  count
);

  logic [W-1:0]  mem_q [DEPTH];
  logic [PW-1:0] wp_q, rp_q;
  logic [PW:0]   cnt_q;
  logic          push, pop;

  assign out_valid = (cnt_q != '0);
  assign in_ready  = (cnt_q != (PW+1)'(DEPTH)) || out_ready;
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem_q[rp_q];
  assign count     = cnt_q;

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q  <= '0;
      rp_q  <= '0;
      cnt_q <= '0;
      for (int i = 0; i < DEPTH; i++) mem_q[i] <= '0;
    end else begin
      if (push) begin
        mem_q[wp_q] <= in_data;
        wp_q        <= inc(wp_q);
      end
      if (pop) rp_q <= inc(rp_q);
      cnt_q <= cnt_q + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           in_valid && !in_ready |=> in_valid && $stable(in_data))
    else $error("lcp_fifo: input word dropped or changed before acceptance");

endmodule
