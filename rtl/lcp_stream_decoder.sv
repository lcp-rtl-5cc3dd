// lcp_stream_decoder -- block-stream decoder at the array's memory port.
//
// Execution is data driven: memory pushes a stream of blocks, each laid out
// at sequential addresses as one header word (blk_hdr_t: type t, index i,
// length and the streaming fields) followed by `length` data words of COLS
// operands. The decoder reads a header, then routes the block's data words
// by the type t, as the multiplexer at the top of the array does in the
// paper's figure:
//   t = stationary  the words go to the stationary-buffer load chain, into
//                   slot i mod DEPTH (ld_en/ld_slot/ld_vec); a stationary
//                   block must be ROWS words long, last array row first;
//   t = streaming   the words go to the streaming registers of the first row
//                   (elem/vec), and the indexing logic gets the header
//                   (hdr_load) to tag them.
// A stationary word waits (stall, s_ready low) while slot_busy shows the
// target slot still read by vectors inside the array; loads into other slots
// go ahead while those vectors drain, which is how a branch switches layers
// without a pipeline flush.
//
// Header and data word layout, slot mapping and the stall rule are this
// design's choices; the paper gives the block fields (i, t, length) and the
// data-driven routing. One word is accepted per cycle at most.
module lcp_stream_decoder
  import lcp_pkg::*;
#(
  parameter int unsigned COLS  = lcp_pkg::COLS_DEF,
  parameter int unsigned ROWS  = lcp_pkg::ROWS_DEF,
  parameter int unsigned DEPTH = lcp_pkg::SBUF_DEF,
  localparam int unsigned SW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned W    = COLS * DATA_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             s_valid,
  output logic             s_ready,
  input  logic [W-1:0]     s_data,
  input  logic [DEPTH-1:0] slot_busy,
  output logic             hdr_load,
  output blk_hdr_t         hdr,
  output logic             elem,
  output data_t            vec    [COLS],
  output logic             ld_en,
  output logic [SW-1:0]    ld_slot,
  output data_t            ld_vec [COLS],
  output logic             stall,
  output logic             idle
);

  typedef enum logic [1:0] {S_HDR, S_STAT, S_STREAM} state_e;

  state_e           state_q;
  logic [LEN_W-1:0] left_q;
  logic [SW-1:0]    slot_q;
  logic             take;

  assign hdr = blk_hdr_t'(s_data[HDR_W-1:0]);

  for (genvar c = 0; c < COLS; c++) begin : g_unpack
    assign vec[c]    = data_t'(s_data[c*DATA_W +: DATA_W]);
    assign ld_vec[c] = data_t'(s_data[c*DATA_W +: DATA_W]);
  end

  always_comb begin
    stall    = (state_q == S_STAT) && s_valid && slot_busy[slot_q];
    s_ready  = !((state_q == S_STAT) && slot_busy[slot_q]);
    take     = s_valid && s_ready;
    hdr_load = take && (state_q == S_HDR) && (hdr.t == BLK_STREAM);
    elem     = take && (state_q == S_STREAM);
    ld_en    = take && (state_q == S_STAT);
    ld_slot  = slot_q;
    idle     = (state_q == S_HDR);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_HDR;
      left_q  <= '0;
      slot_q  <= '0;
    end else if (take) begin
      unique case (state_q)
        S_HDR: begin
          left_q <= hdr.length;
          slot_q <= SW'(hdr.blk);
          if (hdr.length != '0)
            state_q <= (hdr.t == BLK_STAT) ? S_STAT : S_STREAM;
        end
        default: begin
          left_q <= left_q - 1'b1;
          if (left_q == LEN_W'(1)) state_q <= S_HDR;
        end
      endcase
    end
  end

  a_stat_len: assert property (@(posedge clk) disable iff (!rst_n)
      take && state_q == S_HDR && hdr.t == BLK_STAT |-> hdr.length == LEN_W'(ROWS))
    else $error("lcp_stream_decoder: stationary block length must equal ROWS");

endmodule
