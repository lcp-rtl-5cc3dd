// tb_lcp_stream_decoder -- sends random stationary and streaming blocks and
// checks that headers are decoded, data words are routed to the load chain
// (with slot i mod DEPTH) or to the streaming input by the block type, and
// that stationary words wait while their slot is busy but not while another
// slot is.
`timescale 1ns/1ps
module tb_lcp_stream_decoder;
  import lcp_pkg::*;
  localparam int COLS = 4, ROWS = 4, DEPTH = 4, W = COLS * DATA_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s_valid = 0, s_ready; logic [W-1:0] s_data = '0;
  logic [DEPTH-1:0] slot_busy = '0;
  logic hdr_load, elem, ld_en, stall, idle; blk_hdr_t hdr;
  data_t vec [COLS], ld_vec [COLS]; logic [1:0] ld_slot;

  lcp_stream_decoder #(.COLS(COLS), .ROWS(ROWS), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int n_stall = 0, n_other_busy = 0;

  // send one word; check the decoder's view of it in the accepting cycle
  task automatic send(logic [W-1:0] d, int kind, int slot);
    // kind: 0 header (stream), 1 header (stat), 2 stat data, 3 stream data
    @(negedge clk);
    s_valid = 1; s_data = d;
    if (kind == 2 && $urandom_range(2) == 0) slot_busy = DEPTH'(1) << slot;
    else if ($urandom_range(2) == 0) slot_busy = DEPTH'(1) << ((slot + 1) % DEPTH);
    else slot_busy = '0;
    #1;
    while (!s_ready) begin
      check(kind == 2 && slot_busy[slot] && stall, "only a busy slot stalls");
      n_stall++;
      @(negedge clk); slot_busy = '0; #1;
    end
    check(!(kind == 2 && slot_busy[slot]), "stationary word accepted while its slot is busy");
    if (kind == 2 && slot_busy != '0) n_other_busy++;
    check(idle == (kind < 2), "idle between blocks");
    check(hdr_load == (kind == 0), "hdr_load");
    check(ld_en == (kind == 2), "ld_en");
    check(elem == (kind == 3), "elem");
    if (kind == 2) check(int'(ld_slot) == slot, "ld_slot");
    for (int c = 0; c < COLS; c++) begin
      if (kind == 2) check(ld_vec[c] == data_t'(d[c*DATA_W +: DATA_W]), "ld_vec");
      if (kind == 3) check(vec[c] == data_t'(d[c*DATA_W +: DATA_W]), "vec");
    end
    @(posedge clk);
    #1 s_valid = 0; slot_busy = '0;
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int b = 0; b < 40; b++) begin
      automatic blk_hdr_t h = '0;
      automatic bit stat = $urandom_range(1);
      automatic int blk = $urandom_range(255);
      automatic int len = stat ? ROWS : $urandom_range(1, 6);
      h.t = stat ? BLK_STAT : BLK_STREAM; h.blk = IDX_W'(blk); h.length = LEN_W'(len);
      h.k_cnt = 1;
      send(W'(h), stat ? 1 : 0, blk % DEPTH);
      for (int l = 0; l < len; l++) send({$urandom, $urandom}, stat ? 2 : 3, blk % DEPTH);
    end
    check(n_stall > 0, "stall exercised");
    check(n_other_busy > 0, "load with another slot busy exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
