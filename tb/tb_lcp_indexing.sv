// tb_lcp_indexing -- checks row counting against the block length with wrap
// to zero, the last-element and end-of-layer flags, the partial-sum flag from
// the slice index, and the column rule col = (i << 6) + array row.
`timescale 1ns/1ps
module tb_lcp_indexing;
  import lcp_pkg::*;
  localparam int ROWS = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic hdr_load = 0, elem = 0, blk_done;
  blk_hdr_t hdr = '0;
  tag_t tag;
  logic [IDX_W-1:0] col_blk [ROWS];
  logic [IDX_W+5:0] col [ROWS];

  lcp_indexing #(.ROWS(ROWS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    foreach (col_blk[r]) col_blk[r] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int b = 0; b < 12; b++) begin
      automatic int len = $urandom_range(1, 20), kc = $urandom_range(1, 4), ki = $urandom_range(0, kc - 1);
      automatic int blk = $urandom_range(255);
      @(negedge clk);
      hdr = '0; hdr.t = BLK_STREAM; hdr.blk = IDX_W'(blk); hdr.length = LEN_W'(len);
      hdr.k_idx = KCNT_W'(ki); hdr.k_cnt = KCNT_W'(kc); hdr.pool_log2 = 2'(b); hdr.relu = b[0];
      hdr_load = 1;
      @(posedge clk); #1 hdr_load = 0;
      // two passes over the block: the counter wraps to 0 after length
      for (int pass = 0; pass < 2; pass++)
        for (int l = 0; l < len; l++) begin
          @(negedge clk);
          elem = ($urandom_range(3) != 0);
          while (!elem) begin
            #1 check(tag.row == LEN_W'(l), "row held without elem");
            @(negedge clk); elem = ($urandom_range(3) != 0);
          end
          #1;
          check(tag.row == LEN_W'(l), $sformatf("row %0d exp %0d", tag.row, l));
          check(tag.blk == IDX_W'(blk), "blk");
          check(tag.row_last == (l == len - 1), "row_last");
          check(blk_done == (l == len - 1), "blk_done");
          check(tag.last == (ki == kc - 1), "last (end of layer)");
          check(tag.acc == (ki != 0), "acc");
          check(tag.pool_log2 == 2'(b) && tag.relu == b[0], "pool/relu fields");
          @(posedge clk); #1 elem = 0;
        end
    end
    // column formation
    for (int n = 0; n < 20; n++) begin
      foreach (col_blk[r]) col_blk[r] = IDX_W'($urandom);
      #1;
      for (int r = 0; r < ROWS; r++)
        check(int'(col[r]) == int'(col_blk[r]) * 64 + r, $sformatf("col row %0d", r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
