// tb_lcp_systolic_array -- an 8-wide, 8-deep array with two slots: pours two
// stationary blocks in (last row first), streams random vectors that switch
// between the slots, and checks every row's dot product, tag and the latency
// 1 + row + log2(COLS). Also checks slot_busy while vectors are in flight.
`timescale 1ns/1ps
module tb_lcp_systolic_array;
  import lcp_pkg::*;
  localparam int COLS = 8, ROWS = 8, DEPTH = 2, LEVELS = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, ld_en = 0; tag_t in_tag = '0; logic [0:0] ld_slot = 0;
  data_t in_vec [COLS], ld_vec [COLS];
  logic [DEPTH-1:0] slot_busy;
  logic pre_valid [ROWS], out_valid [ROWS], busy; tag_t pre_tag [ROWS], out_tag [ROWS];
  logic signed [2*DATA_W+LEVELS-1:0] out_sum [ROWS];

  lcp_systolic_array #(.COLS(COLS), .ROWS(ROWS), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int Wt [DEPTH][ROWS][COLS];
  typedef struct { longint sum; int row; longint cyc; } exp_t;
  exp_t expq [ROWS][$];
  longint cyc = 0;
  int n_out = 0;

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    for (int r = 0; r < ROWS; r++) if (out_valid[r]) begin
      check(expq[r].size() > 0, "unexpected output");
      if (expq[r].size() > 0) begin
        automatic exp_t e = expq[r].pop_front();
        check(out_sum[r] == e.sum, $sformatf("row %0d sum %0d exp %0d", r, out_sum[r], e.sum));
        check(int'(out_tag[r].row) == e.row, "tag row");
        check(cyc - e.cyc == 1 + r + LEVELS, $sformatf("row %0d latency %0d", r, cyc - e.cyc));
        n_out++;
      end
    end
  end

  initial begin
    foreach (in_vec[c]) begin in_vec[c] = 0; ld_vec[c] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int s = 0; s < DEPTH; s++) begin
      for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) Wt[s][r][c] = $urandom_range(65535) - 32768;
      for (int r = ROWS - 1; r >= 0; r--) begin
        @(negedge clk); ld_en = 1; ld_slot = 1'(s);
        for (int c = 0; c < COLS; c++) ld_vec[c] = data_t'(Wt[s][r][c]);
      end
      @(negedge clk); ld_en = 0;
    end
    for (int n = 0; n < 100; n++) begin
      automatic int s = $urandom_range(DEPTH - 1);
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      in_tag = '0; in_tag.row = LEN_W'(n); in_tag.blk = IDX_W'(s);
      for (int c = 0; c < COLS; c++) in_vec[c] = data_t'($urandom);
      if (in_valid)
        for (int r = 0; r < ROWS; r++) begin
          automatic longint sum = 0;
          for (int c = 0; c < COLS; c++) sum += longint'(in_vec[c]) * longint'(Wt[s][r][c]);
          expq[r].push_back('{sum, n, cyc});
        end
      @(posedge clk);
      #1 check(slot_busy[s] == in_valid || !in_valid, "slot_busy set by entering vector");
    end
    @(negedge clk); in_valid = 0;
    repeat (ROWS) @(posedge clk);
    #1 check(slot_busy == '0, "slot_busy clear after vectors left the R1 chain");
    repeat (LEVELS + 2) @(posedge clk);
    #1 check(!busy, "busy clear after drain");
    for (int r = 0; r < ROWS; r++) check(expq[r].size() == 0, "all outputs seen");
    check(n_out > 0, "outputs seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
