// tb_lcp_act_pool -- drives one activation/pooling lane with random blocks of
// sums and checks every write against a reference: partial sums (with and
// without the memory addend) on non-final slices, and on the final slice max
// pooling over 1/2/4/8 rows with the window cut at the end of the block,
// optional ReLU and 3.13 requantisation with saturation. Output comes one
// cycle after the input.
`timescale 1ns/1ps
module tb_lcp_act_pool;
  import lcp_pkg::*;
  localparam int SUM_W = 37, COL_W = 14;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0; tag_t in_tag = '0; logic [COL_W-1:0] in_col = 0;
  logic signed [SUM_W-1:0] in_sum = 0; acc_t psum = 0;
  logic wr_valid, wr_final; logic [LEN_W-1:0] wr_row; logic [COL_W-1:0] wr_col; acc_t wr_data;

  lcp_act_pool #(.SUM_W(SUM_W), .COL_W(COL_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  typedef struct { bit fin; int row; int col; longint data; } wr_t;
  wr_t expq [$];
  int n_sat = 0, n_relu = 0;

  always @(posedge clk) if (rst_n) begin
    if (wr_valid) begin
      check(expq.size() > 0, "unexpected write");
      if (expq.size() > 0) begin
        automatic wr_t e = expq.pop_front();
        check(wr_final == e.fin && int'(wr_row) == e.row && int'(wr_col) == e.col && wr_data == acc_t'(e.data),
              $sformatf("write fin=%0d row=%0d col=%0d data=%0d, exp %0d %0d %0d %0d",
                        wr_final, wr_row, wr_col, wr_data, e.fin, e.row, e.col, e.data));
      end
    end
  end

  function automatic longint rq(longint v);
    longint s = v >>> 13;
    if (s > 32767) begin n_sat++; return 32767; end
    if (s < -32768) begin n_sat++; return -32768; end
    return s;
  endfunction

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int b = 0; b < 40; b++) begin
      automatic int len = $urandom_range(1, 12), pl = $urandom_range(0, 3), P;
      automatic bit last = $urandom_range(1), acc = $urandom_range(1), relu = $urandom_range(1);
      automatic int col = $urandom_range(1000);
      automatic int sh = $urandom_range(0, 16);
      longint m; int members;
      P = 1 << pl;
      members = 0; m = 0;
      for (int l = 0; l < len; l++) begin
        longint v;
        @(negedge clk);
        in_valid = 1;
        in_tag = '0; in_tag.row = LEN_W'(l); in_tag.blk = 0; in_tag.acc = acc; in_tag.last = last;
        in_tag.row_last = (l == len - 1); in_tag.pool_log2 = 2'(pl); in_tag.relu = relu;
        in_col = COL_W'(col);
        in_sum = SUM_W'($signed($urandom) <<< sh);
        psum = acc_t'($signed($urandom) <<< sh);
        v = longint'(in_sum) + (acc ? longint'(psum) : 0);
        if (!last) expq.push_back('{0, l, col, v});
        else begin
          m = (members == 0 || v > m) ? v : m;
          members++;
          if (members == P || l == len - 1) begin
            automatic longint a = (relu && m < 0) ? 0 : m;
            if (relu && m < 0) n_relu++;
            expq.push_back('{1, l / P, col, rq(a)});
            members = 0;
          end
        end
        @(posedge clk); #1 in_valid = 0;
        if ($urandom_range(2) == 0) @(negedge clk);
      end
    end
    repeat (3) @(posedge clk);
    check(expq.size() == 0, "all writes came out");
    check(n_sat > 0 && n_relu > 0, "saturation and ReLU exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
