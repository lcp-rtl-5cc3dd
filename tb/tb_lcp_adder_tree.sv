// tb_lcp_adder_tree -- feeds the 32-input tree a new random vector every
// cycle (with random bubbles) and checks each sum, its tag and its latency of
// five cycles, and that pre_valid leads out_valid by one cycle.
`timescale 1ns/1ps
module tb_lcp_adder_tree;
  localparam int N = 32, IN_W = 32, TAG_W = 8, LAT = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0; logic [TAG_W-1:0] in_tag = 0;
  logic signed [IN_W-1:0] in_data [N];
  logic pre_valid, out_valid, busy; logic [TAG_W-1:0] pre_tag, out_tag;
  logic signed [IN_W+LAT-1:0] out_sum;

  lcp_adder_tree #(.N(N), .IN_W(IN_W), .TAG_W(TAG_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  longint cyc = 0;
  longint exp_sum [$]; int exp_tag [$]; longint exp_cyc [$];
  bit pre_seen = 0;
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (out_valid) begin
      check(exp_sum.size() > 0, "unexpected output");
      if (exp_sum.size() > 0) begin
        check(out_sum == exp_sum[0], $sformatf("sum %0d exp %0d", out_sum, exp_sum[0]));
        check(out_tag == TAG_W'(exp_tag[0]), "tag");
        check(cyc - exp_cyc[0] == LAT, $sformatf("latency %0d", cyc - exp_cyc[0]));
        check(pre_seen, "pre_valid one cycle ahead");
        void'(exp_sum.pop_front()); void'(exp_tag.pop_front()); void'(exp_cyc.pop_front());
      end
    end
    pre_seen <= pre_valid;
  end

  initial begin
    foreach (in_data[j]) in_data[j] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      automatic longint s = 0;
      @(negedge clk);
      in_valid = ($urandom_range(4) != 0);
      in_tag = TAG_W'($urandom);
      for (int j = 0; j < N; j++) begin
        in_data[j] = $signed($urandom) >>> $urandom_range(0, 8);
        s += in_data[j];
      end
      if (in_valid) begin exp_sum.push_back(s); exp_tag.push_back(int'(in_tag)); exp_cyc.push_back(cyc); end
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(posedge clk);
    check(exp_sum.size() == 0, "all sums came out");
    check(!busy, "busy cleared after drain");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
