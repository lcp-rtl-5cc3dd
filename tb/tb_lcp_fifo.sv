// tb_lcp_fifo -- random pushes and pops against a queue model: data order,
// full/empty flags, count, and simultaneous push and pop when full.
`timescale 1ns/1ps
module tb_lcp_fifo;
  localparam int W = 16, DEPTH = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = 0, out_data;
  logic [2:0] count;

  lcp_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [W-1:0] q [$];
  int n_full_both = 0;
  bit take = 0, give = 0;
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      if (!(in_valid && !take)) begin   // hold an unaccepted word
        in_valid = ($urandom_range(2) != 0);
        in_data = W'($urandom);
      end
      out_ready = ($urandom_range(3) == 0) || (n > 900);
      #1;
      check(int'(count) == q.size(), $sformatf("count %0d exp %0d", count, q.size()));
      check(out_valid == (q.size() > 0), "out_valid");
      check(in_ready == (q.size() < DEPTH || out_ready), "in_ready");
      if (out_valid && q.size() > 0) check(out_data == q[0], "out_data order");
      if (q.size() == DEPTH && in_valid && out_ready) n_full_both++;
      take = in_valid && in_ready;
      give = out_valid && out_ready;
      @(posedge clk);
      if (give) void'(q.pop_front());
      if (take) q.push_back(in_data);
    end
    check(n_full_both > 0, "push and pop while full happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
