// tb_lcp_cell -- checks one array cell: R1 delays the streaming operand by one
// clock, the product is R1 times the selected stationary slot, and the load
// chain passes the old slot content on.
`timescale 1ns/1ps
module tb_lcp_cell;
  import lcp_pkg::*;
  localparam int DEPTH = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  data_t s_in = 0, s_out, ld_in = 0, ld_out;
  logic ld_en = 0; logic [1:0] ld_slot = 0, rd_slot = 0;
  logic signed [2*DATA_W-1:0] prod;

  lcp_cell #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  data_t w [DEPTH];
  data_t r1;
  initial begin
    foreach (w[s]) w[s] = 0;
    r1 = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // fill all slots
    for (int s = 0; s < DEPTH; s++) begin
      @(negedge clk); ld_en = 1; ld_slot = 2'(s); ld_in = data_t'($urandom);
      @(posedge clk); w[s] = ld_in;
    end
    @(negedge clk); ld_en = 0;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      s_in = data_t'($urandom);
      rd_slot = 2'($urandom_range(DEPTH-1));
      ld_en = ($urandom_range(3) == 0);
      ld_slot = 2'($urandom_range(DEPTH-1));
      ld_in = data_t'($urandom);
      #1;
      check(s_out == r1, "R1 output");
      check(prod == 32'(r1) * 32'(w[rd_slot]), $sformatf("product %0d x %0d = %0d", r1, w[rd_slot], prod));
      check(ld_out == w[ld_slot], "load chain output");
      @(posedge clk);
      r1 = s_in;
      if (ld_en) w[ld_slot] = ld_in;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
