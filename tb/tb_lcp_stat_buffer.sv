// tb_lcp_stat_buffer -- checks the stationary buffer against a reference
// array: random loads into random slots, the chain output (old content of the
// loaded slot) and the read port for every slot.
`timescale 1ns/1ps
module tb_lcp_stat_buffer;
  import lcp_pkg::*;
  localparam int DEPTH = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ld_en = 0; logic [1:0] ld_slot = 0, rd_slot = 0;
  data_t ld_in = 0, ld_out, rd_data;

  lcp_stat_buffer #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  data_t ref_q [DEPTH];
  initial begin
    foreach (ref_q[s]) ref_q[s] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int s = 0; s < DEPTH; s++) begin
      rd_slot = 2'(s); #1; check(rd_data == 0, "cleared by reset");
    end
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      ld_en = ($urandom_range(2) != 0);
      ld_slot = 2'($urandom_range(DEPTH-1));
      ld_in = data_t'($urandom);
      rd_slot = 2'($urandom_range(DEPTH-1));
      #1;
      check(ld_out == ref_q[ld_slot], $sformatf("ld_out slot %0d", ld_slot));
      check(rd_data == ref_q[rd_slot], $sformatf("rd_data slot %0d", rd_slot));
      @(posedge clk);
      if (ld_en) ref_q[ld_slot] = ld_in;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
