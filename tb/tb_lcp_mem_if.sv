// tb_lcp_mem_if -- checks the address map of the memory interface on random
// lane inputs: partial-sum reads only for tags that accumulate, writes to
// the partial-sum or the output region by the final flag.
`timescale 1ns/1ps
module tb_lcp_mem_if;
  import lcp_pkg::*;
  localparam int ROWS = 8, COL_W = 11;

  addr_t psum_base, out_base, row_pitch;
  logic pre_valid [ROWS]; tag_t pre_tag [ROWS]; logic [COL_W-1:0] pre_col [ROWS];
  logic rd_en [ROWS]; addr_t rd_addr [ROWS];
  logic res_valid [ROWS], res_final [ROWS]; logic [LEN_W-1:0] res_row [ROWS];
  logic [COL_W-1:0] res_col [ROWS]; acc_t res_data [ROWS];
  logic wr_en [ROWS]; addr_t wr_addr [ROWS]; acc_t wr_data [ROWS];

  lcp_mem_if #(.ROWS(ROWS), .COL_W(COL_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 100; n++) begin
      psum_base = $urandom; out_base = $urandom; row_pitch = $urandom_range(1, 4096);
      for (int r = 0; r < ROWS; r++) begin
        pre_valid[r] = $urandom_range(1); pre_tag[r] = tag_t'({$urandom, $urandom});
        pre_col[r] = COL_W'($urandom);
        res_valid[r] = $urandom_range(1); res_final[r] = $urandom_range(1);
        res_row[r] = LEN_W'($urandom); res_col[r] = COL_W'($urandom); res_data[r] = acc_t'({$urandom, $urandom});
      end
      #1;
      for (int r = 0; r < ROWS; r++) begin
        check(rd_en[r] == (pre_valid[r] && pre_tag[r].acc), "rd_en");
        check(rd_addr[r] == psum_base + 32'(pre_tag[r].row) * row_pitch + 32'(pre_col[r]), "rd_addr");
        check(wr_en[r] == res_valid[r], "wr_en");
        check(wr_addr[r] == (res_final[r] ? out_base : psum_base) + 32'(res_row[r]) * row_pitch + 32'(res_col[r]), "wr_addr");
        check(wr_data[r] == res_data[r], "wr_data");
      end
      #9;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
