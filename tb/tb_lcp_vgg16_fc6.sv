// tb_lcp_vgg16_fc6 -- one 64-neuron block of VGG16's first fully-connected
// layer, for a single image, on the full-size accelerator.
//
// FC6 reduces a 7 x 7 x 512 = 25088-element feature vector into 4096 neurons.
// With batch size one the streaming operand is a single vector per slice, so
// the layer runs as 784 slices of 32 elements: for each slice a 64 x 32
// stationary block is poured in and one streaming vector follows it. The
// first 783 slices write and read back partial sums; the last applies ReLU.
// Only output block 0 (neurons 0..63) of the 64 blocks is simulated; the
// others differ only in their weights and block index. Data are random 3.13
// values; every output is compared with a direct dot product, and the cycle
// count is printed.
//
// Successive slices of one output block share a buffer slot, so each
// stationary load waits until the previous slice's vector has left the array.
`timescale 1ns/1ps
module tb_lcp_vgg16_fc6;
  import lcp_pkg::*;

  localparam int COLS = 32, ROWS = 64;
  localparam int W = COLS * DATA_W;
  localparam int KDIM = 7 * 7 * 512;         // 25088
  localparam int NSL = KDIM / COLS;          // 784 slices

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         s_valid = 0, s_ready;
  logic [W-1:0] s_data = '0;
  addr_t        psum_base, out_base, row_pitch;
  logic         rd_en [ROWS];  addr_t rd_addr [ROWS];  acc_t rd_data [ROWS];
  logic         wr_en [ROWS];  addr_t wr_addr [ROWS];  acc_t wr_data [ROWS];
  logic         stall, blk_done, idle;

  lcp_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  acc_t mem [addr_t];
  int   n_rd = 0, n_stall = 0;
  always @(posedge clk) if (rst_n) begin
    if (stall) n_stall++;
    for (int r = 0; r < ROWS; r++) begin
      if (rd_en[r]) begin
        rd_data[r] <= mem.exists(rd_addr[r]) ? mem[rd_addr[r]] : acc_t'(0);
        n_rd++;
      end
      if (wr_en[r]) mem[wr_addr[r]] = wr_data[r];
    end
  end
  initial for (int r = 0; r < ROWS; r++) rd_data[r] = '0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int x  [KDIM];
  int wt [ROWS][KDIM];

  task automatic send(logic [W-1:0] d);
    @(negedge clk);
    s_valid = 1; s_data = d;
    #1;
    while (!s_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 s_valid = 0;
  endtask

  function automatic logic [W-1:0] hdr_word(blk_type_e t, int blk, int len,
                                            int kidx, int kcnt, int pl, bit relu);
    blk_hdr_t h;
    h.t = t; h.blk = IDX_W'(blk); h.length = LEN_W'(len);
    h.k_idx = KCNT_W'(kidx); h.k_cnt = KCNT_W'(kcnt);
    h.pool_log2 = 2'(pl); h.relu = relu;
    return W'(h);
  endfunction

  function automatic longint rq(longint v);
    longint s = v >>> FRAC_W;
    if (s > 32767) return 32767;
    if (s < -32768) return -32768;
    return s;
  endfunction

  initial begin
    logic [W-1:0] d;
    longint t0, t1;
    int n_neg = 0;
    for (int k = 0; k < KDIM; k++) x[k] = $urandom_range(4095) - 2048;
    for (int o = 0; o < ROWS; o++) for (int k = 0; k < KDIM; k++) wt[o][k] = $urandom_range(4095) - 2048;
    psum_base = 32'h0010_0000; out_base = 32'h0020_0000; row_pitch = 4096;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    t0 = $time;
    for (int k = 0; k < NSL; k++) begin
      send(hdr_word(BLK_STAT, 0, ROWS, 0, 1, 0, 0));
      for (int r = ROWS - 1; r >= 0; r--) begin
        for (int c = 0; c < COLS; c++) d[c*DATA_W +: DATA_W] = DATA_W'(wt[r][k * COLS + c]);
        send(d);
      end
      send(hdr_word(BLK_STREAM, 0, 1, k, NSL, 0, 1));
      for (int c = 0; c < COLS; c++) d[c*DATA_W +: DATA_W] = DATA_W'(x[k * COLS + c]);
      send(d);
    end
    while (!idle) @(posedge clk);
    t1 = $time;
    $display("fc6 block: %0d slices in %0d cycles, %0d stall cycles", NSL, (t1 - t0) / 10, n_stall);

    for (int o = 0; o < ROWS; o++) begin
      automatic longint s = 0;
      automatic longint e;
      automatic addr_t ad = out_base + addr_t'(o);
      for (int k = 0; k < KDIM; k++) s += longint'(x[k]) * longint'(wt[o][k]);
      if (s < 0) n_neg++;
      e = rq(s < 0 ? 0 : s);
      check(mem.exists(ad) && mem[ad] == acc_t'(e),
            $sformatf("neuron %0d: got %0d exp %0d", o, mem.exists(ad) ? mem[ad] : 0, e));
    end
    check(n_rd == (NSL - 1) * ROWS, $sformatf("partial-sum reads %0d", n_rd));
    check(n_neg > 0, "some neurons clamped by ReLU");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
