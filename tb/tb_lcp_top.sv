// tb_lcp_top -- end-to-end test of the accelerator at its default size
// (32 x 64 array, four stationary slots per cell).
//
// The testbench plays the memory: it streams blocks into s_*, answers the
// per-row partial-sum reads one cycle later and stores the per-row writes in
// an associative array. Results are compared with a reference computed here
// from the same random matrices with plain integer arithmetic.
//
//   Layer A  X (8 x 64) times W^T (64 x 128): two reduction slices of 32 and
//            two output blocks of 64 columns, so slice 1 adds the partial sums
//            of slice 0 from memory; max pooling over 2 rows, ReLU.
//   Layer B  X (5 x 32) times W^T (32 x 64), block index 2, large operands
//            (saturation), pooling over 4 rows so the last window is cut
//            short by the end of the block, no ReLU.
//   Layer C  block index 6, which maps to the same buffer slot as layer B;
//            its stationary load follows B's stream directly and has to wait
//            for B's vectors to leave the array (stall).
//
// Besides the values it checks the latency of row 0 and of the last row, and
// that a streaming block enters at one vector per cycle. It counts each
// mechanism (partial-sum read, partial write, pooling window, truncated
// window, ReLU clamp, saturation, stall, load overlapping streaming, FIFO
// back-pressure) and fails if one never happened.
`timescale 1ns/1ps
module tb_lcp_top;
  import lcp_pkg::*;

  localparam int COLS = 32, ROWS = 64, DEPTH = 4;
  localparam int W = COLS * DATA_W;
  localparam int LEVELS = 5;

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
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // ---------------- memory model ----------------
  acc_t mem [addr_t];
  int   n_rd = 0, n_wr = 0;
  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < ROWS; r++) begin
      if (rd_en[r]) begin
        rd_data[r] <= mem.exists(rd_addr[r]) ? mem[rd_addr[r]] : acc_t'(0);
        n_rd++;
      end
      if (wr_en[r]) begin
        mem[wr_addr[r]] = wr_data[r];
        n_wr++;
      end
    end
  end
  initial for (int r = 0; r < ROWS; r++) rd_data[r] = '0;

  // ---------------- event monitors ----------------
  int n_stall = 0, n_overlap = 0, n_bp = 0;
  longint first_acc = -1;          // edge accepting a timed block's 1st vector
  longint first_wr0 = -1, first_wrN = -1;
  bit     timing_on = 0;
  int     burst_len = 0, burst_max = 0;
  always @(posedge clk) if (rst_n) begin
    if (stall) n_stall++;
    if (dut.ld_en && ((dut.slot_busy & ~(DEPTH'(1) << dut.ld_slot)) != '0)) n_overlap++;
    if (s_valid && !s_ready) n_bp++;
    if (dut.elem) begin burst_len++; if (burst_len > burst_max) burst_max = burst_len; end
    else burst_len = 0;
    if (timing_on) begin
      if (dut.elem && first_acc < 0) first_acc = cyc;
      if (wr_en[0] && first_wr0 < 0) first_wr0 = cyc;
      if (wr_en[ROWS-1] && first_wrN < 0) first_wrN = cyc;
    end
  end

  // ---------------- stream driver ----------------
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

  // matrices, sized for the largest layer
  int X  [8][64];
  int Wm [512][64];   // Wm[out column][k]

  // stationary block: output columns blk*ROWS .. +ROWS-1, reduction slice k;
  // poured last array row first
  task automatic load_stat(int blk, int k);
    logic [W-1:0] d;
    send(hdr_word(BLK_STAT, blk, ROWS, 0, 1, 0, 0));
    for (int r = ROWS-1; r >= 0; r--) begin
      for (int c = 0; c < COLS; c++) d[c*DATA_W +: DATA_W] = DATA_W'(Wm[blk*ROWS + r][k*COLS + c]);
      send(d);
    end
  endtask

  task automatic stream(int blk, int len, int k, int kcnt, int pl, bit relu);
    logic [W-1:0] d;
    send(hdr_word(BLK_STREAM, blk, len, k, kcnt, pl, relu));
    for (int l = 0; l < len; l++) begin
      for (int c = 0; c < COLS; c++) d[c*DATA_W +: DATA_W] = DATA_W'(X[l][k*COLS + c]);
      // hold valid across the block so it can enter at full rate
      @(negedge clk); s_valid = 1; s_data = d; #1;
      while (!s_ready) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    #1 s_valid = 0;
  endtask

  task automatic wait_idle();
    int n = 0;
    while (n < 4) begin @(posedge clk); #1; n = idle ? n + 1 : 0; end
  endtask

  // ---------------- reference ----------------
  function automatic longint dot(int l, int col, int k0, int k1);
    longint s = 0;
    for (int k = k0; k < k1; k++) s += longint'(X[l][k]) * longint'(Wm[col][k]);
    return s;
  endfunction

  function automatic longint rq(longint v);
    longint s = v >>> FRAC_W;
    if (s > 32767) return 32767;
    if (s < -32768) return -32768;
    return s;
  endfunction

  int n_relu = 0, n_sat = 0, n_pool = 0, n_trunc = 0;

  task automatic check_final(int len, int kdim, int col0, int ncol, int pl,
                             bit relu, addr_t base, addr_t pitch, string name);
    int P = 1 << pl;
    for (int col = col0; col < col0 + ncol; col++)
      for (int p = 0; p * P < len; p++) begin
        automatic longint m = -(64'sd1 << 62);
        longint e, a;
        automatic int members = 0;
        for (int l = p * P; l < len && l < p * P + P; l++) begin
          automatic longint v = dot(l, col, 0, kdim);
          if (v > m) m = v;
          members++;
        end
        if (members > 1) n_pool++;
        if (members < P) n_trunc++;
        a = (relu && m < 0) ? 0 : m;
        if (relu && m < 0) n_relu++;
        e = rq(a);
        if (e != (a >>> FRAC_W)) n_sat++;
        begin
          automatic addr_t ad = base + addr_t'(p) * pitch + addr_t'(col);
          automatic acc_t got = mem.exists(ad) ? mem[ad] : acc_t'(64'h5a5a5a5a);
          check(got == acc_t'(e),
                $sformatf("%s final row %0d col %0d: got %0d exp %0d", name, p, col, got, e));
        end
      end
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- test ----------------
  initial begin
    int n_wr_before;
    for (int l = 0; l < 8; l++) for (int k = 0; k < 64; k++) X[l][k] = $urandom_range(4095) - 2048;
    for (int o = 0; o < 512; o++) for (int k = 0; k < 64; k++) Wm[o][k] = $urandom_range(4095) - 2048;
    psum_base = 32'h0001_0000; out_base = 32'h0002_0000; row_pitch = 128;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    check(idle, "idle after reset");

    // ---- layer A: 8 x 64 by 64 x 128, pool 2, ReLU
    // slice 0 of both output blocks, then slice 1
    for (int k = 0; k < 2; k++)
      for (int b = 0; b < 2; b++) begin
        load_stat(b, k);
        if (k == 0 && b == 0) begin
          wait_idle();
          timing_on = 1;
        end
        stream(b, 8, k, 2, 1, 1);
        if (k == 0 && b == 0) begin
          wait_idle();
          timing_on = 0;
          check(first_wr0 - first_acc == 2 + LEVELS,
                $sformatf("row 0 latency %0d", first_wr0 - first_acc));
          check(first_wrN - first_acc == 2 + LEVELS + ROWS - 1,
                $sformatf("row %0d latency %0d", ROWS-1, first_wrN - first_acc));
          check(burst_max >= 8, $sformatf("streaming rate: longest burst %0d", burst_max));
        end
      end
    wait_idle();
    // partial sums of slice 0
    for (int l = 0; l < 8; l++)
      for (int col = 0; col < 128; col++) begin
        automatic addr_t ad = psum_base + addr_t'(l) * row_pitch + addr_t'(col);
        check(mem.exists(ad) && mem[ad] == acc_t'(dot(l, col, 0, 32)), $sformatf("partial row %0d col %0d got %0d exp %0d", l, col, mem.exists(ad) ? mem[ad] : 0, dot(l, col, 0, 32)));
      end
    check_final(8, 64, 0, 128, 1, 1, out_base, row_pitch, "A");

    // ---- layers B and C: one slice, same buffer slot, back to back
    for (int l = 0; l < 8; l++) for (int k = 0; k < 64; k++) X[l][k] = $urandom_range(32767) - 16384;
    for (int o = 128; o < 512; o++) for (int k = 0; k < 64; k++) Wm[o][k] = $urandom_range(32767) - 16384;
    psum_base = 32'h0004_0000; out_base = 32'h0005_0000; row_pitch = 512;
    n_wr_before = n_wr;
    load_stat(2, 0);
    stream(2, 5, 0, 1, 2, 0);
    load_stat(6, 0);                 // slot 6 mod 4 = 2: must wait for B
    stream(6, 5, 0, 1, 2, 0);
    wait_idle();
    check_final(5, 32, 128, 64, 2, 0, out_base, row_pitch, "B");
    check_final(5, 32, 384, 64, 2, 0, out_base, row_pitch, "C");
    check(n_wr - n_wr_before == 2 * 64 * 2, $sformatf("B+C write count %0d", n_wr - n_wr_before));

    // ---- mechanisms
    $display("mechanisms: psum_reads=%0d stall_cycles=%0d load_overlap=%0d backpressure=%0d pool=%0d truncated=%0d relu=%0d saturated=%0d",
             n_rd, n_stall, n_overlap, n_bp, n_pool, n_trunc, n_relu, n_sat);
    check(n_rd == 8 * 128, "partial-sum reads happened (one per slice-1 result)");
    check(n_stall > 0, "slot-conflict stall happened");
    check(n_overlap > 0, "stationary load overlapped in-flight vectors");
    check(n_bp > 0, "FIFO back-pressure happened");
    check(n_pool > 0, "pooling windows");
    check(n_trunc > 0, "window cut short by end of block");
    check(n_relu > 0, "ReLU clamped a negative result");
    check(n_sat > 0, "saturation happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
