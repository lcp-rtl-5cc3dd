// tb_lcp_cifarnet_conv1 -- runs the first convolution layer of CifarNet on
// the full-size accelerator: a 32 x 32 x 3 image, 64 filters of 5 x 5 x 3,
// zero padding 2 (output 32 x 32 x 64), then ReLU and 2 x 2 max pooling
// (output 16 x 16 x 64). Image and weights are random 3.13 values; the layer
// shape is CifarNet's, the 2 x 2 window is this testbench's stand-in for the
// network's own pooling.
//
// The host side is modelled here: the 75-element receptive fields (im2col)
// are padded to 96 and cut into three 32-wide slices, so the layer runs as
// three passes of 1024 vectors against one 64-filter stationary block each,
// the first two writing partial sums. Output pixels are streamed in
// pooling-window order (the four pixels of each 2 x 2 window back to back),
// so the accelerator's row-wise pooling over 4 rows is the 2-D window.
// Every pooled output is compared with a direct convolution computed here.
`timescale 1ns/1ps
module tb_lcp_cifarnet_conv1;
  import lcp_pkg::*;

  localparam int COLS = 32, ROWS = 64;
  localparam int W = COLS * DATA_W;
  localparam int H = 32, CI = 3, KS = 5, CO = 64, PAD = 2;
  localparam int KDIM = KS * KS * CI;             // 75
  localparam int NSL = (KDIM + COLS - 1) / COLS;  // 3 slices
  localparam int NPIX = H * H;

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

  // memory model: one-cycle reads, immediate writes
  acc_t mem [addr_t];
  int   n_wr_final = 0;
  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < ROWS; r++) begin
      if (rd_en[r]) rd_data[r] <= mem.exists(rd_addr[r]) ? mem[rd_addr[r]] : acc_t'(0);
      if (wr_en[r]) begin
        mem[wr_addr[r]] = wr_data[r];
        if (wr_addr[r] >= out_base) n_wr_final++;
      end
    end
  end
  initial for (int r = 0; r < ROWS; r++) rd_data[r] = '0;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int img  [H][H][CI];
  int filt [CO][KDIM];     // filt[o][(ky*KS + kx)*CI + c]

  // receptive-field element k of output pixel (y, x), zero outside the image
  function automatic int field(int y, int x, int k);
    int c = k % CI, kx = (k / CI) % KS, ky = k / (CI * KS);
    int iy = y + ky - PAD, ix = x + kx - PAD;
    if (k >= KDIM || iy < 0 || iy >= H || ix < 0 || ix >= H) return 0;
    return img[iy][ix][c];
  endfunction

  // streamed row n -> output pixel, in 2 x 2 window order
  function automatic void pix_of(int n, output int y, output int x);
    int win = n / 4, m = n % 4;
    y = (win / (H / 2)) * 2 + m / 2;
    x = (win % (H / 2)) * 2 + m % 2;
  endfunction

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
    for (int y = 0; y < H; y++) for (int x = 0; x < H; x++) for (int c = 0; c < CI; c++)
      img[y][x][c] = $urandom_range(8191) - 4096;
    for (int o = 0; o < CO; o++) for (int k = 0; k < KDIM; k++)
      filt[o][k] = $urandom_range(4095) - 2048;
    psum_base = 32'h0010_0000; out_base = 32'h0020_0000; row_pitch = CO;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    t0 = $time;

    for (int k = 0; k < NSL; k++) begin
      // stationary block: 64 filters, slice k, last array row first
      send(hdr_word(BLK_STAT, 0, ROWS, 0, 1, 0, 0));
      for (int r = ROWS - 1; r >= 0; r--) begin
        for (int c = 0; c < COLS; c++) begin
          automatic int kk = k * COLS + c;
          d[c*DATA_W +: DATA_W] = DATA_W'(kk < KDIM ? filt[r][kk] : 0);
        end
        send(d);
      end
      // streaming block: all 1024 output pixels, slice k of their fields
      send(hdr_word(BLK_STREAM, 0, NPIX, k, NSL, 2, 1));
      for (int n = 0; n < NPIX; n++) begin
        int y, x;
        pix_of(n, y, x);
        for (int c = 0; c < COLS; c++) d[c*DATA_W +: DATA_W] = DATA_W'(field(y, x, k * COLS + c));
        @(negedge clk); s_valid = 1; s_data = d; #1;
        while (!s_ready) begin @(negedge clk); #1; end
        @(posedge clk);
      end
      #1 s_valid = 0;
    end
    while (!idle) @(posedge clk);
    repeat (3) @(posedge clk);
    t1 = $time;
    $display("conv1: %0d cycles for %0d vectors", (t1 - t0) / 10, NSL * (NPIX + ROWS + 2));

    // reference: conv, 2 x 2 max pool, ReLU, requantise
    for (int py = 0; py < H / 2; py++)
      for (int px = 0; px < H / 2; px++)
        for (int o = 0; o < CO; o++) begin
          automatic longint m = -(64'sd1 << 62);
          automatic longint e;
          automatic addr_t ad = out_base + addr_t'(py * (H / 2) + px) * row_pitch + addr_t'(o);
          for (int dy = 0; dy < 2; dy++) for (int dx = 0; dx < 2; dx++) begin
            automatic longint s = 0;
            for (int k = 0; k < KDIM; k++)
              s += longint'(field(2 * py + dy, 2 * px + dx, k)) * longint'(filt[o][k]);
            if (s > m) m = s;
          end
          e = rq(m < 0 ? 0 : m);
          check(mem.exists(ad) && mem[ad] == acc_t'(e),
                $sformatf("pooled (%0d,%0d) filter %0d: got %0d exp %0d", py, px, o,
                          mem.exists(ad) ? mem[ad] : 0, e));
        end
    check(n_wr_final == (H / 2) * (H / 2) * CO, $sformatf("final writes %0d", n_wr_final));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
