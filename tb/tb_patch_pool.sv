// tb_patch_pool: checks average pooling and raster reordering.
//
// Frame 1: 32 x 24 pixels, stride 2 (each interior pixel covered by 16
// patches).  Frame 2: the same size, stride 8 (no overlap, output equals
// input).  Patch values are random; the testbench keeps its own per-pixel
// sums and counts and expects each output value to be
// (sum * round(65536 / count) + 32768) >> 16, i.e. the average rounded
// (within one of the exact rounded mean, which is also checked).  The output
// must be in raster order, start-of-frame on the first pixel, frame_done on
// the last, under random output stalls.
module tb_patch_pool;
  localparam int W = 32, H = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0] sl;
  logic in_valid = 0, in_ready, in_last, out_valid, out_ready = 0, out_sof, frame_done;
  logic [6:0] in_idx;
  logic [7:0] in_val;
  logic [15:0] out_pix;
  int n_fd = 0;

  patch_pool dut (.clk, .rst_n, .width(16'(W)), .height(16'(H)), .stride_log2(sl),
                  .in_valid, .in_ready, .in_idx, .in_val, .in_last,
                  .out_valid, .out_ready, .out_pix, .out_sof, .frame_done);

  always @(posedge clk) if (frame_done) n_fd++;

  int ys [H][W], cs [H][W], cn [H][W];

  task automatic frame(input int s_log2);
    int s = 1 << s_log2;
    int npx = (W - 8) / s + 1, npy = (H - 8) / s + 1;
    int fd0 = n_fd;
    sl = 2'(s_log2);
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin ys[y][x] = 0; cs[y][x] = 0; cn[y][x] = 0; end
    fork
      for (int py = 0; py < npy; py++)
        for (int px = 0; px < npx; px++)
          for (int k = 0; k < 128; k++) begin
            int val = $urandom_range(0, 255);
            int r, c;
            if (k < 64) begin r = k / 8; c = k % 8; ys[py*s + r][px*s + c] += val; cn[py*s + r][px*s + c]++; end
            else begin
              int q = (k - 64) % 32;
              r = q / 4; c = 2 * (q % 4) + ((k >= 96) ? 1 : 0);
              cs[py*s + r][px*s + c] += val;
            end
            @(negedge clk);
            in_valid = 1; in_idx = 7'(k); in_val = 8'(val); in_last = (k == 127);
            @(posedge clk); while (!in_ready) @(posedge clk);
            @(negedge clk); in_valid = 0;
          end
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; ) begin
          @(negedge clk); out_ready = ($urandom_range(0, 3) != 0);
          @(posedge clk);
          if (out_valid && out_ready) begin
            int n = cn[y][x];
            int rc = (65536 + n / 2) / n;
            int ey = (ys[y][x] * rc + 32768) >> 16;
            int ec = (cs[y][x] * rc + 32768) >> 16;
            int exy = (2 * ys[y][x] + n) / (2 * n);
            checks++;
            if (out_pix != {8'(ey), 8'(ec)} || out_sof != (x == 0 && y == 0)) begin
              failures++;
              if (failures < 10) $display("(%0d,%0d) got %h expected %02h%02h", x, y, out_pix, ey, ec);
            end
            checks++;
            if (ey - exy > 1 || exy - ey > 1) failures++;
            x++;
          end
        end
    join
    @(negedge clk); out_ready = 0;
    repeat (2) @(posedge clk);
    checks++;
    if (n_fd != fd0 + 1) begin failures++; $display("frame_done count %0d", n_fd - fd0); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    frame(1);
    frame(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
