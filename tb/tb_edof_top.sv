// tb_edof_top: end-to-end test of the reconstruction system with every
// parameter at its default (four stages, 1920-pixel line buffers, 16-bit
// gamma table); the frame size is a run-time register and is set small.
//
// The host port loads a network whose result is easy to predict:
//   I: A = identity on the 64 Bayer samples (shift 0, theta 0);
//   M, M: A = random, but theta so large that shrink() gives 0 and c = 0,
//         so b passes through unchanged (b_add);
//   F: luma rows = identity (shift 0), chroma rows = 0,
// and a gamma table g(v) = min(v >> 4, 255).  Each output pixel must then
// be {g(x), 0x80} for input sample x, whatever the number of overlapping
// patches averaged into it.  The HDMI input delivers one pixel every four
// clocks and the display line is six times the active width, so that the
// one-pixel-per-clock DRAM port shared by four agents keeps up (see the
// bandwidth note in the documentation).  Three 32 x 16 raw frames are sent over HDMI
// back to back with stride 2 (overlap 6 of 8): frame 1 is processed, frame 2
// is overwritten by frame 3 before it is read (a drop), frame 3 is
// processed next.  Both output buffers in the DRAM model and the pixels on
// the HDMI output are checked, and the mechanisms of the design are counted
// and must each occur: DRAM contention, back-pressure into the calculator
// pipeline, pooling of overlapping patches (pixels averaged over more than
// one patch), frame drop, double-buffer swap and display of a new frame.
module tb_edof_top;
  import edof_pkg::*;
  localparam int W = 32, H = 16;
  localparam int IN0 = 'h0000, IN1 = 'h0800, OUT0 = 'h1000, OUT1 = 'h1800;
  localparam int HT = 6 * W, VT = H + 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we = 0;
  logic [31:0] cfg_addr, cfg_wdata;
  logic in_de = 0, in_vs = 0;
  logic [7:0] in_y = 0, in_c = 0;
  logic out_de, out_hs, out_vs;
  logic [7:0] out_y, out_c;
  logic dram_req_valid, dram_req_ready, dram_resp_valid;
  mem_req_t dram_req;
  pix_t dram_resp_data;
  logic [31:0] frames_in, frames_processed, frames_dropped, in_overflows, out_underruns, patches_done;

  edof_top dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
    .hdmi_in_de(in_de), .hdmi_in_vsync(in_vs), .hdmi_in_y(in_y), .hdmi_in_c(in_c),
    .hdmi_out_de(out_de), .hdmi_out_hsync(out_hs), .hdmi_out_vsync(out_vs),
    .hdmi_out_y(out_y), .hdmi_out_c(out_c),
    .dram_req_valid, .dram_req_ready, .dram_req, .dram_resp_valid, .dram_resp_data,
    .frames_in, .frames_processed, .frames_dropped, .in_overflows, .out_underruns, .patches_done);

  dram_model #(.WORDS(1 << 14), .LATENCY(12)) u_mem (.clk, .rst_n,
    .req_valid(dram_req_valid), .req_ready(dram_req_ready), .req(dram_req),
    .resp_valid(dram_resp_valid), .resp_data(dram_resp_data));

  // ---------------- mechanism counters ----------------
  int n_contention = 0, n_calc_stall = 0, n_overlap = 0, n_swap = 0, n_shown_new = 0;
  always @(posedge clk) if (rst_n) begin
    if ($countones(dut.m_valid) > 1) n_contention++;
    if (dut.pr_valid && !dut.pr_ready) n_calc_stall++;
    if (dut.pp_valid && dut.pp_ready && dut.u_pool.cnt[dut.u_pool.erow][dut.u_pool.ecol] > 1) n_overlap++;
    if (dut.wa1_fd) n_swap++;
  end

  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
  endtask
  task automatic stage_cfg(input int s, input int nin, input int nout, input int sh, input int ba);
    wr({4'(s + 1), 10'd0, 2'd3, 16'd0}, {6'd0, 1'(ba), 1'b0, 2'd0, 6'(sh), 8'(nout), 8'(nin)});
  endtask

  function automatic int g(input int v);
    int r = v >> 4;
    return (r > 255) ? 255 : r;
  endfunction

  logic [15:0] frame [3][W*H];

  task automatic send_frame(input int f);
    @(negedge clk); in_vs = 1; repeat (4) @(negedge clk); in_vs = 0;
    repeat (10) @(negedge clk);
    for (int y = 0; y < H; y++) begin
      for (int x = 0; x < W; x++) begin
        in_de = 1; {in_y, in_c} = frame[f][y*W + x];
        @(negedge clk);
        in_de = 0;
        repeat (3) @(negedge clk);
      end
      in_de = 0;
      repeat (16) @(negedge clk);
    end
  endtask

  task automatic check_buffer(input int base, input int f, input bit raw, input string what);
    int bad = 0;
    for (int n = 0; n < W*H; n++)
      if (u_mem.mem[base + n] != (raw ? frame[f][n] : {8'(g(int'(frame[f][n]))), 8'h80})) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("%s: %0d wrong pixels", what, bad); end
  endtask

  // ---------------- HDMI output monitor ----------------
  int disp_n = 0, disp_frames = 0, disp_bad = 0, disp_match3 = 0;
  bit vs_q = 0;
  always @(posedge clk) if (rst_n) begin
    vs_q <= out_vs;
    if (out_de) begin
      if ({out_y, out_c} == {8'(g(int'(frame[2][disp_n]))), 8'h80}) disp_match3++;
      disp_n++;
    end
    if (out_vs && !vs_q) begin
      if (disp_n == W*H && disp_match3 == W*H) n_shown_new++;
      if (disp_n != W*H && disp_frames > 0) disp_bad++;
      disp_n = 0; disp_match3 = 0; disp_frames++;
    end
  end

  initial begin
    for (int f = 0; f < 3; f++)
      for (int n = 0; n < W*H; n++) frame[f][n] = 16'($urandom_range(0, 4095));
    repeat (5) @(posedge clk);
    rst_n = 1;
    // registers
    wr(0, W); wr(1, H); wr(2, 1); wr(3, HT); wr(4, VT);
    wr(5, IN0); wr(6, IN1); wr(7, OUT0); wr(8, OUT1);
    // I: identity 64 -> 192
    stage_cfg(0, 64, 192, 0, 0);
    for (int j = 0; j < 64; j++) begin
      wr({4'd1, 10'd0, 2'd1, 8'd0, 8'(j)}, 0);
      wr({4'd1, 10'd0, 2'd2, 8'd0, 8'(j)}, 0);
      for (int i = 0; i < 192; i++) wr({4'd1, 10'd0, 2'd0, 8'(j), 8'(i)}, (i == j) ? 1 : 0);
    end
    // M, M: random S, thresholds above any value, so b passes through
    for (int s = 1; s <= 2; s++) begin
      stage_cfg(s, 192, 192, 4, 1);
      for (int j = 0; j < 192; j++) begin
        wr({4'(s + 1), 10'd0, 2'd1, 8'd0, 8'(j)}, 32767);
        wr({4'(s + 1), 10'd0, 2'd2, 8'd0, 8'(j)}, 0);
        for (int i = 0; i < 192; i++) wr({4'(s + 1), 10'd0, 2'd0, 8'(j), 8'(i)}, 32'($urandom_range(0, 200)));
      end
    end
    // F: identity on luma, zero chroma
    stage_cfg(3, 192, 128, 0, 0);
    for (int j = 0; j < 192; j++) begin
      wr({4'd4, 10'd0, 2'd1, 8'd0, 8'(j)}, 0);
      wr({4'd4, 10'd0, 2'd2, 8'd0, 8'(j)}, 0);
      for (int i = 0; i < 128; i++) wr({4'd4, 10'd0, 2'd0, 8'(j), 8'(i)}, (i == j) ? 1 : 0);
    end
    // gamma table
    for (int i = 0; i < 65536; i++) wr({4'hF, 12'd0, 16'(i)}, (i < 32768) ? g(i) : 0);
    wr(9, 1);   // enable
    @(negedge clk); cfg_we = 0;

    send_frame(0);
    send_frame(1);
    send_frame(2);
    // wait for two processed frames
    while (frames_processed < 2) @(negedge clk);
    check_buffer(OUT0, 0, 0, "output buffer 0 (frame 1)");
    check_buffer(OUT1, 2, 0, "output buffer 1 (frame 3)");
    check_buffer(IN1, 2, 1, "input buffer 1 (frame 3)");
    // let the display show the newest frame twice
    repeat (3 * HT * VT) @(negedge clk);

    checks++; if (frames_in != 3) begin failures++; $display("frames_in %0d", frames_in); end
    checks++; if (frames_dropped != 1) begin failures++; $display("frames_dropped %0d", frames_dropped); end
    checks++; if (patches_done != 2 * ((W - 8) / 2 + 1) * ((H - 8) / 2 + 1)) begin failures++; $display("patches_done %0d", patches_done); end
    checks++; if (in_overflows != 0) begin failures++; $display("in_overflows %0d", in_overflows); end
    checks++; if (disp_bad != 0) begin failures++; $display("%0d display frames with wrong pixel count", disp_bad); end
    $display("mechanisms: contention %0d, calc back-pressure %0d, overlapped pixels %0d, buffer swaps %0d, frame drops %0d, new frame shown %0d, display underruns %0d",
             n_contention, n_calc_stall, n_overlap, n_swap, frames_dropped, n_shown_new, out_underruns);
    checks++; if (n_contention == 0) begin failures++; $display("no DRAM contention seen"); end
    checks++; if (n_calc_stall == 0) begin failures++; $display("no pipeline back-pressure seen"); end
    checks++; if (n_overlap == 0) begin failures++; $display("no overlapped pooling seen"); end
    checks++; if (n_swap < 2) begin failures++; $display("no output buffer swap"); end
    checks++; if (n_shown_new == 0) begin failures++; $display("newest frame never displayed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
