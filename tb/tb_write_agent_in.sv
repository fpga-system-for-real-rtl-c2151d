// tb_write_agent_in: checks that HDMI raw frames land in DRAM in raster
// order and that a full FIFO is reported.
//
// Frame 1: a 16 x 6 frame with random blanking gaps between pixels, sent
// after a vsync pulse; the DRAM model stalls at random.  Every pixel
// {Y, C} must be found at base + n, frame_start and frame_done must pulse
// once.  Frame 2: the DRAM port is held off (ready low) while 64 pixels
// arrive back to back, so the 32-entry FIFO overflows and the overflow
// counter must count the lost pixels (64 - 32).
module tb_write_agent_in;
  import edof_pkg::*;
  localparam int W = 16, H = 6, BASE = 'h40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic de = 0, vs = 0;
  logic [7:0] y, c;
  logic req_valid, req_ready_m, hold = 0, resp_valid, frame_start, frame_done;
  mem_req_t req;
  pix_t resp_data;
  logic [31:0] overflows;
  int n_fs = 0, n_fd = 0;
  logic [15:0] wh;
  addr_t base;

  write_agent_in dut (.clk, .rst_n, .width(wh), .height(16'(H)), .base,
                      .hdmi_de(de), .hdmi_vsync(vs), .hdmi_y(y), .hdmi_c(c),
                      .req_valid, .req_ready(req_ready_m && !hold), .req,
                      .frame_start, .frame_done, .overflows);
  dram_model #(.WORDS(4096), .LATENCY(4)) u_mem (.clk, .rst_n, .req_valid(req_valid && !hold),
      .req_ready(req_ready_m), .req, .resp_valid, .resp_data);
  always @(posedge clk) if (rst_n) begin
    if (frame_start) n_fs++;
    if (frame_done) n_fd++;
  end

  logic [15:0] pix [W*H];

  initial begin
    wh = 16'(W); base = addr_t'(BASE);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); vs = 1; repeat (3) @(negedge clk); vs = 0;
    for (int n = 0; n < W*H; n++) begin
      pix[n] = 16'($urandom);
      while ($urandom_range(0, 2) == 0) begin de = 0; @(negedge clk); end
      de = 1; {y, c} = pix[n];
      @(negedge clk);
    end
    de = 0;
    repeat (100) @(negedge clk);
    for (int n = 0; n < W*H; n++) begin
      checks++;
      if (u_mem.mem[BASE + n] != pix[n]) begin
        failures++;
        if (failures < 10) $display("pixel %0d: %h expected %h", n, u_mem.mem[BASE + n], pix[n]);
      end
    end
    checks++;
    if (n_fs != 1 || n_fd != 1 || overflows != 0) begin failures++; $display("fs %0d fd %0d ov %0d", n_fs, n_fd, overflows); end
    // frame 2: DRAM held off, the FIFO must overflow
    wh = 16'd64; base = addr_t'('h800);
    hold = 1;
    @(negedge clk); vs = 1; @(negedge clk); vs = 0;
    for (int n = 0; n < 64; n++) begin de = 1; {y, c} = 16'(n); @(negedge clk); end
    de = 0;
    @(negedge clk);
    checks++;
    if (overflows != 32) begin failures++; $display("overflows %0d, expected 32", overflows); end
    hold = 0;
    repeat (100) @(negedge clk);
    checks++;
    if (u_mem.mem['h800 + 31] != 16'd31) begin failures++; $display("first 32 pixels not kept"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
