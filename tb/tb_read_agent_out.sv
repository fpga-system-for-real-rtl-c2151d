// tb_read_agent_out: checks the display reader and its video timing.
//
// A 24 x 6 frame (small porches: HFP 3, HS 4, VFP 1, VS 2; 40 x 10 total)
// is read from base 0x300 of a DRAM model with latency and random stalls.
// For three output frames every active pixel (de high) must carry
// {Y, C} = mem[base + n] in raster order, each frame must have exactly
// W*H active clocks, H*HS hsync clocks per... counted per line (HS clocks
// per line) and VS lines of vsync.  Then the DRAM is held off so the
// prefetch FIFO runs dry and underruns must be counted.
module tb_read_agent_out;
  import edof_pkg::*;
  localparam int W = 24, H = 6, HT = 40, VT = 10, BASE = 'h300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic enable = 0, frame_start, req_valid, req_ready_m, hold = 0, resp_valid;
  logic de, hs, vs;
  logic [7:0] y, c;
  mem_req_t req;
  pix_t resp_data;
  logic [31:0] underruns;

  read_agent_out #(.HFP(3), .HS(4), .VFP(1), .VS(2)) dut (
    .clk, .rst_n, .enable, .width(16'(W)), .height(16'(H)), .h_total(16'(HT)), .v_total(16'(VT)),
    .base(addr_t'(BASE)), .frame_start,
    .req_valid, .req_ready(req_ready_m && !hold), .req, .resp_valid, .resp_data,
    .hdmi_de(de), .hdmi_hsync(hs), .hdmi_vsync(vs), .hdmi_y(y), .hdmi_c(c), .underruns);
  dram_model #(.WORDS(4096), .LATENCY(6)) u_mem (.clk, .rst_n, .req_valid(req_valid && !hold),
      .req_ready(req_ready_m), .req, .resp_valid, .resp_data);

  int n = 0, frames = 0, hs_clk = 0, vs_clk = 0, pixels = 0;
  logic vs_q = 0;
  bit checking = 0;
  always @(posedge clk) if (checking) begin
    vs_q <= vs;
    if (hs) hs_clk++;
    if (vs) vs_clk++;
    if (de) begin
      checks++;
      if ({y, c} != u_mem.mem[BASE + n]) begin
        failures++;
        if (failures < 10) $display("frame %0d pixel %0d: %h expected %h", frames, n, {y, c}, u_mem.mem[BASE + n]);
      end
      n++; pixels++;
    end
    if (vs && !vs_q) begin
      checks++;
      if (n != W*H) begin failures++; $display("frame had %0d pixels", n); end
      n = 0; frames++;
    end
  end

  initial begin
    for (int i = 0; i < 4096; i++) u_mem.mem[i] = 16'(i * 40503 + 7);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); enable = 1;
    // start checking at the first frame boundary (first active pixel)
    while (!(dut.hc == 0 && dut.vc == 0)) @(negedge clk);
    checking = 1;
    repeat (3 * HT * VT) @(negedge clk);
    checking = 0;
    checks++;
    if (frames != 3 || hs_clk != 3 * VT * 4 || vs_clk != 3 * 2 * HT) begin
      failures++; $display("frames %0d hsync clocks %0d vsync clocks %0d", frames, hs_clk, vs_clk);
    end
    checks++;
    if (underruns != 0) begin failures++; $display("unexpected underruns %0d", underruns); end
    hold = 1;
    repeat (2 * HT * VT) @(negedge clk);
    checks++;
    if (underruns == 0) begin failures++; $display("no underrun seen"); end
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
