// tb_write_agent_out: checks the output-frame writer.
//
// Two 12 x 5 frames of random pixels are streamed with start-of-frame on
// their first pixel, the first to base 0x200 and the second to 0x600, with
// random input gaps and random DRAM stalls.  Each pixel must be found at
// base + n and frame_done must pulse once per frame.
module tb_write_agent_out;
  import edof_pkg::*;
  localparam int W = 12, H = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, in_sof, req_valid, req_ready, resp_valid, frame_done;
  pix_t in_pix, resp_data;
  mem_req_t req;
  addr_t base;
  int n_fd = 0;

  write_agent_out dut (.clk, .rst_n, .width(16'(W)), .height(16'(H)), .base,
                       .in_valid, .in_ready, .in_pix, .in_sof,
                       .req_valid, .req_ready, .req, .frame_done);
  dram_model #(.WORDS(4096), .LATENCY(4)) u_mem (.clk, .rst_n, .req_valid, .req_ready, .req,
                                                 .resp_valid, .resp_data);
  always @(posedge clk) if (rst_n && frame_done) n_fd++;

  logic [15:0] pix [2][W*H];
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      for (int n = 0; n < W*H; n++) begin
        pix[f][n] = 16'($urandom);
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
        base = addr_t'(f == 0 ? 'h200 : 'h600);
        in_valid = 1; in_pix = pix[f][n]; in_sof = (n == 0);
        @(posedge clk); while (!in_ready) @(posedge clk);
      end
      @(negedge clk); in_valid = 0; base = '0;
      repeat (5) @(posedge clk);
      checks++;
      if (n_fd != f + 1) begin failures++; $display("frame_done count %0d", n_fd); end
    end
    for (int f = 0; f < 2; f++)
      for (int n = 0; n < W*H; n++) begin
        checks++;
        if (u_mem.mem[(f == 0 ? 'h200 : 'h600) + n] != pix[f][n]) failures++;
      end
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
