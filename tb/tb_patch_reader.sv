// tb_patch_reader: checks the raster-to-patch reordering of the input
// frame reader against a DRAM model with latency and random stalls.
//
// A 40 x 24 frame at base 0x100 is filled with a pseudo-random pattern.
// The reader is run with stride 4 and then stride 8; every element it
// emits must equal frame[(py*S + r) * W + px*S + c] in patch order, the
// last flag must mark every 64th element, and done must pulse once after
// the final element.  The downstream ready is randomly withheld.
module tb_patch_reader;
  import edof_pkg::*;
  localparam int W = 40, H = 24, BASE = 'h100;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0] sl;
  logic start = 0, busy, done, req_valid, req_ready, resp_valid, out_valid, out_ready = 0;
  mem_req_t req;
  pix_t resp_data;
  vec_elem_t out_elem;
  int n_done = 0;

  patch_reader dut (.clk, .rst_n, .width(16'(W)), .height(16'(H)), .stride_log2(sl),
                    .start, .base(addr_t'(BASE)), .busy, .done,
                    .req_valid, .req_ready, .req, .resp_valid, .resp_data,
                    .out_valid, .out_ready, .out_elem);
  dram_model #(.WORDS(4096), .LATENCY(9)) u_mem (.clk, .rst_n, .req_valid, .req_ready, .req,
                                                 .resp_valid, .resp_data);
  always @(posedge clk) if (done) n_done++;

  task automatic run(input int s_log2);
    int s = 1 << s_log2, npx = (W - 8) / s + 1, npy = (H - 8) / s + 1;
    int d0 = n_done;
    sl = 2'(s_log2);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int py = 0; py < npy; py++)
      for (int px = 0; px < npx; px++)
        for (int k = 0; k < 64; ) begin
          @(negedge clk); out_ready = ($urandom_range(0, 2) != 0);
          @(posedge clk);
          if (out_valid && out_ready) begin
            int a = BASE + (py*s + k/8) * W + px*s + k%8;
            checks++;
            if (out_elem.b != data_t'(u_mem.mem[a]) || out_elem.last != (k == 63) || out_elem.z != 0) begin
              failures++;
              if (failures < 10) $display("patch (%0d,%0d) k %0d: %h expected %h", px, py, k, out_elem.b, u_mem.mem[a]);
            end
            k++;
          end
        end
    @(negedge clk); out_ready = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (n_done != d0 + 1 || busy || out_valid) begin failures++; $display("done/busy wrong"); end
  endtask

  initial begin
    for (int i = 0; i < 4096; i++) u_mem.mem[i] = 16'((i * 2654435761) >> 20);
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(2);
    run(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
