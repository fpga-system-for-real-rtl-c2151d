// tb_mem_arbiter: checks sharing of the DRAM port by four masters.
//
// Each master issues 200 random requests (reads and writes to its own
// address range) whenever it likes; the DRAM model stalls at random and
// returns reads after 10 clocks.  Memory word a holds a ^ 0x5A5A before any
// write, and the testbench tracks every write, so each master can check
// that the read data it receives are those of its own reads, in its own
// request order.  All requests must complete, and while all four masters
// request continuously the grants must rotate (no master granted twice
// while another waits).
module tb_mem_arbiter;
  import edof_pkg::*;
  localparam int NR = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0] req_valid = '0, req_ready, resp_valid;
  mem_req_t   req [4];
  pix_t       resp_data, m_resp_data;
  logic       m_valid, m_ready, m_resp_valid;
  mem_req_t   m_req;

  mem_arbiter dut (.clk, .rst_n, .req_valid, .req_ready, .req, .resp_valid, .resp_data,
                   .m_valid, .m_ready, .m_req, .m_resp_valid, .m_resp_data);
  dram_model #(.WORDS(4096), .LATENCY(10)) u_mem (.clk, .rst_n, .req_valid(m_valid), .req_ready(m_ready),
      .req(m_req), .resp_valid(m_resp_valid), .resp_data(m_resp_data));

  pix_t shadow [4096];
  pix_t expq [4][$];
  int   issued [4], received [4];
  bit   all_busy;
  int   since [4];

  // shadow memory and expected read data, updated when a request is issued
  always @(posedge clk) if (rst_n) begin
    for (int m = 0; m < 4; m++)
      if (req_valid[m] && req_ready[m]) begin
        if (req[m].we) shadow[req[m].addr] = req[m].wdata;
        else expq[m].push_back(shadow[req[m].addr]);
        issued[m]++;
      end
    for (int m = 0; m < 4; m++)
      if (resp_valid[m]) begin
        checks++;
        if (expq[m].size() == 0 || resp_data != expq[m].pop_front()) begin
          failures++;
          if (failures < 10) $display("master %0d wrong read data %h", m, resp_data);
        end
        received[m]++;
      end
    // rotation: with all four waiting, no master wins twice within four grants
    if (req_valid == 4'hF && m_valid && m_ready) begin
      for (int m = 0; m < 4; m++)
        if (req_ready[m]) begin
          checks++;
          if (since[m] < 3 && since[m] >= 0) begin failures++; $display("master %0d granted again after %0d", m, since[m]); end
          since[m] = 0;
        end else if (since[m] >= 0) since[m]++;
    end else
      for (int m = 0; m < 4; m++) since[m] = -1;
  end

  for (genvar m = 0; m < 4; m++) begin : g_master
    initial begin
      @(posedge rst_n);
      for (int n = 0; n < NR; n++) begin
        @(negedge clk);
        while (m != 0 && $urandom_range(0, 4) == 0) @(negedge clk);
        req_valid[m] = 1;
        req[m] = '{we: ($urandom_range(0, 2) == 0), addr: addr_t'(m * 1024 + $urandom_range(0, 63)),
                   wdata: pix_t'($urandom)};
        @(posedge clk); while (!req_ready[m]) @(posedge clk);
        @(negedge clk); req_valid[m] = 0;
      end
    end
  end

  initial begin
    for (int i = 0; i < 4096; i++) begin u_mem.mem[i] = pix_t'(i ^ 'h5A5A); shadow[i] = pix_t'(i ^ 'h5A5A); end
    for (int m = 0; m < 4; m++) begin issued[m] = 0; received[m] = 0; since[m] = -1; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (6000) @(posedge clk);
    for (int m = 0; m < 4; m++) begin
      checks++;
      if (issued[m] != NR || expq[m].size() != 0) begin
        failures++; $display("master %0d issued %0d, %0d reads unanswered", m, issued[m], expq[m].size());
      end
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
