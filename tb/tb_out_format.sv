// tb_out_format: checks the gamma table and chroma reduction.
//
// The full 65536-entry table is loaded with g(i) = (i * 37 + 11) mod 256
// through the host port.  Three patches of 128 random 16-bit values are
// sent with random input gaps and random output stalls; luma elements must
// come out as g(value as unsigned), chroma elements as the value clamped to
// [-128, 127] plus 128, with the element index and last flag of each patch.
module tb_out_format;
  import edof_pkg::*;
  localparam int NP = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we = 0;
  logic [31:0] cfg_addr, cfg_wdata;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, out_last;
  vec_elem_t in_elem;
  logic [6:0] out_idx;
  logic [7:0] out_val;

  out_format dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .in_valid, .in_ready, .in_elem,
                  .out_valid, .out_ready, .out_idx, .out_val, .out_last);

  int v [NP*128];
  function automatic int g(input int i); return (i * 37 + 11) % 256; endfunction
  function automatic int expect_val(input int k);
    int val = v[k];
    if (k % 128 < 64) return g(val & 16'hFFFF);
    if (val > 127) return 255;
    if (val < -128) return 0;
    return val + 128;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 65536; i++) begin
      @(negedge clk); cfg_we = 1; cfg_addr = {4'hF, 12'd0, 16'(i)}; cfg_wdata = 32'(g(i));
    end
    @(negedge clk); cfg_we = 0;
    for (int k = 0; k < NP*128; k++)
      v[k] = ($urandom_range(0, 1) == 1) ? int'($urandom_range(0, 65535)) - 32768
                                         : int'($urandom_range(0, 600)) - 300;
    fork
      for (int k = 0; k < NP*128; k++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_elem = '{b: data_t'(v[k]), z: '0, last: (k % 128 == 127)};
        @(posedge clk); while (!in_ready) @(posedge clk);
        if (k == NP*128 - 1) begin @(negedge clk); in_valid = 0; end
      end
      for (int k = 0; k < NP*128; ) begin
        @(negedge clk); out_ready = ($urandom_range(0, 2) != 0);
        @(posedge clk);
        if (out_valid && out_ready) begin
          checks++;
          if (int'(out_val) != expect_val(k) || int'(out_idx) != k % 128 || out_last != (k % 128 == 127)) begin
            failures++;
            if (failures < 10) $display("k=%0d idx %0d val %0d expected %0d", k, out_idx, out_val, expect_val(k));
          end
          k++;
        end
      end
    join
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
