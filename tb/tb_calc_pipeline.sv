// tb_calc_pipeline: end-to-end test of the four-stage calculator pipeline
// configured as the network I -> M -> M -> F at full size (64 -> 192 ->
// 192 -> 192 -> 128).
//
// Random matrices, thresholds and shifts are loaded through the host port,
// five random Bayer patches are streamed in back to back, and every one of
// the 128 outputs per patch is compared with an ISTA reference computed
// here:  b1 = Q^T x;  z2 = shrink(b1), b2 = b1 + S1 (z2 - 0);
// z3 = shrink(b2), b3 = b2 + S2 (z3 - z2);  out = D shrink(b3),
// with the same per-stage right shifts and 16-bit saturation.  Timing: the
// first output must appear sum(n_in + 2) = 648 clocks after the first
// input, and later patches must leave every 194 clocks (the 192-element
// layers plus two clocks).
module tb_calc_pipeline;
  import edof_pkg::*;
  localparam int NP = 5;
  localparam int DIN [4]  = '{64, 192, 192, 192};
  localparam int DOUT [4] = '{192, 192, 192, 128};
  localparam int SH [4]   = '{6, 9, 9, 8};
  localparam int CS [4]   = '{0, 0, 1, 0};
  localparam int BA [4]   = '{0, 1, 1, 0};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we = 0;
  logic [31:0] cfg_addr, cfg_wdata;
  logic in_valid = 0, in_ready, out_valid;
  vec_elem_t in_elem, out_elem;
  logic [31:0] patches_done;

  calc_pipeline dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
                     .in_valid, .in_ready, .in_elem, .out_valid, .out_ready(1'b1),
                     .out_elem, .patches_done);

  int A  [4][192][192];
  int th [4][192];
  int x  [NP][64];
  int expv [NP][128];

  function automatic int shr(input int v, input int t);
    if (v > t) return v - t;
    if (v < -t) return v + t;
    return 0;
  endfunction
  function automatic int sat(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
  endtask

  task automatic reference(input int p);
    int b [192], z [192], zprev [192], nb [192];
    for (int j = 0; j < 64; j++) b[j] = x[p][j];
    for (int j = 0; j < 192; j++) zprev[j] = 0;
    for (int s = 0; s < 4; s++) begin
      for (int j = 0; j < DIN[s]; j++) z[j] = shr(b[j], th[s][j]);
      for (int i = 0; i < DOUT[s]; i++) begin
        longint acc = 0;
        for (int j = 0; j < DIN[s]; j++)
          acc += longint'(A[s][j][i]) * sat(longint'(z[j]) - (CS[s] != 0 ? zprev[j] : 0));
        nb[i] = sat((acc >>> SH[s]) + (BA[s] != 0 ? b[i] : 0));
      end
      for (int j = 0; j < 192; j++) zprev[j] = (j < DIN[s]) ? z[j] : 0;
      for (int i = 0; i < DOUT[s]; i++) b[i] = nb[i];
    end
    for (int i = 0; i < 128; i++) expv[p][i] = b[i];
  endtask

  longint cyc = 0, t_in = -1;
  longint t_out [NP];
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 4; s++) begin
      wr({4'(s + 1), 10'd0, 2'd3, 16'd0},
         {6'd0, 1'(BA[s]), 1'(CS[s]), 2'd0, 6'(SH[s]), 8'(DOUT[s]), 8'(DIN[s])});
      for (int j = 0; j < DIN[s]; j++) begin
        th[s][j] = (s == 0) ? 0 : $urandom_range(0, 200);
        wr({4'(s + 1), 10'd0, 2'd1, 8'd0, 8'(j)}, 32'(th[s][j]));
        wr({4'(s + 1), 10'd0, 2'd2, 8'd0, 8'(j)}, 32'd0);
        for (int i = 0; i < DOUT[s]; i++) begin
          A[s][j][i] = int'($urandom_range(0, 256)) - 128;
          wr({4'(s + 1), 10'd0, 2'd0, 8'(j), 8'(i)}, 32'(A[s][j][i]));
        end
      end
    end
    @(negedge clk); cfg_we = 0;
    for (int p = 0; p < NP; p++) begin
      for (int j = 0; j < 64; j++) x[p][j] = $urandom_range(0, 4095);
      reference(p);
    end
    fork
      for (int p = 0; p < NP; p++)
        for (int j = 0; j < 64; j++) begin
          @(negedge clk);
          in_valid = 1;
          in_elem = '{b: data_t'(x[p][j]), z: '0, last: (j == 63)};
          @(posedge clk); while (!in_ready) @(posedge clk);
          if (t_in < 0) t_in = cyc;
          if (p == NP - 1 && j == 63) begin @(negedge clk); in_valid = 0; end
        end
      for (int p = 0; p < NP; p++)
        for (int i = 0; i < 128; i++) begin
          @(posedge clk); while (!out_valid) @(posedge clk);
          if (i == 0) t_out[p] = cyc;
          checks++;
          if (int'(out_elem.b) != expv[p][i] || out_elem.last != (i == 127)) begin
            failures++;
            if (failures < 10) $display("patch %0d elem %0d: %0d expected %0d", p, i, out_elem.b, expv[p][i]);
          end
        end
    join
    checks++;
    if (t_out[0] - t_in != 648) begin failures++; $display("latency %0d", t_out[0] - t_in); end
    for (int p = 1; p < NP; p++) begin
      checks++;
      if (t_out[p] - t_out[p-1] != 194) begin failures++; $display("interval %0d", t_out[p] - t_out[p-1]); end
    end
    @(posedge clk);
    checks++;
    if (patches_done != NP) begin failures++; $display("patches_done %0d", patches_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
