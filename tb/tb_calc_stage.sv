// tb_calc_stage: self-checking test of one calculator stage.
//
// Loads random A, theta and c into a full-size stage (192 x 192 RAM), sets
// an M-layer style configuration (c = incoming z, b added, right shift 3)
// with n_in = 24 and n_out = 20, and sends three vectors back to back while
// the output side is randomly stalled.  Every output element (b and z) is
// compared with a reference computed here in 64-bit integers, and the
// latency from the first accepted input element to the first output
// element is checked to be n_in + 2 clocks.  A second configuration
// (I-layer style: c from memory, no b add, shift 0) is tested after.
module tb_calc_stage;
  import edof_pkg::*;
  localparam int NI = 24, NO = 20, NV = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        cfg_we = 0;
  logic [17:0] cfg_addr;
  logic [31:0] cfg_wdata;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  vec_elem_t in_elem, out_elem;
  logic [31:0] vec_count;

  calc_stage dut (.clk, .rst_n, .cfg_we, .cfg_sel(1'b1), .cfg_addr, .cfg_wdata,
                  .in_valid, .in_ready, .in_elem, .out_valid, .out_ready, .out_elem, .vec_count);

  int A [NI][NO];
  int th [NI], cv [NI];
  int vb [NV][NI], vz [NV][NI];
  int shift, csel, badd;

  task automatic wr(input logic [17:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  function automatic int shr(input int x, input int t);
    if (x > t) return x - t;
    if (x < -t) return x + t;
    return 0;
  endfunction
  function automatic int sat(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  int exp_b [NV][NO], exp_z [NV][NO];
  task automatic compute();
    for (int v = 0; v < NV; v++)
      for (int i = 0; i < NO; i++) begin
        longint acc = 0;
        for (int j = 0; j < NI; j++) begin
          int z = shr(vb[v][j], th[j]);
          int d = sat(longint'(z) - (csel ? vz[v][j] : cv[j]));
          acc += longint'(A[j][i]) * d;
        end
        exp_b[v][i] = sat((acc >>> shift) + (badd ? vb[v][i] : 0));
        exp_z[v][i] = (i < NI) ? shr(vb[v][i], th[i]) : 0;
      end
  endtask

  longint cyc = 0, t_first_in, t_first_out;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic run(input int sh, input int cs, input int ba);
    int ov, oi;
    shift = sh; csel = cs; badd = ba;
    wr({2'd3, 16'd0}, {6'd0, 1'(ba), 1'(cs), 2'd0, 6'(sh), 8'(NO), 8'(NI)});
    for (int v = 0; v < NV; v++)
      for (int j = 0; j < NI; j++) begin
        vb[v][j] = int'($urandom_range(0, 4000)) - 2000;
        vz[v][j] = int'($urandom_range(0, 400)) - 200;
      end
    compute();
    t_first_in = -1; t_first_out = -1;
    fork
      begin
        for (int v = 0; v < NV; v++)
          for (int j = 0; j < NI; j++) begin
            @(negedge clk);
            in_valid = 1;
            in_elem  = '{b: data_t'(vb[v][j]), z: data_t'(vz[v][j]), last: (j == NI-1)};
            @(posedge clk); while (!in_ready) @(posedge clk);
            if (t_first_in < 0) t_first_in = cyc;
          end
        @(negedge clk); in_valid = 0;
      end
      begin
        ov = 0; oi = 0;
        while (ov < NV) begin
          @(negedge clk);
          out_ready = (ov == 0) ? 1'b1 : ($urandom_range(0, 3) != 0);
          @(posedge clk);
          if (out_valid && out_ready) begin
            if (t_first_out < 0) t_first_out = cyc;
            checks++;
            if (int'(out_elem.b) != exp_b[ov][oi] || int'(out_elem.z) != exp_z[ov][oi] ||
                out_elem.last != (oi == NO-1)) begin
              failures++;
              $display("MISMATCH v%0d i%0d: b=%0d exp %0d z=%0d exp %0d", ov, oi,
                       out_elem.b, exp_b[ov][oi], out_elem.z, exp_z[ov][oi]);
            end
            oi++;
            if (oi == NO) begin oi = 0; ov++; end
          end
        end
        @(negedge clk); out_ready = 0;
      end
    join
    checks++;
    if (t_first_out - t_first_in != NI + 2) begin
      failures++;
      $display("latency %0d, expected %0d", t_first_out - t_first_in, NI + 2);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < NI; j++) begin
      th[j] = $urandom_range(0, 300);
      cv[j] = int'($urandom_range(0, 200)) - 100;
      wr({2'd1, 8'd0, 8'(j)}, 32'(th[j]));
      wr({2'd2, 8'd0, 8'(j)}, 32'(cv[j]));
      for (int i = 0; i < NO; i++) begin
        A[j][i] = int'($urandom_range(0, 2000)) - 1000;
        wr({2'd0, 8'(j), 8'(i)}, 32'(A[j][i]));
      end
    end
    run(3, 1, 1);
    run(0, 0, 0);
    checks++;
    if (vec_count != 2*NV) begin failures++; $display("vec_count %0d", vec_count); end
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
