// calc_stage: one configurable calculator stage of the unrolled ISTA network.
//
// Every layer of the reconstruction network (initial I, middle M, final F)
// is an instance of the same computation on a vector streamed one element
// per clock:
//     z_j   = shrink(b_j, theta_j)                 (two-sided soft threshold)
//     d_j   = z_j - c_j                            (c_j = incoming z_j or stored c_j)
//     acc_i = sum_j A[i][j] * d_j                  (MAX_OUT parallel 48-bit MACCs)
//     out_i = sat16((acc_i >>> shift) + (b_add ? b_i : 0))
// and forwards z_i with out_i so that the next M layer can form z_{t+1}-z_t.
// Layer settings (paper notation):
//   I: theta = 0, c = 0 (c_sel=0), b_add = 0, A = Q^T  (64 in, 192 out)
//   M: theta learnt, c_sel = 1 (c_sel = 0 with c = 0 for the first M, where
//      z_1 = 0), b_add = 1, A = S                      (192 in, 192 out)
//   F: theta learnt, c = 0, b_add = 0, A = D           (192 in, 128 out)
// The stage form, the 16-bit data, the 48-bit MACCs, the matrix sizes and the
// one-MACC-per-clock schedule follow the paper.  The sign convention (A is
// stored as Q^T rather than -Q^T, matching b_1 = Q^T x of ISTA), the explicit
// z forwarding, the per-stage right shift as the scale factor and the
// element-serial ready/valid interface are this design's own.
//
// Interface: ready/valid element streams of vec_elem_t in and out; a host
// write port (cfg_we & cfg_sel) loads A, theta, c and the stage configuration.
// Timing: element j of the input is accepted in one clock; the coefficient
// row A[*][j] is read from the local RAM in the next clock and all MAX_OUT
// MACCs update in the clock after.  The result moves to an output buffer
// n_in+2 clocks after the first input element, so a new vector can be taken
// while the previous one is streamed out (n_out clocks); the stage sustains
// one vector per max(n_in+2, n_out) clocks.
module calc_stage
  import edof_pkg::*;
#(
  parameter int MAX_IN  = N_COEF,
  parameter int MAX_OUT = N_COEF
) (
  input  logic        clk,
  input  logic        rst_n,
  // host writes
  input  logic        cfg_we,
  input  logic        cfg_sel,
  input  logic [17:0] cfg_addr,
  input  logic [31:0] cfg_wdata,
  // input vector stream
  input  logic        in_valid,
  output logic        in_ready,
  input  vec_elem_t   in_elem,
  // output vector stream
  output logic        out_valid,
  input  logic        out_ready,
  output vec_elem_t   out_elem,
  // number of vectors completed (wraps)
  output logic [31:0] vec_count
);

  localparam int JW = $clog2(MAX_IN);
  localparam int IW = $clog2(MAX_OUT);

  stage_cfg_t cfg;
  data_t      coef  [MAX_IN][MAX_OUT];
  data_t      theta [MAX_IN];
  data_t      cvec  [MAX_IN];

  // ---------------- host writes ----------------
  always_ff @(posedge clk) begin
    if (cfg_we && cfg_sel) begin
      unique case (cfg_addr[17:16])
        2'd0: if (int'(cfg_addr[15:8]) < MAX_IN && int'(cfg_addr[7:0]) < MAX_OUT)
                coef[cfg_addr[15:8]][cfg_addr[7:0]] <= data_t'(cfg_wdata[15:0]);
        2'd1: if (int'(cfg_addr[7:0]) < MAX_IN) theta[cfg_addr[7:0]] <= data_t'(cfg_wdata[15:0]);
        2'd2: if (int'(cfg_addr[7:0]) < MAX_IN) cvec[cfg_addr[7:0]]  <= data_t'(cfg_wdata[15:0]);
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cfg <= '0;
    else if (cfg_we && cfg_sel && cfg_addr[17:16] == 2'd3)
      cfg <= '{n_in:  cfg_wdata[7:0],  n_out: cfg_wdata[15:8],
               shift: cfg_wdata[21:16], c_sel: cfg_wdata[24], b_add: cfg_wdata[25]};
  end

  // ---------------- input side: threshold and difference ----------------
  logic [JW-1:0] j_cnt;
  logic          hold;          // full vector taken, waiting for output buffer
  data_t         z_now, d_now;
  data_t         bkeep [MAX_IN];
  data_t         zkeep [MAX_IN];

  assign in_ready = !hold;
  wire accept   = in_valid && in_ready;
  wire last_in  = (int'(j_cnt) == int'(cfg.n_in) - 1);

  always_comb begin
    z_now = shrink(in_elem.b, theta[j_cnt]);
    d_now = sat16(49'(z_now) - 49'(cfg.c_sel ? in_elem.z : cvec[j_cnt]));
  end

  // pipeline register 1: coefficient row read and difference
  logic          p1_valid, p1_first;
  data_t         p1_d;
  data_t         row [MAX_OUT];

  always_ff @(posedge clk) begin
    if (accept) begin
      row        <= coef[j_cnt];
      p1_d       <= d_now;
      p1_first   <= (j_cnt == '0);
      bkeep[j_cnt] <= in_elem.b;
      zkeep[j_cnt] <= z_now;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      j_cnt    <= '0;
      p1_valid <= 1'b0;
    end else begin
      p1_valid <= accept;
      if (accept) j_cnt <= last_in ? '0 : j_cnt + 1'b1;
    end
  end

  // ---------------- MACC array ----------------
  acc_t acc [MAX_OUT];
  always_ff @(posedge clk) begin
    if (p1_valid)
      for (int i = 0; i < MAX_OUT; i++)
        acc[i] <= (p1_first ? acc_t'(0) : acc[i]) + acc_t'(row[i] * p1_d);
  end

  // ---------------- output buffer ----------------
  data_t         ob_b [MAX_OUT];
  data_t         ob_z [MAX_OUT];
  logic          out_active;
  logic [IW-1:0] o_cnt;
  wire           transfer = hold && !p1_valid && !out_active;

  always_ff @(posedge clk) begin
    if (transfer)
      for (int i = 0; i < MAX_OUT; i++) begin
        ob_b[i] <= sat16(49'(acc[i] >>> cfg.shift) +
                         ((cfg.b_add && i < MAX_IN) ? 49'(bkeep[i % MAX_IN]) : 49'sd0));
        ob_z[i] <= (i < MAX_IN && i < int'(cfg.n_in)) ? zkeep[i % MAX_IN] : data_t'(0);
      end
  end

  wire out_last = (int'(o_cnt) == int'(cfg.n_out) - 1);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold       <= 1'b0;
      out_active <= 1'b0;
      o_cnt      <= '0;
      vec_count  <= '0;
    end else begin
      if (accept && last_in) hold <= 1'b1;
      else if (transfer)     hold <= 1'b0;
      if (transfer) begin
        out_active <= 1'b1;
        o_cnt      <= '0;
      end else if (out_valid && out_ready) begin
        o_cnt <= o_cnt + 1'b1;
        if (out_last) begin
          out_active <= 1'b0;
          vec_count  <= vec_count + 1;
        end
      end
    end
  end

  assign out_valid = out_active;
  assign out_elem  = '{b: ob_b[o_cnt], z: ob_z[o_cnt], last: out_last};

  // The producer must mark the last element exactly where n_in says.
  a_last_matches_n_in: assert property (@(posedge clk) disable iff (!rst_n)
      accept |-> (in_elem.last == last_in));

endmodule
