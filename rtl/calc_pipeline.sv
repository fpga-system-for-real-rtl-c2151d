// calc_pipeline: the chain of calculator stages that evaluates the unrolled
// ISTA network I -> (T-2) x M -> F on one patch vector after another.
//
// N_STAGES identical calc_stage instances are connected output to input
// with ready/valid handshakes, so different patches occupy different stages
// at the same time and throughput is set by the slowest stage (about 192
// clocks per patch for 192-element layers).  Each stage is told by the host
// whether it acts as I, M or F through its configuration word and its own
// coefficient memory: stage k answers host writes whose target nibble
// cfg_addr[31:28] is k+1.  The default of four stages is the paper's
// real-time T = 4 network; the paper's pipeline holds up to eight.
// Interface: vec_elem_t stream in (64 Bayer samples per patch) and out
// (128 YCbCr values per patch, in the b field).
module calc_pipeline
  import edof_pkg::*;
#(
  parameter int N_STAGES = 4,
  parameter int MAX_DIM  = N_COEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [31:0] cfg_addr,
  input  logic [31:0] cfg_wdata,
  input  logic        in_valid,
  output logic        in_ready,
  input  vec_elem_t   in_elem,
  output logic        out_valid,
  input  logic        out_ready,
  output vec_elem_t   out_elem,
  output logic [31:0] patches_done
);
  logic      v     [N_STAGES+1];
  logic      r     [N_STAGES+1];
  vec_elem_t e     [N_STAGES+1];
  logic [31:0] cnt [N_STAGES];

  assign v[0]     = in_valid;
  assign in_ready = r[0];
  assign e[0]     = in_elem;

  for (genvar k = 0; k < N_STAGES; k++) begin : g_stage
    calc_stage #(.MAX_IN(MAX_DIM), .MAX_OUT(MAX_DIM)) u_stage (
      .clk, .rst_n,
      .cfg_we, .cfg_sel(cfg_addr[31:28] == 4'(k + 1)),
      .cfg_addr(cfg_addr[17:0]), .cfg_wdata,
      .in_valid(v[k]),   .in_ready(r[k]),   .in_elem(e[k]),
      .out_valid(v[k+1]), .out_ready(r[k+1]), .out_elem(e[k+1]),
      .vec_count(cnt[k])
    );
  end

  assign out_valid        = v[N_STAGES];
  assign r[N_STAGES]      = out_ready;
  assign out_elem         = e[N_STAGES];
  assign patches_done     = cnt[N_STAGES-1];
endmodule
