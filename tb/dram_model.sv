// dram_model: behavioural model of the external DRAM and its controller,
// for simulation only (not synthesizable logic of the design).
//
// WORDS 16-bit words.  A request is accepted when req_valid and req_ready
// are high; req_ready is randomly withheld (one clock in STALL_IN_4 out of
// four) to exercise back-pressure.  Writes update the array at once; reads
// return their data in request order exactly LATENCY clocks after
// acceptance on resp_valid / resp_data.  The array mem is public so that
// testbenches can preload input frames and inspect output frames.
module dram_model
  import edof_pkg::*;
#(
  parameter int WORDS      = 1 << 16,
  parameter int LATENCY    = 12,
  parameter int STALL_IN_4 = 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     resp_valid,
  output pix_t     resp_data
);
  pix_t mem [WORDS];
  logic [LATENCY-1:0] vpipe;
  pix_t               dpipe [LATENCY];
  longint n_reads = 0, n_writes = 0;

  always_ff @(posedge clk) begin
    if (!rst_n) req_ready <= 1'b0;
    else        req_ready <= ($urandom_range(0, 3) >= STALL_IN_4);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) vpipe <= '0;
    else begin
      vpipe <= {vpipe[LATENCY-2:0], req_valid && req_ready && !req.we};
      dpipe[0] <= mem[int'(req.addr) % WORDS];
      for (int i = 1; i < LATENCY; i++) dpipe[i] <= dpipe[i-1];
      if (req_valid && req_ready) begin
        if (req.we) begin
          mem[int'(req.addr) % WORDS] <= req.wdata;
          n_writes <= n_writes + 1;
        end else
          n_reads <= n_reads + 1;
      end
    end
  end

  assign resp_valid = vpipe[LATENCY-1];
  assign resp_data  = dpipe[LATENCY-1];
endmodule
