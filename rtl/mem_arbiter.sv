// mem_arbiter: shares the single external DRAM port among the four agents
// (HDMI write, patch read, pooled-output write, display read).
//
// Round-robin grant: the requesting master that follows the last granted
// one wins.  Reads return in request order from the DRAM controller, so the
// master number of every granted read is queued in a tag FIFO and each read
// response is steered to the master at its head.  Reads are only granted
// while the tag FIFO has room.  The paper names only the four agents and the
// shared DRAM; this arbiter and its policy are this design's own.
// Interface: per-master ready/valid mem_req_t and a resp_valid strobe with
// shared resp_data; the same bundle towards the DRAM controller.
module mem_arbiter
  import edof_pkg::*;
#(
  parameter int N_MASTERS = 4,
  parameter int MAX_READS = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N_MASTERS-1:0] req_valid,
  output logic [N_MASTERS-1:0] req_ready,
  input  mem_req_t             req [N_MASTERS],
  output logic [N_MASTERS-1:0] resp_valid,
  output pix_t                 resp_data,
  // towards the DRAM controller
  output logic                 m_valid,
  input  logic                 m_ready,
  output mem_req_t             m_req,
  input  logic                 m_resp_valid,
  input  pix_t                 m_resp_data
);
  localparam int MW = $clog2(N_MASTERS);

  logic [MW-1:0] last_grant, grant;
  logic          any;
  logic          tag_full, tag_empty;
  logic [MW-1:0] tag_head;
  logic [$clog2(MAX_READS+1)-1:0] tag_count;

  // a master is eligible if it requests and, for a read, a tag slot is free
  logic [N_MASTERS-1:0] elig;
  always_comb
    for (int i = 0; i < N_MASTERS; i++)
      elig[i] = req_valid[i] && (req[i].we || !tag_full);

  always_comb begin
    any   = 1'b0;
    grant = last_grant;
    for (int k = 1; k <= N_MASTERS; k++) begin
      automatic int c = (int'(last_grant) + k) % N_MASTERS;
      if (!any && elig[c]) begin
        any   = 1'b1;
        grant = MW'(c);
      end
    end
  end

  assign m_valid = any;
  assign m_req   = req[grant];
  always_comb begin
    req_ready = '0;
    req_ready[grant] = any && m_ready;
  end

  wire issued = any && m_ready;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)      last_grant <= MW'(N_MASTERS - 1);
    else if (issued) last_grant <= grant;

  sync_fifo #(.WIDTH(MW), .DEPTH(MAX_READS)) u_tags (
    .clk, .rst_n, .clear(1'b0),
    .push(issued && !m_req.we), .wdata(grant),
    .pop(m_resp_valid), .rdata(tag_head),
    .empty(tag_empty), .full(tag_full), .count(tag_count)
  );

  always_comb begin
    resp_valid = '0;
    resp_valid[tag_head] = m_resp_valid;
  end
  assign resp_data = m_resp_data;

  a_resp_has_tag: assert property (@(posedge clk) disable iff (!rst_n)
      m_resp_valid |-> !tag_empty);
endmodule
