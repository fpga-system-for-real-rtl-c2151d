// sync_fifo: single-clock first-in first-out buffer used by the DRAM agents.
//
// A circular array of DEPTH words with separate read and write pointers and
// an occupancy counter.  push is ignored when full and pop when empty; the
// head word is visible on rdata whenever empty is low (first-word
// fall-through).  The occupancy is exported so that readers can bound their
// outstanding DRAM reads by the free space.  This is a generic helper, not a
// block described on its own by the paper.
module sync_fifo #(
  parameter int WIDTH = 16,
  parameter int DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             push,
  input  logic [WIDTH-1:0] wdata,
  input  logic             pop,
  output logic [WIDTH-1:0] rdata,
  output logic             empty,
  output logic             full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = $clog2(DEPTH);
  localparam int CW = $clog2(DEPTH+1);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;

  wire do_push = push && !full;
  wire do_pop  = pop && !empty;

  always_ff @(posedge clk) if (do_push) mem[wp] <= wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else if (clear) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= (int'(wp) == DEPTH-1) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (int'(rp) == DEPTH-1) ? '0 : rp + 1'b1;
      count <= count + CW'(do_push) - CW'(do_pop);
    end
  end

  assign rdata = mem[rp];
  assign empty = (count == '0);
  assign full  = (int'(count) == DEPTH);
endmodule
