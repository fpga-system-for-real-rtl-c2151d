// write_agent_out: writes the pooled, raster-ordered output image into an
// output frame buffer in DRAM.
//
// Pixels (16-bit 4:2:2 {Y, C}) arrive on a ready/valid stream; the pixel
// marked start-of-frame latches the buffer base chosen by the frame
// controller and restarts the address count.  Pixel n is written to
// base + n; the stream is held off while the DRAM bus is busy (in_ready is
// the bus's ready).  frame_done pulses when the write of pixel
// width*height-1 is accepted.  Follows the paper's "Write Agent 1"; the
// addressing is this design's own.
module write_agent_out
  import edof_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] width,
  input  logic [15:0] height,
  input  addr_t       base,
  input  logic        in_valid,
  output logic        in_ready,
  input  pix_t        in_pix,
  input  logic        in_sof,
  output logic        req_valid,
  input  logic        req_ready,
  output mem_req_t    req,
  output logic        frame_done
);
  addr_t       fbase;
  logic [31:0] pcount;
  wire  [31:0] npix = 32'(width) * 32'(height);

  wire   addr_t cur_base = in_sof ? base : fbase;
  wire   [31:0] cur_n    = in_sof ? 32'd0 : pcount;

  assign req_valid = in_valid;
  assign in_ready  = req_ready;
  assign req       = '{we: 1'b1, addr: cur_base + addr_t'(cur_n), wdata: in_pix};
  wire   fire      = in_valid && req_ready;
  assign frame_done = fire && (cur_n == npix - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fbase  <= '0;
      pcount <= '0;
    end else if (fire) begin
      fbase  <= cur_base;
      pcount <= cur_n + 1;
    end
  end
endmodule
