// write_agent_in: receives raw Bayer frames from the HDMI input and writes
// them to a frame buffer in DRAM in raster order.
//
// Each 16-bit raw sample arrives as one HDMI 4:2:2 pixel: the most
// significant byte on the Y channel and the least significant byte on the
// C channel (as in the paper).  A rising edge of vsync starts a frame: the
// buffer base chosen by the frame controller is latched and frame_start
// pulses.  Every pixel with de high is written to base + pixel number
// through a FIFO that absorbs DRAM arbitration stalls; the HDMI stream
// cannot be held off, so a pixel that finds the FIFO full is dropped and
// counted in overflows.  frame_done pulses when the write of pixel
// width*height-1 is handed to the DRAM bus.  The FIFO, the vsync framing
// and the overflow policy are this design's own; the input is assumed to be
// already in the system clock domain.
module write_agent_in
  import edof_pkg::*;
#(
  parameter int FIFO_DEPTH = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] width,
  input  logic [15:0] height,
  input  addr_t       base,
  // HDMI input
  input  logic        hdmi_de,
  input  logic        hdmi_vsync,
  input  logic [7:0]  hdmi_y,
  input  logic [7:0]  hdmi_c,
  // DRAM bus
  output logic        req_valid,
  input  logic        req_ready,
  output mem_req_t    req,
  // status
  output logic        frame_start,
  output logic        frame_done,
  output logic [31:0] overflows
);
  typedef struct packed {
    logic     last;
    mem_req_t r;
  } entry_t;

  logic   vs_q, in_frame;
  addr_t  fbase;
  logic [31:0] pcount;
  logic [31:0] npix;
  assign npix = 32'(width) * 32'(height);

  entry_t  wr_e, rd_e;
  logic    f_empty, f_full;
  logic [$clog2(FIFO_DEPTH+1)-1:0] f_count;

  wire vs_rise = hdmi_vsync && !vs_q;
  wire pix_in  = hdmi_de && in_frame && (pcount < npix);

  assign wr_e = '{last: (pcount == npix - 1),
                  r: '{we: 1'b1, addr: fbase + addr_t'(pcount), wdata: {hdmi_y, hdmi_c}}};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vs_q        <= 1'b0;
      in_frame    <= 1'b0;
      fbase       <= '0;
      pcount      <= '0;
      frame_start <= 1'b0;
      overflows   <= '0;
    end else begin
      vs_q        <= hdmi_vsync;
      frame_start <= 1'b0;
      if (vs_rise) begin
        in_frame    <= 1'b1;
        fbase       <= base;
        pcount      <= '0;
        frame_start <= 1'b1;
      end else if (pix_in) begin
        pcount <= pcount + 1;
        if (f_full) overflows <= overflows + 1;
      end
    end
  end

  sync_fifo #(.WIDTH($bits(entry_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .clear(1'b0),
    .push(pix_in), .wdata(wr_e),
    .pop(req_valid && req_ready), .rdata(rd_e),
    .empty(f_empty), .full(f_full), .count(f_count)
  );

  assign req_valid  = !f_empty;
  assign req        = rd_e.r;
  assign frame_done = req_valid && req_ready && rd_e.last;
endmodule
