// read_agent_out: reads the finished output frame from DRAM and plays it
// out as an HDMI video stream with blanking and sync.
//
// A raster counter runs over h_total x v_total clocks; the first width x
// height positions of each line/frame are active (de high), followed by
// front porch, sync pulse and back porch of HFP/HS and VFP/VS lines
// (CEA-861 1080p values by default).  A prefetch FIFO is kept filled with
// sequential reads of the displayed buffer; each active pixel pops one word
// and sends it as Y = bits 15:8, C = bits 7:0 (4:2:2).  A pixel that finds
// the FIFO empty is sent black and counted in underruns.  At the start of
// vertical blanking the agent stops fetching, discards responses still in
// flight, clears the FIFO, latches the buffer base offered by the frame
// controller and starts prefetching the next frame.  While enable is low
// the raster is held at the start of vertical blanking, so the first frame
// after enabling is prefetched before it is shown.  Follows the paper's
// "Read Agent 1"; the timing generator and FIFO policy are this design's own.
module read_agent_out
  import edof_pkg::*;
#(
  parameter int FIFO_DEPTH = 64,
  parameter int HFP = 88,
  parameter int HS  = 44,
  parameter int VFP = 4,
  parameter int VS  = 5
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  input  logic [15:0] width,
  input  logic [15:0] height,
  input  logic [15:0] h_total,
  input  logic [15:0] v_total,
  input  addr_t       base,
  output logic        frame_start,     // base latched, new frame prefetch begins
  // DRAM bus
  output logic        req_valid,
  input  logic        req_ready,
  output mem_req_t    req,
  input  logic        resp_valid,
  input  pix_t        resp_data,
  // HDMI output
  output logic        hdmi_de,
  output logic        hdmi_hsync,
  output logic        hdmi_vsync,
  output logic [7:0]  hdmi_y,
  output logic [7:0]  hdmi_c,
  output logic [31:0] underruns
);
  localparam int CW = $clog2(FIFO_DEPTH + 1);

  logic [15:0] hc, vc;
  addr_t       fbase;
  logic [31:0] fptr;
  logic        draining;
  logic [CW-1:0] outstanding;

  logic  f_empty, f_full;
  pix_t  f_data;
  logic [CW-1:0] f_count;

  wire [31:0] npix   = 32'(width) * 32'(height);
  wire        active = enable && (hc < width) && (vc < height);
  wire        vblank_start = enable && (hc == 16'd0) && (vc == height);
  wire        pop    = active && !f_empty;

  assign req_valid = enable && !draining && (fptr < npix) &&
                     (int'(outstanding) + int'(f_count) < FIFO_DEPTH);
  assign req       = '{we: 1'b0, addr: fbase + addr_t'(fptr), wdata: '0};
  wire   fire      = req_valid && req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hc <= '0; vc <= '0; fbase <= '0; fptr <= '0;
      draining <= 1'b1; outstanding <= '0; underruns <= '0;
      hdmi_de <= 1'b0; hdmi_hsync <= 1'b0; hdmi_vsync <= 1'b0;
      hdmi_y <= '0; hdmi_c <= '0; frame_start <= 1'b0;
    end else begin
      frame_start <= 1'b0;
      outstanding <= outstanding + CW'(fire) - CW'(resp_valid);
      if (!enable) begin
        hc <= '0;
        vc <= height;            // wait in vertical blanking
      end else begin
        if (hc == h_total - 16'd1) begin
          hc <= '0;
          vc <= (vc == v_total - 16'd1) ? 16'd0 : vc + 16'd1;
        end else
          hc <= hc + 16'd1;
      end
      if (fire) fptr <= fptr + 1;
      if (vblank_start) draining <= 1'b1;
      else if (draining && outstanding == '0 && !resp_valid) begin
        draining    <= 1'b0;
        fbase       <= base;
        fptr        <= '0;
        frame_start <= 1'b1;
      end
      // registered video outputs
      hdmi_de    <= active;
      hdmi_hsync <= enable && (hc >= width + 16'(HFP)) && (hc < width + 16'(HFP + HS));
      hdmi_vsync <= enable && (vc >= height + 16'(VFP)) && (vc < height + 16'(VFP + VS));
      if (active) begin
        if (pop) {hdmi_y, hdmi_c} <= f_data;
        else begin
          {hdmi_y, hdmi_c} <= 16'h0080;   // black in YCbCr
          underruns <= underruns + 1;
        end
      end else
        {hdmi_y, hdmi_c} <= '0;
    end
  end

  // responses that arrive while draining belong to the old frame: drop them
  sync_fifo #(.WIDTH(PIX_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .clear(draining),
    .push(resp_valid && !draining), .wdata(resp_data),
    .pop, .rdata(f_data),
    .empty(f_empty), .full(f_full), .count(f_count)
  );

  a_no_fifo_overflow: assert property (@(posedge clk) disable iff (!rst_n)
      (resp_valid && !draining) |-> !f_full);
endmodule
