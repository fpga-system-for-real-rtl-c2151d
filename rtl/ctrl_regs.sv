// ctrl_regs: host-loaded control registers and frame-buffer sequencing.
//
// The host writes 32-bit words; target nibble cfg_addr[31:28] = 0 selects
// this block, register number cfg_addr[3:0]:
//   0 width   1 height   2 stride_log2 (1..3)   3 h_total   4 v_total
//   5 input buffer 0 base   6 input buffer 1 base
//   7 output buffer 0 base  8 output buffer 1 base
//   9 bit 0: enable processing and display
// Buffer sequencing (this design's own; the paper only says the frames are
// buffered in DRAM): the HDMI writer is given the input buffer that the
// patch reader is not using.  A completed input frame becomes "newest";
// the patch reader is started on the newest complete frame whenever it is
// idle.  If the writer starts over the newest frame before it was read,
// that frame is dropped (frames_dropped).  The output side alternates
// between two buffers: the display reads the last completed one while the
// next is being written.
module ctrl_regs
  import edof_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [31:0] cfg_addr,
  input  logic [31:0] cfg_wdata,
  // register values
  output logic [15:0] width,
  output logic [15:0] height,
  output logic [1:0]  stride_log2,
  output logic [15:0] h_total,
  output logic [15:0] v_total,
  output logic        enable,
  // input frame buffers
  input  logic        wa0_frame_start,
  input  logic        wa0_frame_done,
  output addr_t       wa0_base,
  output logic        ra0_start,
  output addr_t       ra0_base,
  input  logic        ra0_done,
  // output frame buffers
  input  logic        wa1_frame_done,
  output addr_t       wa1_base,
  output addr_t       ra1_base,
  // statistics
  output logic [31:0] frames_in,
  output logic [31:0] frames_processed,
  output logic [31:0] frames_dropped
);
  addr_t in_base  [2];
  addr_t out_base [2];

  logic wbuf;          // input buffer the writer uses / will use
  logic newest;        // most recent complete input buffer
  logic newest_ok;     // ... not yet handed to the reader
  logic rbusy, rbuf;   // reader activity and its buffer
  logic obuf;          // output buffer being written

  wire regs_we = cfg_we && cfg_addr[31:28] == TGT_REGS;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      width <= 16'd1920; height <= 16'd1080; stride_log2 <= 2'd3;
      h_total <= 16'd2200; v_total <= 16'd1125; enable <= 1'b0;
      in_base[0] <= '0; in_base[1] <= '0; out_base[0] <= '0; out_base[1] <= '0;
    end else if (regs_we) begin
      unique case (cfg_addr[3:0])
        4'd0: width       <= cfg_wdata[15:0];
        4'd1: height      <= cfg_wdata[15:0];
        4'd2: stride_log2 <= cfg_wdata[1:0];
        4'd3: h_total     <= cfg_wdata[15:0];
        4'd4: v_total     <= cfg_wdata[15:0];
        4'd5: in_base[0]  <= addr_t'(cfg_wdata);
        4'd6: in_base[1]  <= addr_t'(cfg_wdata);
        4'd7: out_base[0] <= addr_t'(cfg_wdata);
        4'd8: out_base[1] <= addr_t'(cfg_wdata);
        4'd9: enable      <= cfg_wdata[0];
        default: ;
      endcase
    end
  end

  // the writer takes the buffer the reader is not on
  wire next_wbuf = rbusy ? !rbuf : !newest;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbuf <= 1'b0; newest <= 1'b1; newest_ok <= 1'b0;
      rbusy <= 1'b0; rbuf <= 1'b0; obuf <= 1'b0; ra0_start <= 1'b0;
      frames_in <= '0; frames_processed <= '0; frames_dropped <= '0;
    end else begin
      ra0_start <= 1'b0;
      if (wa0_frame_start) begin
        wbuf <= next_wbuf;
        if (newest_ok && next_wbuf == newest) begin
          newest_ok      <= 1'b0;
          frames_dropped <= frames_dropped + 1;
        end
      end else if (wa0_frame_done) begin
        newest    <= wbuf;
        newest_ok <= 1'b1;
        frames_in <= frames_in + 1;
      end
      if (ra0_done) rbusy <= 1'b0;
      if (!rbusy && !ra0_start && newest_ok && enable && !wa0_frame_start && !wa0_frame_done) begin
        rbusy     <= 1'b1;
        rbuf      <= newest;
        newest_ok <= 1'b0;
        ra0_start <= 1'b1;
      end
      if (wa1_frame_done) begin
        obuf             <= !obuf;
        frames_processed <= frames_processed + 1;
      end
    end
  end

  assign wa0_base = in_base[next_wbuf];
  assign ra0_base = in_base[rbuf];
  assign wa1_base = out_base[obuf];
  assign ra1_base = out_base[!obuf];
endmodule
