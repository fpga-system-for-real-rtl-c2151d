// edof_top: real-time extended-depth-of-field reconstruction system.
//
// Raw Bayer frames captured through a phase-coded aperture arrive on the
// HDMI input and are written to DRAM (write_agent_in).  Whenever a complete
// frame is available, patch_reader cuts it into (possibly overlapping) 8x8
// patches, calc_pipeline runs the unrolled ISTA network I -> M ... -> F on
// each patch, out_format applies the gamma table to luma and clamps chroma,
// patch_pool averages overlapping patches back into raster order and
// write_agent_out stores the result in an output frame buffer, from which
// read_agent_out drives the HDMI output.  All four agents share the DRAM
// port through mem_arbiter.  ctrl_regs holds the host-loaded registers and
// sequences the double-buffered frames; the calculator coefficients and the
// gamma table are loaded through the same host write port.
// The DRAM controller and the HDMI transmitter/receiver chips are outside
// this module: the DRAM bus (one 16-bit pixel per word, in-order read
// responses) and the HDMI pixel buses are ports.  Single clock domain.
// Lint note: rst_n resets flops asynchronously and also gates the bus
// assertion below (disable iff); that second use is simulation-only checking,
// so the mixed synchronous/asynchronous use of rst_n reported by lint stands.
module edof_top
  import edof_pkg::*;
#(
  parameter int N_STAGES = 4,
  parameter int MAX_W    = 1920,
  parameter int LUT_AW   = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // host write port
  input  logic        cfg_we,
  input  logic [31:0] cfg_addr,
  input  logic [31:0] cfg_wdata,
  // HDMI input (raw Bayer, MSB on Y, LSB on C)
  input  logic        hdmi_in_de,
  input  logic        hdmi_in_vsync,
  input  logic [7:0]  hdmi_in_y,
  input  logic [7:0]  hdmi_in_c,
  // HDMI output (4:2:2 YCbCr)
  output logic        hdmi_out_de,
  output logic        hdmi_out_hsync,
  output logic        hdmi_out_vsync,
  output logic [7:0]  hdmi_out_y,
  output logic [7:0]  hdmi_out_c,
  // DRAM controller
  output logic        dram_req_valid,
  input  logic        dram_req_ready,
  output mem_req_t    dram_req,
  input  logic        dram_resp_valid,
  input  pix_t        dram_resp_data,
  // status
  output logic [31:0] frames_in,
  output logic [31:0] frames_processed,
  output logic [31:0] frames_dropped,
  output logic [31:0] in_overflows,
  output logic [31:0] out_underruns,
  output logic [31:0] patches_done
);
  logic [15:0] width, height, h_total, v_total;
  logic [1:0]  stride_log2;
  logic        enable;

  // DRAM masters: 0 HDMI writer, 1 patch reader, 2 output writer, 3 display
  logic [3:0]  m_valid, m_ready, m_rvalid;
  mem_req_t    m_req [4];
  pix_t        m_rdata;

  logic  wa0_fs, wa0_fd, ra0_start, ra0_done, ra0_busy, wa1_fd, ra1_fs;
  addr_t wa0_base, ra0_base, wa1_base, ra1_base;

  ctrl_regs u_ctrl (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
    .width, .height, .stride_log2, .h_total, .v_total, .enable,
    .wa0_frame_start(wa0_fs), .wa0_frame_done(wa0_fd), .wa0_base,
    .ra0_start, .ra0_base, .ra0_done,
    .wa1_frame_done(wa1_fd), .wa1_base, .ra1_base,
    .frames_in, .frames_processed, .frames_dropped
  );

  write_agent_in u_wa0 (
    .clk, .rst_n, .width, .height, .base(wa0_base),
    .hdmi_de(hdmi_in_de), .hdmi_vsync(hdmi_in_vsync), .hdmi_y(hdmi_in_y), .hdmi_c(hdmi_in_c),
    .req_valid(m_valid[0]), .req_ready(m_ready[0]), .req(m_req[0]),
    .frame_start(wa0_fs), .frame_done(wa0_fd), .overflows(in_overflows)
  );

  logic      pr_valid, pr_ready;
  vec_elem_t pr_elem;
  patch_reader u_ra0 (
    .clk, .rst_n, .width, .height, .stride_log2,
    .start(ra0_start), .base(ra0_base), .busy(ra0_busy), .done(ra0_done),
    .req_valid(m_valid[1]), .req_ready(m_ready[1]), .req(m_req[1]),
    .resp_valid(m_rvalid[1]), .resp_data(m_rdata),
    .out_valid(pr_valid), .out_ready(pr_ready), .out_elem(pr_elem)
  );

  logic      cp_valid, cp_ready;
  vec_elem_t cp_elem;
  calc_pipeline #(.N_STAGES(N_STAGES)) u_calc (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
    .in_valid(pr_valid), .in_ready(pr_ready), .in_elem(pr_elem),
    .out_valid(cp_valid), .out_ready(cp_ready), .out_elem(cp_elem),
    .patches_done
  );

  logic       of_valid, of_ready, of_last;
  logic [6:0] of_idx;
  logic [7:0] of_val;
  out_format #(.LUT_AW(LUT_AW)) u_fmt (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
    .in_valid(cp_valid), .in_ready(cp_ready), .in_elem(cp_elem),
    .out_valid(of_valid), .out_ready(of_ready),
    .out_idx(of_idx), .out_val(of_val), .out_last(of_last)
  );

  logic pp_valid, pp_ready, pp_sof, pp_fd;
  pix_t pp_pix;
  patch_pool #(.MAX_W(MAX_W)) u_pool (
    .clk, .rst_n, .width, .height, .stride_log2,
    .in_valid(of_valid), .in_ready(of_ready), .in_idx(of_idx), .in_val(of_val), .in_last(of_last),
    .out_valid(pp_valid), .out_ready(pp_ready), .out_pix(pp_pix), .out_sof(pp_sof),
    .frame_done(pp_fd)
  );

  write_agent_out u_wa1 (
    .clk, .rst_n, .width, .height, .base(wa1_base),
    .in_valid(pp_valid), .in_ready(pp_ready), .in_pix(pp_pix), .in_sof(pp_sof),
    .req_valid(m_valid[2]), .req_ready(m_ready[2]), .req(m_req[2]),
    .frame_done(wa1_fd)
  );

  read_agent_out u_ra1 (
    .clk, .rst_n, .enable, .width, .height, .h_total, .v_total, .base(ra1_base),
    .frame_start(ra1_fs),
    .req_valid(m_valid[3]), .req_ready(m_ready[3]), .req(m_req[3]),
    .resp_valid(m_rvalid[3]), .resp_data(m_rdata),
    .hdmi_de(hdmi_out_de), .hdmi_hsync(hdmi_out_hsync), .hdmi_vsync(hdmi_out_vsync),
    .hdmi_y(hdmi_out_y), .hdmi_c(hdmi_out_c), .underruns(out_underruns)
  );

  mem_arbiter #(.N_MASTERS(4)) u_arb (
    .clk, .rst_n,
    .req_valid(m_valid), .req_ready(m_ready), .req(m_req),
    .resp_valid(m_rvalid), .resp_data(m_rdata),
    .m_valid(dram_req_valid), .m_ready(dram_req_ready), .m_req(dram_req),
    .m_resp_valid(dram_resp_valid), .m_resp_data(dram_resp_data)
  );

  // the two write agents never receive read data
  a_no_write_resp: assert property (@(posedge clk) disable iff (!rst_n)
      !m_rvalid[0] && !m_rvalid[2]);
endmodule
