// out_format: turns the final layer's 128 values per patch into 8-bit
// 4:2:2 YCbCr samples.
//
// Elements 0..63 of each patch are luma (row-major 8x8) and are reduced
// from 16 to 8 bits through a gamma lookup table of 2^LUT_AW entries,
// indexed by the 16-bit two's-complement value read as unsigned (the table
// contents, loaded by the host, decide how negative values map).  Elements
// 64..95 are Cb and 96..127 Cr (row-major 8x4); they are clamped to
// [-128,127] and offset by 128.  The gamma table and the 16-bit luma /
// 8-bit chroma widths follow the paper; the element order, the chroma
// clamping and the unsigned table index are this design's own.
// Interface: vec_elem_t stream in, ycc_elem stream out (index 0..127 and the
// 8-bit value), both ready/valid; one register stage, one element per clock.
// Host writes with cfg_addr[31:28] = 15 load table entry cfg_addr[15:0].
module out_format
  import edof_pkg::*;
#(
  parameter int LUT_AW = 16
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
  output logic [6:0]  out_idx,
  output logic [7:0]  out_val,
  output logic        out_last
);
  logic [7:0] lut [2**LUT_AW];
  logic [6:0] idx;

  always_ff @(posedge clk)
    if (cfg_we && cfg_addr[31:28] == TGT_GAMMA)
      lut[cfg_addr[LUT_AW-1:0]] <= cfg_wdata[7:0];

  // gamma index: the top LUT_AW bits of the 16-bit value
  wire [LUT_AW-1:0] lut_idx = in_elem.b[DATA_W-1 -: LUT_AW];

  logic [7:0] val;
  always_comb begin
    if (!idx[6])                   val = lut[lut_idx];
    else if (in_elem.b > 16'sd127)  val = 8'd255;
    else if (in_elem.b < -16'sd128) val = 8'd0;
    else                           val = 8'(in_elem.b + 16'sd128);
  end

  assign in_ready = !out_valid || out_ready;
  wire take = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx       <= '0;
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_val   <= '0;
      out_last  <= 1'b0;
    end else begin
      if (take) begin
        out_valid <= 1'b1;
        out_idx   <= idx;
        out_val   <= val;
        out_last  <= (idx == 7'd127);
        idx       <= idx + 1'b1;     // wraps after 127
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end
endmodule
