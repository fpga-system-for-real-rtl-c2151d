// edof_pkg: types and constants shared by the extended-depth-of-field
// reconstruction pipeline.
//
// The pipeline turns raw Bayer frames into 4:2:2 YCbCr frames by running a
// small unrolled ISTA network on 8x8 patches.  Sizes that come from the
// reconstruction method are fixed here: a 64-element Bayer patch, 192 sparse
// coefficients (the 8x8x3 dictionary size), 128 output values per patch
// (64 luma + 32 Cb + 32 Cr), 16-bit data and 48-bit accumulators.  The memory
// bus shared by the four DRAM agents (one pixel per word, in-order read
// responses) is this design's own choice.
package edof_pkg;

  localparam int PATCH      = 8;            // patch side in pixels
  localparam int N_BAYER    = PATCH*PATCH;  // 64 raw samples per patch
  localparam int N_COEF     = 192;          // 8x8 patch x 3 colours
  localparam int N_YCC      = 128;          // 64 Y + 32 Cb + 32 Cr
  localparam int DATA_W     = 16;           // fixed-point vector data
  localparam int ACC_W      = 48;           // MACC accumulator width
  localparam int PIX_W      = 16;           // one DRAM word = one pixel
  localparam int ADDR_W     = 24;           // DRAM word address

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [ADDR_W-1:0]        addr_t;
  typedef logic [PIX_W-1:0]         pix_t;

  // One element of a vector travelling between calculator stages: the
  // running value b and the thresholded vector z of the previous step.
  typedef struct packed {
    data_t b;
    data_t z;
    logic  last;   // final element of the vector
  } vec_elem_t;

  // Request on the DRAM bus.  Reads return in request order.
  typedef struct packed {
    logic  we;
    addr_t addr;
    pix_t  wdata;
  } mem_req_t;

  // Run-time configuration of one calculator stage.
  typedef struct packed {
    logic [7:0] n_in;    // input vector length (1..192)
    logic [7:0] n_out;   // output vector length (1..192)
    logic [5:0] shift;   // arithmetic right shift of A*(z-c) before the add
    logic       c_sel;   // 1: c = incoming z vector, 0: c = stored c vector
    logic       b_add;   // 1: add incoming b to the product (M layer)
  } stage_cfg_t;

  // Host configuration address map (word address on the cfg bus):
  //   [31:28] target: 0 = control registers, 1..8 = calculator stage 0..7,
  //           15 = gamma table
  //   stage:  [17:16] 0 = matrix A (row [15:8] = input j, [7:0] = output i),
  //                   1 = threshold theta[j], 2 = offset c[j], 3 = stage cfg
  //   gamma:  [15:0] table index
  localparam logic [3:0] TGT_REGS  = 4'h0;
  localparam logic [3:0] TGT_GAMMA = 4'hF;

  // Saturate a wide signed value to the 16-bit data range.
  function automatic data_t sat16(input logic signed [ACC_W:0] v);
    if (v > 49'sd32767)       return 16'sh7FFF;
    else if (v < -49'sd32768) return 16'sh8000;
    else                      return data_t'(v[DATA_W-1:0]);
  endfunction

  // Two-sided shrinkage sigma_theta(x) = sign(x) * max(|x| - theta, 0).
  function automatic data_t shrink(input data_t x, input data_t theta);
    logic signed [DATA_W:0] d;
    if (x > theta) begin
      d = 17'(x) - 17'(theta);
      return sat16(49'(d));
    end else if (x < -theta) begin
      d = 17'(x) + 17'(theta);
      return sat16(49'(d));
    end else
      return '0;
  endfunction

endpackage
