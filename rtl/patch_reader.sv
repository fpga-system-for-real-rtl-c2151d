// patch_reader: reads a raw Bayer frame buffer from DRAM and turns its
// raster order into a stream of 8x8 patches with configurable overlap.
//
// After start, patches are visited in raster order of their top-left
// corners (px*S, py*S), S = 2^stride_log2, px < (W-8)/S+1,
// py < (H-8)/S+1; within a patch the 64 samples are read row by row.
// Sample (x, y) lives at base + y*W + x.  Read requests are issued only
// while the response FIFO has room for every outstanding read, so the
// calculator pipeline can stall the reader without losing data.  Each
// sample leaves as a vec_elem_t with b = sample, z = 0 and last on the 64th
// sample of a patch.  done pulses when the final sample of the frame has
// been handed on.  Follows the paper's "Read Agent 0"; the credit scheme and
// the power-of-two stride are this design's own.
module patch_reader
  import edof_pkg::*;
#(
  parameter int FIFO_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] width,
  input  logic [15:0] height,
  input  logic [1:0]  stride_log2,
  input  logic        start,
  input  addr_t       base,
  output logic        busy,
  output logic        done,
  // DRAM bus
  output logic        req_valid,
  input  logic        req_ready,
  output mem_req_t    req,
  input  logic        resp_valid,
  input  pix_t        resp_data,
  // patch stream
  output logic        out_valid,
  input  logic        out_ready,
  output vec_elem_t   out_elem
);
  localparam int CW = $clog2(FIFO_DEPTH + 1);

  logic [15:0] npx, npy;
  assign npx = 16'((width  - 16'd8) >> stride_log2) + 16'd1;
  assign npy = 16'((height - 16'd8) >> stride_log2) + 16'd1;

  // request side
  addr_t       fbase;
  logic        issuing;
  logic [15:0] px, py;
  logic [2:0]  r, c;
  logic [CW-1:0] outstanding;
  // delivery side
  logic [5:0]  e_idx;
  logic [31:0] patches_left;

  logic  f_empty, f_full;
  pix_t  f_data;
  logic [CW-1:0] f_count;

  wire [15:0] x = 16'(px << stride_log2) + 16'(c);
  wire [15:0] y = 16'(py << stride_log2) + 16'(r);
  assign req_valid = issuing && (int'(outstanding) + int'(f_count) < FIFO_DEPTH);
  assign req       = '{we: 1'b0, addr: fbase + addr_t'(32'(y) * 32'(width) + 32'(x)), wdata: '0};
  wire   fire      = req_valid && req_ready;
  wire   last_req  = (r == 3'd7) && (c == 3'd7) && (px == npx - 1) && (py == npy - 1);

  wire pop = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fbase <= '0; issuing <= 1'b0; px <= '0; py <= '0; r <= '0; c <= '0;
      outstanding <= '0; e_idx <= '0; patches_left <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      outstanding <= outstanding + CW'(fire) - CW'(resp_valid);
      if (start && !busy) begin
        fbase <= base; issuing <= 1'b1; busy <= 1'b1;
        px <= '0; py <= '0; r <= '0; c <= '0; e_idx <= '0;
        patches_left <= 32'(npx) * 32'(npy);
      end else if (fire) begin
        c <= c + 3'd1;
        if (c == 3'd7) begin
          r <= r + 3'd1;
          if (r == 3'd7) begin
            if (px == npx - 1) begin
              px <= '0;
              py <= py + 16'd1;
            end else
              px <= px + 16'd1;
          end
        end
        if (last_req) issuing <= 1'b0;
      end
      if (pop) begin
        e_idx <= e_idx + 6'd1;
        if (e_idx == 6'd63) begin
          patches_left <= patches_left - 1;
          if (patches_left == 32'd1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  sync_fifo #(.WIDTH(PIX_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .clear(1'b0),
    .push(resp_valid), .wdata(resp_data),
    .pop, .rdata(f_data),
    .empty(f_empty), .full(f_full), .count(f_count)
  );

  assign out_valid = !f_empty;
  assign out_elem  = '{b: data_t'(f_data), z: '0, last: (e_idx == 6'd63)};

  a_no_fifo_overflow: assert property (@(posedge clk) disable iff (!rst_n)
      resp_valid |-> !f_full);
endmodule
