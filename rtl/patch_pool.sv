// patch_pool: average-pools overlapping 8x8 output patches and reorders
// them into raster scan.
//
// Patches arrive in raster order of patch positions, the top-left corner of
// patch (px,py) being (px*S, py*S) with stride S = 2^stride_log2, and each
// patch as 128 8-bit values (64 Y, 32 Cb, 32 Cr; Cb belongs to the even and
// Cr to the odd pixel of a horizontal pair).  Every value is added into a
// sum held for its pixel in an 8-row circular strip buffer (row index
// y mod 8) of MAX_W columns, together with a count of the patches that
// covered that pixel.  When a row of patches is complete, image rows
// py*S .. py*S+S-1 can no longer be touched (all 8 rows for the last patch
// row); they are emitted left to right as 16-bit {Y, C} 4:2:2 pixels, each
// value being sum * round(65536/count) / 65536 rounded, and the entries are
// cleared.  Input is held off while rows are emitted.
// The pooling by averaging and the raster reordering follow the paper; the
// strip buffer, the reciprocal table and the stride restriction (S even, so
// chroma pairs stay aligned; (W-8) and (H-8) multiples of S) are this
// design's own.
// After reset the strip buffer is swept clear, one column per clock
// (MAX_W clocks), before the first input is taken.
// Interface: ycc element stream in; ready/valid pixel stream out with a
// start-of-frame flag; frame_done pulses with the last pixel of a frame.
module patch_pool #(
  parameter int MAX_W = 1920
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] width,        // frame width in pixels
  input  logic [15:0] height,       // frame height in pixels
  input  logic [1:0]  stride_log2,  // 1..3: stride 2, 4, 8
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [6:0]  in_idx,
  input  logic [7:0]  in_val,
  input  logic        in_last,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [15:0] out_pix,
  output logic        out_sof,
  output logic        frame_done
);
  localparam int XW = $clog2(MAX_W);

  logic [13:0] ysum [8][MAX_W];
  logic [13:0] csum [8][MAX_W];
  logic [6:0]  cnt  [8][MAX_W];

  // round(65536 / n), n = 1..64
  logic [16:0] recip [65];
  assign recip[0] = '0;
  for (genvar n = 1; n <= 64; n++) begin : g_recip
    assign recip[n] = 17'((65536 + n / 2) / n);
  end

  logic [15:0] px, py;              // patch position
  logic [15:0] npx, npy;            // patches per row / column
  assign npx = 16'((width  - 16'd8) >> stride_log2) + 16'd1;
  assign npy = 16'((height - 16'd8) >> stride_log2) + 16'd1;

  typedef enum logic [1:0] {CLR, ACC, EMIT} state_t;
  state_t state;

  // ---------------- accumulation ----------------
  logic [2:0]  er;       // element row within patch
  logic [2:0]  ec;       // element column within patch
  logic [1:0]  kind;     // 0 Y, 1 Cb, 2 Cr
  always_comb begin
    if (!in_idx[6]) begin
      kind = 2'd0; er = in_idx[5:3]; ec = in_idx[2:0];
    end else begin
      kind = in_idx[5] ? 2'd2 : 2'd1;
      er   = in_idx[4:2];
      ec   = {in_idx[1:0], in_idx[5]};   // Cb on even, Cr on odd column
    end
  end
  wire [15:0] ax = 16'(px << stride_log2) + 16'(ec);
  wire [15:0] ay = 16'(py << stride_log2) + 16'(er);
  wire [2:0]  arow = ay[2:0];
  wire [XW-1:0] acol = XW'(ax);

  assign in_ready = (state == ACC);
  wire take = in_valid && in_ready;

  // ---------------- emission ----------------
  logic [15:0] ey;         // image row being emitted
  logic [15:0] ey_end;     // last row to emit in this burst
  logic [15:0] ex;
  logic        first_pix;
  wire  [2:0]  erow = ey[2:0];
  wire  [XW-1:0] ecol = XW'(ex);

  logic [30:0] yprod, cprod;
  logic [7:0]  yavg, cavg;
  always_comb begin
    yprod = 31'(ysum[erow][ecol]) * 31'(recip[cnt[erow][ecol]]) + 31'd32768;
    cprod = 31'(csum[erow][ecol]) * 31'(recip[cnt[erow][ecol]]) + 31'd32768;
    yavg  = (yprod[30:16] > 15'd255) ? 8'd255 : yprod[23:16];
    cavg  = (cprod[30:16] > 15'd255) ? 8'd255 : cprod[23:16];
  end

  assign out_valid = (state == EMIT);
  assign out_pix   = {yavg, cavg};
  assign out_sof   = first_pix;
  wire   give      = out_valid && out_ready;
  wire   row_end   = (ex == width - 16'd1);
  wire   burst_end = row_end && (ey == ey_end);
  wire   last_prow = (py == npy - 16'd1);

  logic [XW-1:0] clr_x;   // column swept clear after reset
  always_ff @(posedge clk) begin
    if (state == CLR) begin
      for (int r = 0; r < 8; r++) begin
        ysum[r][clr_x] <= '0;
        csum[r][clr_x] <= '0;
        cnt[r][clr_x]  <= '0;
      end
    end else if (take) begin
      cnt[arow][acol] <= (kind == 2'd0) ? cnt[arow][acol] + 7'd1 : cnt[arow][acol];
      if (kind == 2'd0) ysum[arow][acol] <= ysum[arow][acol] + 14'(in_val);
      else              csum[arow][acol] <= csum[arow][acol] + 14'(in_val);
    end else if (give) begin
      ysum[erow][ecol] <= '0;
      csum[erow][ecol] <= '0;
      cnt[erow][ecol]  <= '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= CLR;
      clr_x      <= '0;
      px         <= '0;
      py         <= '0;
      ey         <= '0;
      ey_end     <= '0;
      ex         <= '0;
      first_pix  <= 1'b1;
      frame_done <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      unique case (state)
        CLR: begin
          clr_x <= clr_x + 1'b1;
          if (int'(clr_x) == MAX_W - 1) state <= ACC;
        end
        ACC: if (take && in_last) begin
          if (px == npx - 16'd1) begin
            px     <= '0;
            state  <= EMIT;
            ey     <= py << stride_log2;
            ey_end <= (py << stride_log2) + (last_prow ? 16'd7 : (16'd1 << stride_log2) - 16'd1);
            ex     <= '0;
          end else begin
            px <= px + 16'd1;
          end
        end
        EMIT: if (give) begin
          first_pix <= 1'b0;
          if (!row_end) ex <= ex + 16'd1;
          else begin
            ex <= '0;
            ey <= ey + 16'd1;
          end
          if (burst_end) begin
            state <= ACC;
            if (last_prow) begin
              py         <= '0;
              frame_done <= 1'b1;
              first_pix  <= 1'b1;
            end else
              py <= py + 16'd1;
          end
        end
      endcase
    end
  end

  // Strip-buffer entries are cleared after emission, so a pixel is never
  // emitted without having been covered by at least one patch.
  a_covered: assert property (@(posedge clk) disable iff (!rst_n)
      give |-> cnt[erow][ecol] != 0);
endmodule
