// adaptive_threshold: two-stage adaptive binarisation of greyscale video.
//
// Stage 1 divides the picture into non-overlapping WIN x WIN windows
// (128 x 128) and tracks the minimum and maximum brightness of each window
// with one min/max pair per window column, reused for every window row. At
// the last pixel of a window the local threshold
//     th = min + (max - min) / 4          (0.25 (max - min) + min, floored)
// is written into a table. At the end of the frame the table becomes the
// one in use, so thresholds found in frame N-1 binarise frame N and no frame
// buffer is needed.
// Stage 2 gives each pixel its own threshold by bilinear interpolation
// between the thresholds of the (up to) four windows whose centres surround
// it. Window centres sit at WIN/2 + k*WIN; a pixel left of the first or
// right of the last centre column (above/below the first/last centre row)
// uses that column (row) only, so edge pixels mix two windows and corner
// pixels take one. Weights are 7-bit fractions:
//     th = ((WIN-fx)(WIN-fy) T00 + fx(WIN-fy) T10 + (WIN-fx) fy T01
//           + fx fy T11) >> (2 log2 WIN)
// A pixel is foreground (1, dark object) when gray <= th.
// The window size, the threshold formula, the interpolation and the use of
// the previous frame's thresholds follow the source; the fixed-point
// weights, the centre grid for the partial last window row, the compare
// direction and the reset table value (128) are this design's choices.
// Latency: 3 clocks, sync bits delayed with the data.
module adaptive_threshold
  import lv_pkg::*;
#(
  parameter int unsigned H_ACTIVE = H_ACTIVE_DEF,
  parameter int unsigned V_ACTIVE = V_ACTIVE_DEF,
  parameter int unsigned WLOG2    = WIN_LOG2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  sync_t      in_sync,
  input  logic [7:0] in_data,
  output sync_t      out_sync,
  output logic       out_data,
  // Observation of the threshold in use for the output pixel.
  output logic [7:0] out_th
);

  localparam int unsigned WIN  = 1 << WLOG2;
  localparam int unsigned HALF = WIN / 2;
  localparam int unsigned NWX  = (H_ACTIVE + WIN - 1) / WIN;
  localparam int unsigned NWY  = (V_ACTIVE + WIN - 1) / WIN;
  localparam int unsigned FW   = WLOG2 + 1;       // fraction 0..WIN
  localparam int unsigned IXW  = (NWX > 1) ? $clog2(NWX) : 1;
  localparam int unsigned IYW  = (NWY > 1) ? $clog2(NWY) : 1;

  logic [15:0] x, y;
  logic        eof, sof;

  coord_counter #(.XW(16), .YW(16)) u_coord (
    .clk     (clk),
    .rst_n   (rst_n),
    .in_sync (in_sync),
    .x       (x),
    .y       (y),
    .sof     (sof),
    .eof     (eof)
  );

  // ---------------- Stage 1: window minimum / maximum -------------------
  logic [7:0] wmin [NWX];
  logic [7:0] wmax [NWX];
  logic [7:0] th_next [NWY][NWX];
  logic [7:0] th_cur  [NWY][NWX];

  logic [15:0]    wx16, wy16;
  logic [IXW-1:0] wx;
  logic [IYW-1:0] wy;
  logic        first_px, last_px;
  logic [7:0]  mn, mx, th_new;

  always_comb begin
    wx16     = x >> WLOG2;
    wy16     = y >> WLOG2;
    wx       = IXW'(wx16);
    wy       = IYW'(wy16);
    first_px = (x[WLOG2-1:0] == '0) && (y[WLOG2-1:0] == '0);
    last_px  = ((x[WLOG2-1:0] == '1) || (x == 16'(H_ACTIVE - 1)))
            && ((y[WLOG2-1:0] == '1) || (y == 16'(V_ACTIVE - 1)));
    if (first_px) begin
      mn = in_data;
      mx = in_data;
    end else begin
      mn = (in_data < wmin[wx]) ? in_data : wmin[wx];
      mx = (in_data > wmax[wx]) ? in_data : wmax[wx];
    end
    th_new = mn + ((mx - mn) >> 2);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NWX); i++) begin
        wmin[i] <= 8'd255;
        wmax[i] <= 8'd0;
      end
      for (int j = 0; j < int'(NWY); j++)
        for (int i = 0; i < int'(NWX); i++) begin
          th_next[j][i] <= 8'd128;
          th_cur[j][i]  <= 8'd128;
        end
    end else begin
      if (in_sync.de && wx16 < 16'(NWX) && wy16 < 16'(NWY)) begin
        wmin[wx] <= mn;
        wmax[wx] <= mx;
        if (last_px) th_next[wy][wx] <= th_new;
      end
      if (eof) th_cur <= th_next;
    end
  end

  // ---------------- Stage 2: bilinear interpolation ---------------------
  // Pipeline step A: window indices, fractions and the four table values.
  logic [15:0] ix0, ix1, iy0, iy1;
  logic [FW-1:0] fx, fy;

  function automatic void grid(input logic [15:0] p, input int unsigned n,
                               output logic [15:0] i0, output logic [15:0] i1,
                               output logic [FW-1:0] f);
    logic [15:0] u;
    if (p < 16'(HALF)) begin
      i0 = '0; i1 = '0; f = '0;
    end else if (p >= 16'(HALF + (n - 1) * WIN)) begin
      i0 = 16'(n - 1); i1 = 16'(n - 1); f = '0;
    end else begin
      u  = p - 16'(HALF);
      i0 = u >> WLOG2;
      i1 = (u >> WLOG2) + 1'b1;
      f  = FW'(u[WLOG2-1:0]);
    end
  endfunction

  always_comb begin
    grid(x, NWX, ix0, ix1, fx);
    grid(y, NWY, iy0, iy1, fy);
  end

  sync_t         a_sync;
  logic [7:0]    a_pix, t00, t10, t01, t11;
  logic [FW-1:0] a_fx, a_fy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_sync <= '0;
      a_pix  <= '0;
      t00 <= '0; t10 <= '0; t01 <= '0; t11 <= '0;
      a_fx <= '0; a_fy <= '0;
    end else begin
      a_sync <= in_sync;
      a_pix  <= in_data;
      a_fx   <= fx;
      a_fy   <= fy;
      t00 <= th_cur[IYW'(iy0)][IXW'(ix0)];
      t10 <= th_cur[IYW'(iy0)][IXW'(ix1)];
      t01 <= th_cur[IYW'(iy1)][IXW'(ix0)];
      t11 <= th_cur[IYW'(iy1)][IXW'(ix1)];
    end
  end

  // Pipeline step B: weighted sum.
  localparam int unsigned SW = 2 * FW + 8 + 2;
  logic [SW-1:0] wsum;
  logic [FW-1:0] gx, gy;

  always_comb begin
    gx   = FW'(WIN) - a_fx;
    gy   = FW'(WIN) - a_fy;
    wsum = SW'(gx) * SW'(gy) * SW'(t00) + SW'(a_fx) * SW'(gy) * SW'(t10)
         + SW'(gx) * SW'(a_fy) * SW'(t01) + SW'(a_fx) * SW'(a_fy) * SW'(t11);
  end

  sync_t      b_sync;
  logic [7:0] b_pix, b_th;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_sync <= '0;
      b_pix  <= '0;
      b_th   <= '0;
    end else begin
      b_sync <= a_sync;
      b_pix  <= a_pix;
      b_th   <= 8'(wsum >> (2 * WLOG2));
    end
  end

  // Pipeline step C: compare.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_sync <= '0;
      out_data <= 1'b0;
      out_th   <= '0;
    end else begin
      out_sync <= b_sync;
      out_data <= b_sync.de && (b_pix <= b_th);
      out_th   <= b_th;
    end
  end

endmodule
