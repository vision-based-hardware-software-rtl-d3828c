// tb_adaptive_threshold: checks both stages of the adaptive threshold on a
// scaled raster (8 x 8 windows, 28 x 20 picture, so the last window column
// and row are partial). Three frames of random pixels on a brightness
// gradient are sent. For every frame the expected window thresholds are
// min + (max - min)/4 of the previous frame (128 everywhere for the first),
// and each pixel's threshold is the bilinear mix of the surrounding window
// centres, computed here in integer arithmetic. The binary output, the
// observed threshold and the 3-clock latency are compared.
module tb_adaptive_threshold;
  import lv_pkg::*;

  localparam int HA = 28, VA = 20, HT = 36, VT = 24, WL = 3, W = 1 << WL;
  localparam int NWX = (HA + W - 1) / W, NWY = (VA + W - 1) / W;
  localparam int NF = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  sync_t      in_sync, out_sync;
  logic [7:0] in_data, out_th;
  logic       out_data;

  adaptive_threshold #(.H_ACTIVE(HA), .V_ACTIVE(VA), .WLOG2(WL)) dut (
    .clk, .rst_n, .in_sync, .in_data, .out_sync, .out_data, .out_th);

  int checks = 0, failures = 0, nout = 0;
  int img [NF][VA][HA];
  int tab [NF][NWY][NWX];
  int unsigned cyc = 0, first_in = 0, first_out = 0;
  bit seen_in = 0, seen_out = 0;
  int n_fg = 0;

  // Index/fraction of a coordinate on the grid of window centres.
  function automatic void axis(int p, int n, output int i0, output int i1, output int fr);
    int c0 = W / 2, clast = W / 2 + (n - 1) * W;
    if (p <= c0) begin i0 = 0; i1 = 0; fr = 0; end
    else if (p >= clast) begin i0 = n - 1; i1 = n - 1; fr = 0; end
    else begin i0 = (p - c0) / W; i1 = i0 + 1; fr = p - (c0 + i0 * W); end
  endfunction

  function automatic int ref_th(int f, int y, int x);
    int x0, x1, fx, y0, y1, fy, s;
    axis(x, NWX, x0, x1, fx);
    axis(y, NWY, y0, y1, fy);
    s = (W - fx) * (W - fy) * tab[f][y0][x0] + fx * (W - fy) * tab[f][y0][x1]
      + (W - fx) * fy * tab[f][y1][x0] + fx * fy * tab[f][y1][x1];
    return s / (W * W);
  endfunction

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_sync.de) begin
    int f, y, x, t;
    f = nout / (HA * VA); y = (nout % (HA * VA)) / HA; x = nout % HA;
    if (!seen_out) begin seen_out = 1; first_out = cyc; end
    t = ref_th(f, y, x);
    checks++;
    if (int'(out_th) != t || out_data != (img[f][y][x] <= t)) begin
      failures++;
      if (failures < 10) $display("f%0d y%0d x%0d th %0d exp %0d bin %0b pix %0d", f, y, x, out_th, t, out_data, img[f][y][x]);
    end
    if (out_data) n_fg++;
    nout++;
  end

  initial begin
    for (int f = 0; f < NF; f++)
      for (int y = 0; y < VA; y++)
        for (int x = 0; x < HA; x++)
          img[f][y][x] = (x * 5 + y * 3 + int'($urandom % 90)) % 256;
    for (int j = 0; j < NWY; j++) for (int i = 0; i < NWX; i++) tab[0][j][i] = 128;
    for (int f = 1; f < NF; f++)
      for (int j = 0; j < NWY; j++)
        for (int i = 0; i < NWX; i++) begin
          int mn, mx;
          mn = 255; mx = 0;
          for (int y = j * W; y < (j + 1) * W && y < VA; y++)
            for (int x = i * W; x < (i + 1) * W && x < HA; x++) begin
              if (img[f-1][y][x] < mn) mn = img[f-1][y][x];
              if (img[f-1][y][x] > mx) mx = img[f-1][y][x];
            end
          tab[f][j][i] = mn + (mx - mn) / 4;
        end
    in_sync = '0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NF; f++)
      for (int y = 0; y < VT; y++)
        for (int x = 0; x < HT; x++) begin
          @(negedge clk);
          in_sync.de = (y < VA) && (x < HA);
          in_sync.hs = (x >= HA + 2) && (x < HA + 4);
          in_sync.vs = (y >= VA + 1) && (y < VA + 3);
          in_data    = in_sync.de ? 8'(img[f][y][x]) : '0;
          if (in_sync.de && !seen_in) begin seen_in = 1; first_in = cyc; end
        end
    repeat (5) @(posedge clk);
    checks++;
    if (nout != NF * HA * VA) begin failures++; $display("count %0d", nout); end
    checks++;
    if (first_out - first_in != 3) begin failures++; $display("latency %0d", first_out - first_in); end
    checks++;
    if (n_fg == 0 || n_fg == nout) begin failures++; $display("degenerate binary output"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
