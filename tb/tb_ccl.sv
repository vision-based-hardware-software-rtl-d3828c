// tb_ccl: checks the connected component labelling on a scaled raster
// (32 x 16 active, 40 x 76 total, 64 labels).
// Frames 0-3 hold random binary pictures of different densities, including
// U and spiral shapes that force label merges; frame 4 holds 128 isolated
// dots, more than the 63 usable labels, to force the overflow path.
// The expected object list comes from a flood fill (8-connectivity) done
// here: objects in the order of their first pixel in raster order, each with
// area, bounding box and floor(sum/area) centroid. Also checked: the
// object count, the overflow flag, that merges happened, and that the
// readout ends inside the vertical blanking. A sixth, empty frame flushes
// the last readout.
module tb_ccl;
  import lv_pkg::*;

  localparam int HA = 32, VA = 16, HT = 40, VT = 76, ML = 64, NF = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  sync_t       in_sync;
  logic        in_data, obj_valid, frame_done, ovf, busy;
  obj_t        obj;
  logic [15:0] obj_count, merges;

  ccl #(.H_TOTAL(HT), .MAX_LABELS(ML)) dut (
    .clk, .rst_n, .in_sync, .in_data, .obj_valid, .obj, .frame_done,
    .obj_count, .ovf, .busy, .merges);

  int checks = 0, failures = 0;
  bit img [NF][VA][HA];
  obj_t exp_obj [NF][HA * VA];
  int   exp_n   [NF];
  int   fr = 0, k = 0, n_ovf = 0;

  function automatic void label_frame(int f);
    int lab [VA][HA];
    int sy [HA * VA], sx [HA * VA];
    int sp, n;
    n = 0;
    for (int y = 0; y < VA; y++) for (int x = 0; x < HA; x++) lab[y][x] = 0;
    for (int y = 0; y < VA; y++)
      for (int x = 0; x < HA; x++)
        if (img[f][y][x] && lab[y][x] == 0) begin
          longint area, sumx, sumy;
          int xmin, xmax, ymin, ymax;
          n++;
          area = 0; sumx = 0; sumy = 0; xmin = x; xmax = x; ymin = y; ymax = y;
          sp = 0; sy[0] = y; sx[0] = x; sp = 1; lab[y][x] = n;
          while (sp > 0) begin
            int cy, cx;
            sp--; cy = sy[sp]; cx = sx[sp];
            area++; sumx += cx; sumy += cy;
            if (cx < xmin) xmin = cx;
            if (cx > xmax) xmax = cx;
            if (cy < ymin) ymin = cy;
            if (cy > ymax) ymax = cy;
            for (int dy = -1; dy <= 1; dy++)
              for (int dx = -1; dx <= 1; dx++) begin
                int ny, nx;
                ny = cy + dy; nx = cx + dx;
                if (ny >= 0 && ny < VA && nx >= 0 && nx < HA && img[f][ny][nx] && lab[ny][nx] == 0) begin
                  lab[ny][nx] = n; sy[sp] = ny; sx[sp] = nx; sp++;
                end
              end
          end
          exp_obj[f][n-1] = '{area: 32'(area), xmin: 16'(xmin), xmax: 16'(xmax),
                              ymin: 16'(ymin), ymax: 16'(ymax),
                              cx: 16'(sumx / area), cy: 16'(sumy / area)};
        end
    exp_n[f] = n;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (obj_valid) begin
      checks++;
      if (fr < 4 && (k >= exp_n[fr] || obj !== exp_obj[fr][k])) begin
        failures++;
        if (failures < 10) $display("frame %0d obj %0d: got a%0d x%0d-%0d y%0d-%0d c%0d,%0d exp a%0d x%0d-%0d y%0d-%0d c%0d,%0d",
          fr, k, obj.area, obj.xmin, obj.xmax, obj.ymin, obj.ymax, obj.cx, obj.cy,
          exp_obj[fr][k].area, exp_obj[fr][k].xmin, exp_obj[fr][k].xmax, exp_obj[fr][k].ymin,
          exp_obj[fr][k].ymax, exp_obj[fr][k].cx, exp_obj[fr][k].cy);
      end
      if (fr == 4 && (obj.area != 1 || obj !== exp_obj[4][k])) failures++;
      k++;
    end
    if (frame_done) begin
      checks++;
      if (fr < 4 && (int'(obj_count) != exp_n[fr] || k != exp_n[fr] || ovf)) begin
        failures++;
        $display("frame %0d: count %0d seen %0d exp %0d ovf %0b", fr, obj_count, k, exp_n[fr], ovf);
      end
      if (fr == 4) begin
        if (ovf) n_ovf++;
        if (!ovf || int'(obj_count) != ML - 1) begin
          failures++;
          $display("overflow frame: count %0d ovf %0b", obj_count, ovf);
        end
      end
      fr++; k = 0;
    end
  end

  initial begin
    int dens;
    for (int f = 0; f < NF; f++) begin
      dens = (f == 0) ? 25 : (f == 1) ? 45 : 35;
      for (int y = 0; y < VA; y++)
        for (int x = 0; x < HA; x++)
          img[f][y][x] = (($urandom % 100) < dens);
    end
    // Frame 2: a U and a W shape whose arms meet only at the bottom.
    for (int y = 0; y < VA; y++) for (int x = 0; x < HA; x++) img[2][y][x] = 0;
    for (int y = 1; y < 10; y++) begin img[2][y][2] = 1; img[2][y][8] = 1; end
    for (int x = 2; x <= 8; x++) img[2][10][x] = 1;
    for (int y = 2; y < 14; y++) for (int a = 0; a < 4; a++) img[2][y][12 + 4 * a] = 1;
    for (int x = 12; x <= 24; x++) img[2][14][x] = 1;
    for (int y = 0; y < 6; y++) img[2][y][29] = 1;
    // Frame 4: isolated dots on every other pixel, 128 objects.
    for (int y = 0; y < VA; y++) for (int x = 0; x < HA; x++) img[4][y][x] = (y % 2 == 0) && (x % 2 == 0);
    for (int f = 0; f < NF; f++) label_frame(f);
    // Only the first ML-1 dots receive labels; they are checked in order.

    in_sync = '0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f <= NF; f++)
      for (int y = 0; y < VT; y++)
        for (int x = 0; x < HT; x++) begin
          @(negedge clk);
          in_sync.de = (y < VA) && (x < HA) && (f < NF);
          in_sync.hs = (x >= HA + 2) && (x < HA + 4);
          in_sync.vs = (y >= VA + 1) && (y < VA + 3);
          in_data    = in_sync.de ? img[f][y][x] : 1'b0;
          if (in_sync.de && busy) begin
            failures++;
            $display("readout still running when the next frame started");
          end
        end
    checks++;
    if (fr != NF + 1) begin failures++; $display("frames reported %0d", fr); end
    checks++;
    if (merges == 0) begin failures++; $display("no merge happened"); end
    $display("merges %0d, overflow frames %0d", merges, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
