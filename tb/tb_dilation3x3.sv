// tb_dilation3x3: self-checking testbench for dilation3x3.
//
// Drives two frames of a small raster (HA x VA active, HT x VT total) of
// random pixels, collects the output pixels (data enable high) in order and
// compares every one with a reference worked out here from the rule
// "1 if any in-picture 3x3 neighbour is 1". Also checks the latency from the first input pixel to the first
// output pixel, (K/2)*H_TOTAL + K/2 + 2 clocks, and that the sync bits leave with the data.
module tb_dilation3x3;
  import lv_pkg::*;

  localparam int HA = 24, VA = 12, HT = 32, VT = 16;
  localparam int K  = 3;
  localparam int R  = K / 2;
  localparam int LAT = R * HT + R + 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  sync_t  in_sync, out_sync;
  logic [1-1:0] in_data, out_data;

  dilation3x3 #(.H_TOTAL(HT)) dut (
    .clk (clk), .rst_n (rst_n),
    .in_sync (in_sync), .in_data (in_data),
    .out_sync (out_sync), .out_data (out_data)
  );

  int checks = 0, failures = 0;
  logic [1-1:0] img [2][VA][HA];
  int unsigned cyc = 0, first_in = 0, first_out = 0;
  int nout = 0;
  bit seen_in = 0, seen_out = 0;

  function automatic logic [1-1:0] ref_px(int f, int y, int x);
    logic r = 0; for (int dy = -1; dy <= 1; dy++) for (int dx = -1; dx <= 1; dx++) if (y+dy >= 0 && y+dy < VA && x+dx >= 0 && x+dx < HA && img[f][y+dy][x+dx]) r = 1; return r;
  endfunction

  always @(posedge clk) cyc <= cyc + 1;

  // Output checker.
  always @(posedge clk) if (rst_n && out_sync.de) begin
    int f, y, x;
    f = nout / (HA * VA);
    y = (nout % (HA * VA)) / HA;
    x = nout % HA;
    if (!seen_out) begin seen_out = 1; first_out = cyc; end
    checks++;
    if (f < 2 && out_data !== ref_px(f, y, x)) begin
      failures++;
      if (failures < 10) $display("mismatch f%0d y%0d x%0d got %0d exp %0d", f, y, x, out_data, ref_px(f, y, x));
    end
    nout++;
  end

  initial begin
    for (int f = 0; f < 2; f++)
      for (int y = 0; y < VA; y++)
        for (int x = 0; x < HA; x++)
          img[f][y][x] = ($urandom % 100) < 12;
    in_sync = '0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 3; f++)
      for (int y = 0; y < VT; y++)
        for (int x = 0; x < HT; x++) begin
          @(negedge clk);
          in_sync.de = (y < VA) && (x < HA) && (f < 2);
          in_sync.hs = (x >= HA + 2) && (x < HA + 4);
          in_sync.vs = (y >= VA + 1) && (y < VA + 3);
          in_data    = in_sync.de ? img[f][y][x] : '0;
          if (in_sync.de && !seen_in) begin seen_in = 1; first_in = cyc; end
        end
    repeat (5) @(posedge clk);
    checks++;
    if (nout != 2 * HA * VA) begin failures++; $display("output count %0d", nout); end
    checks++;
    if (first_out - first_in != LAT) begin
      failures++; $display("latency %0d expected %0d", first_out - first_in, LAT);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
