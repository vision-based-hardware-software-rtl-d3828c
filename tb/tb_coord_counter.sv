// tb_coord_counter: runs three frames of a small raster through the
// coordinate counters and checks x, y of every active pixel, the
// start-of-frame flag on pixel (0,0) only and one end-of-frame pulse per
// vertical sync.
module tb_coord_counter;
  import lv_pkg::*;

  localparam int HA = 20, VA = 9, HT = 27, VT = 13;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  sync_t       in_sync;
  logic [15:0] x, y;
  logic        sof, eof;

  coord_counter #(.XW(16), .YW(16)) dut (.clk, .rst_n, .in_sync, .x, .y, .sof, .eof);

  int checks = 0, failures = 0, eofs = 0, sofs = 0;

  always @(posedge clk) if (rst_n) begin
    if (eof) eofs++;
    if (sof) sofs++;
  end

  initial begin
    in_sync = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 3; f++)
      for (int yy = 0; yy < VT; yy++)
        for (int xx = 0; xx < HT; xx++) begin
          @(negedge clk);
          in_sync.de = (yy < VA) && (xx < HA);
          in_sync.hs = (xx >= HA + 2) && (xx < HA + 4);
          in_sync.vs = (yy >= VA + 1) && (yy < VA + 3);
          #1;
          if (in_sync.de) begin
            checks++;
            if (x != 16'(xx) || y != 16'(yy) || sof != (xx == 0 && yy == 0)) begin
              failures++;
              if (failures < 10) $display("at %0d,%0d got %0d,%0d sof %0b", xx, yy, x, y, sof);
            end
          end
        end
    @(negedge clk);
    checks++;
    if (eofs != 3 || sofs != 3) begin failures++; $display("eofs %0d sofs %0d", eofs, sofs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
