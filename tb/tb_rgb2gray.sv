// tb_rgb2gray: checks the greyscale conversion on random and corner-case
// pixels against (77 R + 150 G + 29 B + 128) >> 8 computed here, the one
// clock latency, and that sync bits follow the data.
module tb_rgb2gray;
  import lv_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  sync_t       in_sync, out_sync;
  logic [23:0] in_rgb;
  logic [7:0]  out_gray;

  rgb2gray dut (.clk, .rst_n, .in_sync, .in_rgb, .out_sync, .out_gray);

  int checks = 0, failures = 0;

  function automatic logic [7:0] ref_y(logic [23:0] p);
    int s = 77 * int'(p[23:16]) + 150 * int'(p[15:8]) + 29 * int'(p[7:0]) + 128;
    return 8'(s >> 8);
  endfunction

  initial begin
    logic [23:0] p;
    in_sync = '0; in_rgb = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      case (i)
        0: p = 24'hFFFFFF;
        1: p = 24'h000000;
        2: p = 24'hFF0000;
        3: p = 24'h00FF00;
        4: p = 24'h0000FF;
        default: p = 24'($urandom);
      endcase
      @(negedge clk);
      in_rgb  = p;
      in_sync = '{vs: 1'(i % 7 == 0), hs: 1'(i % 5 == 0), de: 1'b1};
      @(negedge clk);
      checks++;
      if (out_gray !== ref_y(p) || out_sync !== '{vs: 1'(i % 7 == 0), hs: 1'(i % 5 == 0), de: 1'b1}) begin
        failures++;
        $display("rgb %h: got %0d exp %0d", p, out_gray, ref_y(p));
      end
      in_sync = '0;
    end
    checks++;
    if (ref_y(24'hFFFFFF) != 8'd255) failures++;
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
