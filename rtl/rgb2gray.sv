// rgb2gray: converts 24-bit RGB pixels to 8-bit greyscale.
//
// Y = (77 R + 150 G + 29 B + 128) >> 8, the ITU-R BT.601 luma weights
// (0.299, 0.587, 0.114) in 8-bit fixed point with rounding. The weights sum
// to 256, so white stays 255. The conversion step is the source's; the
// weights and the rounding are this design's choice (they match the common
// software library conversion). One register stage: output and its sync
// bits follow the input by one clock.
//   in_rgb = {R[23:16], G[15:8], B[7:0]}
module rgb2gray
  import lv_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  sync_t       in_sync,
  input  logic [23:0] in_rgb,
  output sync_t       out_sync,
  output logic [7:0]  out_gray
);

  localparam logic [7:0] WR = 8'd77;
  localparam logic [7:0] WG = 8'd150;
  localparam logic [7:0] WB = 8'd29;

  logic [17:0] acc;

  always_comb begin
    acc = 18'(in_rgb[23:16]) * WR + 18'(in_rgb[15:8]) * WG
        + 18'(in_rgb[7:0]) * WB + 18'd128;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_sync <= '0;
      out_gray <= '0;
    end else begin
      out_sync <= in_sync;
      out_gray <= in_sync.de ? acc[15:8] : 8'd0;
    end
  end

endmodule
