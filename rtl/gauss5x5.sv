// gauss5x5: 5 x 5 Gaussian low-pass filter for 8-bit greyscale video.
//
// The kernel is the separable binomial [1 4 6 4 1]^T [1 4 6 4 1] / 256,
// which is the 5 x 5 Gaussian a common software library uses when no sigma
// is given (sigma = 1.1). The result is rounded: (sum + 128) >> 8. A window
// from win_gen supplies the 25 pixels; a neighbour outside the picture
// (data enable 0) is replaced by the centre pixel, so the picture edge is
// handled without darkening. The 5 x 5 size is the source's; kernel weights,
// rounding and edge rule are this design's.
// Latency: 2*H_TOTAL + 4 clocks, sync bits delayed with the data.
module gauss5x5
  import lv_pkg::*;
#(
  parameter int unsigned H_TOTAL = H_TOTAL_DEF
) (
  input  logic       clk,
  input  logic       rst_n,
  input  sync_t      in_sync,
  input  logic [7:0] in_data,
  output sync_t      out_sync,
  output logic [7:0] out_data
);

  localparam int unsigned K = 5;
  localparam int unsigned C = K / 2;
  localparam int unsigned COEF [K] = '{1, 4, 6, 4, 1};

  sync_t      ws [K][K];
  logic [7:0] wd [K][K];

  win_gen #(.DW(8), .K(K), .H_TOTAL(H_TOTAL)) u_win (
    .clk      (clk),
    .in_sync  (in_sync),
    .in_data  (in_data),
    .win_sync (ws),
    .win_data (wd)
  );

  logic [15:0] sum;

  always_comb begin
    sum = 16'd128;
    for (int r = 0; r < int'(K); r++)
      for (int c = 0; c < int'(K); c++)
        sum += 16'(COEF[r] * COEF[c]) * 16'(ws[r][c].de ? wd[r][c] : wd[C][C]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_sync <= '0;
      out_data <= '0;
    end else begin
      out_sync <= ws[C][C];
      out_data <= ws[C][C].de ? sum[15:8] : 8'd0;
    end
  end

endmodule
