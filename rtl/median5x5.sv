// median5x5: 5 x 5 median filter for a binary image.
//
// For one-bit pixels the median of the 25 window values is 1 exactly when
// at least 13 of them are 1, so the filter is a population count and a
// compare. It removes isolated outlier pixels and smooths object edges.
// Neighbours outside the picture count as background (0), a choice of this
// design. Latency: 2*H_TOTAL + 4 clocks, sync bits delayed with the data.
module median5x5
  import lv_pkg::*;
#(
  parameter int unsigned H_TOTAL = H_TOTAL_DEF
) (
  input  logic  clk,
  input  logic  rst_n,
  input  sync_t in_sync,
  input  logic  in_data,
  output sync_t out_sync,
  output logic  out_data
);

  localparam int unsigned K    = 5;
  localparam int unsigned C    = K / 2;
  localparam int unsigned HALF = (K * K + 1) / 2;

  sync_t ws [K][K];
  logic  wd [K][K];

  win_gen #(.DW(1), .K(K), .H_TOTAL(H_TOTAL)) u_win (
    .clk      (clk),
    .in_sync  (in_sync),
    .in_data  (in_data),
    .win_sync (ws),
    .win_data (wd)
  );

  logic [4:0] ones;

  always_comb begin
    ones = '0;
    for (int r = 0; r < int'(K); r++)
      for (int c = 0; c < int'(K); c++)
        ones += 5'(ws[r][c].de & wd[r][c]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_sync <= '0;
      out_data <= 1'b0;
    end else begin
      out_sync <= ws[C][C];
      out_data <= ws[C][C].de && (ones >= 5'(HALF));
    end
  end

endmodule
