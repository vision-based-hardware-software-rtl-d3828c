// dilation3x3: binary dilation with a full 3 x 3 structuring element.
//
// A pixel becomes foreground (1) if any in-picture pixel of its 3 x 3
// window is 1. Run after erosion and the median, it gives the surviving
// objects back their original size. Neighbours outside the picture count
// as background. Latency: H_TOTAL + 3 clocks, sync bits delayed with the data.
module dilation3x3
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

  localparam int unsigned K = 3;
  localparam int unsigned C = K / 2;

  sync_t ws [K][K];
  logic  wd [K][K];

  win_gen #(.DW(1), .K(K), .H_TOTAL(H_TOTAL)) u_win (
    .clk      (clk),
    .in_sync  (in_sync),
    .in_data  (in_data),
    .win_sync (ws),
    .win_data (wd)
  );

  logic res;

  always_comb begin
    res = 1'b0;
    for (int r = 0; r < int'(K); r++)
      for (int c = 0; c < int'(K); c++)
        if (ws[r][c].de && wd[r][c]) res = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_sync <= '0;
      out_data <= 1'b0;
    end else begin
      out_sync <= ws[C][C];
      out_data <= ws[C][C].de & res;
    end
  end

endmodule
