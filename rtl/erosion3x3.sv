// erosion3x3: binary erosion with a full 3 x 3 structuring element.
//
// A foreground pixel (1, a dark object pixel) stays 1 only if all its
// in-picture neighbours in the 3 x 3 window are 1, which removes objects
// thinner than three pixels and shrinks the rest by one pixel. Neighbours
// outside the picture are ignored (treated as foreground), a choice of this
// design. Latency: H_TOTAL + 3 clocks, sync bits delayed with the data.
module erosion3x3
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
    res = 1'b1;
    for (int r = 0; r < int'(K); r++)
      for (int c = 0; c < int'(K); c++)
        if (ws[r][c].de && !wd[r][c]) res = 1'b0;
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
