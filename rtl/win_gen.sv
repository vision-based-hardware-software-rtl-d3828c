// win_gen: K x K neighbourhood generator for a raster video stream.
//
// K-1 line delays, each exactly one raster line (H_TOTAL clocks, blanking
// included), stack K consecutive lines; a K-word shift register per line
// then holds K consecutive pixels. Because the delays run on every clock,
// tap [r][c] always holds the pixel r lines and c pixels before the newest
// one, blanking included. Each tap carries its sync bits, so a neighbour
// outside the picture is recognised by its data enable being 0, and the
// centre tap's sync bits are the sync of the window's output pixel. The
// window is a register output; a filter that registers its result adds one
// more clock, so a K x K filter delays the stream by (K/2)*H_TOTAL + K/2 + 2
// clocks (the centre tap is (K/2)*H_TOTAL + K/2 + 1 clocks old). Needs at
// least K/2 blanking pixels per line and K/2 blanking lines.
//   win[r][c]  r = 0 newest line, c = 0 newest pixel; centre is [K/2][K/2]
module win_gen
  import lv_pkg::*;
#(
  parameter int unsigned DW      = 8,
  parameter int unsigned K       = 5,
  parameter int unsigned H_TOTAL = H_TOTAL_DEF
) (
  input  logic          clk,
  input  sync_t         in_sync,
  input  logic [DW-1:0] in_data,
  output sync_t         win_sync [K][K],
  output logic [DW-1:0] win_data [K][K]
);

  localparam int unsigned W = DW + 3;

  logic [W-1:0] row_in [K];
  logic [W-1:0] sr     [K][K];

  assign row_in[0] = {in_sync, in_data};

  for (genvar r = 1; r < K; r++) begin : g_lines
    line_delay #(.W(W), .DELAY(H_TOTAL)) u_ld (
      .clk (clk),
      .d   (row_in[r-1]),
      .q   (row_in[r])
    );
  end

  initial for (int r = 0; r < int'(K); r++) for (int c = 0; c < int'(K); c++) sr[r][c] = '0;

  always_ff @(posedge clk) begin
    for (int r = 0; r < int'(K); r++) begin
      sr[r][0] <= row_in[r];
      for (int c = 1; c < int'(K); c++) sr[r][c] <= sr[r][c-1];
    end
  end

  // Row r of the window must be r lines older than row 0 at the same
  // column: row_in[r] is already r*H_TOTAL clocks late, and every row goes
  // through the same one-register step into sr[r][0].
  always_comb begin
    for (int r = 0; r < int'(K); r++)
      for (int c = 0; c < int'(K); c++) begin
        win_sync[r][c] = sync_t'(sr[r][c][W-1 -: 3]);
        win_data[r][c] = sr[r][c][DW-1:0];
      end
  end

endmodule
