// coord_counter: recovers pixel coordinates from a raw video stream.
//
// The camera stream carries only pixel data and sync pulses, so every stage
// that needs to know where a pixel lies counts it: x counts active pixels
// within a line and returns to 0 when data enable falls; y counts active
// lines and returns to 0 at the start of vertical sync. The outputs describe
// the pixel presented on the same clock (combinational from the inputs and
// the counter state), so no delay is added to the stream.
//   x, y    coordinates of the current pixel (valid while in_sync.de = 1)
//   eol     last active pixel of a line (de falls on the next clock)
//   sof     first active pixel of a frame
//   eof     pulse on the first clock of vertical sync (frame finished)
// Counting from de and vs is the design's choice; the source only says that
// counters in the logic produce the coordinates.
module coord_counter
  import lv_pkg::*;
#(
  parameter int unsigned XW = 16,
  parameter int unsigned YW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  sync_t         in_sync,
  output logic [XW-1:0] x,
  output logic [YW-1:0] y,
  output logic          sof,
  output logic          eof
);

  logic [XW-1:0] xcnt;
  logic [YW-1:0] ycnt;
  logic          de_q, vs_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xcnt <= '0;
      ycnt <= '0;
      de_q <= 1'b0;
      vs_q <= 1'b0;
    end else begin
      de_q <= in_sync.de;
      vs_q <= in_sync.vs;
      if (in_sync.de) xcnt <= xcnt + 1'b1;
      else            xcnt <= '0;
      if (in_sync.vs && !vs_q)        ycnt <= '0;
      else if (de_q && !in_sync.de)   ycnt <= ycnt + 1'b1;
    end
  end

  assign x   = xcnt;
  assign y   = ycnt;
  assign sof = in_sync.de && !de_q && (ycnt == '0);
  assign eof = in_sync.vs && !vs_q;

endmodule
