// line_delay: delays a word by exactly DELAY clocks (one raster line when
// DELAY is the line total including blanking).
//
// A circular buffer of DELAY-1 words with a registered read supplies the
// delay: each clock the oldest word is read into the output register and
// the new word is written in its place. It maps onto one block RAM in an
// FPGA. DELAY must be at least 2.
module line_delay #(
  parameter int unsigned W     = 8,
  parameter int unsigned DELAY = 1650
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  localparam int unsigned DEPTH = DELAY - 1;
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] ptr = '0;

  initial for (int i = 0; i < int'(DEPTH); i++) mem[i] = '0;

  always_ff @(posedge clk) begin
    q        <= mem[ptr];
    mem[ptr] <= d;
    ptr      <= (ptr == AW'(DEPTH - 1)) ? '0 : ptr + 1'b1;
  end

endmodule
