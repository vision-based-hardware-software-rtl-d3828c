// seq_div: unsigned restoring divider, one quotient bit per clock.
//
// A start pulse loads dividend and divisor; W clocks later done pulses for
// one clock with quotient = floor(dividend / divisor) and the remainder.
// Division by zero returns an all-ones quotient. busy is high from the
// clock after start until done.
module seq_div #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quotient,
  output logic [W-1:0] remainder
);

  localparam int unsigned CW = $clog2(W + 1);

  logic [W-1:0]  dvs;
  logic [W:0]    rem;
  logic [W-1:0]  quo;
  logic [CW-1:0] cnt;
  logic [W:0]    trial;

  always_comb trial = {rem[W-1:0], quo[W-1]} - {1'b0, dvs};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dvs  <= '0;
      rem  <= '0;
      quo  <= '0;
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        dvs  <= divisor;
        rem  <= '0;
        quo  <= dividend;
        cnt  <= CW'(W);
        busy <= 1'b1;
      end else if (busy) begin
        if (!trial[W]) begin
          rem <= trial;
          quo <= {quo[W-2:0], 1'b1};
        end else begin
          rem <= {rem[W-1:0], quo[W-1]};
          quo <= {quo[W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign quotient  = quo;
  assign remainder = rem[W-1:0];

endmodule
