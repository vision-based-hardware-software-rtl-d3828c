// lidar_model: behavioural model of a PWM-mode laser range finder, for
// simulation only. While trig_n is low and the model is enabled it waits
// DELAY clocks, then drives a pulse on pwm of dist_cm * CYC_PER_CM clocks
// (10 us per centimetre on the real device), then waits for trig_n to be
// released and pulled low again before the next measurement.
module lidar_model #(
  parameter int CYC_PER_CM = 10,
  parameter int DELAY      = 7
) (
  input  logic        clk,
  input  logic        trig_n,
  input  logic        enable,
  input  int          dist_cm,
  output logic        pwm,
  output int          pulses
);
  initial begin
    pwm = 0;
    pulses = 0;
    forever begin
      @(posedge clk);
      if (!trig_n && enable) begin
        repeat (DELAY) @(posedge clk);
        pwm = 1;
        repeat (dist_cm * CYC_PER_CM) @(posedge clk);
        pwm = 0;
        pulses++;
        while (!trig_n) @(posedge clk);
      end
    end
  end
endmodule
