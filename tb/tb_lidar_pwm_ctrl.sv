// tb_lidar_pwm_ctrl: runs the range finder controller against a
// behavioural device model at a scaled clock (10 clocks per centimetre).
// Checks that each pulse is converted to the right distance (the pulse is
// dist * 10 clocks; the result must equal dist), that measurements repeat
// without any request (continuous triggering), that the trigger is released
// between measurements, and that a silent device raises the timeout flag
// while a later reply is measured again.
module tb_lidar_pwm_ctrl;
  localparam int CPC = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        pwm, trig_n, dist_valid, timeout_seen, enable;
  logic [15:0] dist_cm, meas_count;
  int          model_dist, pulses;

  lidar_pwm_ctrl #(.CLK_HZ(1_000_000), .CYCLES_PER_CM(CPC), .MAX_CM(400),
                   .WAIT_CYCLES(500), .REARM(4)) dut (
    .clk, .rst_n, .pwm_in (pwm), .trig_n, .dist_cm, .dist_valid,
    .timeout_seen, .meas_count);

  lidar_model #(.CYC_PER_CM(CPC)) dev (
    .clk, .trig_n, .enable, .dist_cm (model_dist), .pwm, .pulses);

  int checks = 0, failures = 0, releases = 0;
  logic trig_q = 1;

  always @(posedge clk) begin
    trig_q <= trig_n;
    if (rst_n && trig_n && !trig_q) releases++;
  end

  task automatic measure(int d);
    model_dist = d;
    // Skip a reading that may have started with the old distance.
    @(posedge dist_valid);
    @(posedge dist_valid);
    @(negedge clk);
    checks++;
    if (int'(dist_cm) != d) begin
      failures++;
      $display("distance %0d cm measured as %0d", d, dist_cm);
    end
  endtask

  initial begin
    enable = 1;
    model_dist = 5;
    repeat (3) @(posedge clk);
    rst_n = 1;
    measure(5);
    measure(37);
    measure(150);
    measure(1);
    checks++;
    if (timeout_seen) begin failures++; $display("unexpected timeout"); end
    // Silent device: the controller must give up and retry.
    enable = 0;
    repeat (1500) @(posedge clk);
    checks++;
    if (!timeout_seen) begin failures++; $display("no timeout flagged"); end
    enable = 1;
    measure(64);
    checks++;
    if (int'(meas_count) < 8 || releases < 8) begin
      failures++;
      $display("measurements %0d, trigger releases %0d", meas_count, releases);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
