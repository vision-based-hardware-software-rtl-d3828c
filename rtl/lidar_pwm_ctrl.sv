// lidar_pwm_ctrl: keeps a PWM-mode laser range finder measuring and
// converts each returned pulse into a distance in centimetres.
//
// The range finder (a LIDAR-Lite v3 class device) starts a measurement while
// its mode pin is pulled low and answers with a pulse on its monitor output
// whose width is 10 us per centimetre. The state machine pulls the trigger
// low, waits for the pulse, measures its width with a prescaler of
// CYCLES_PER_CM clocks (10 us) that advances a centimetre counter, stores
// the result, releases the trigger for REARM clocks and starts again, so
// measurements follow each other continuously. A missing pulse or one longer
// than MAX_CM restarts the cycle and raises timeout_seen.
//   trig_n      to the device mode pin (0 = measure)
//   pwm_in      device monitor output (asynchronous, double-registered here)
//   dist_cm     last distance; dist_valid pulses when it is updated
// The continuous trigger-and-read state machine follows the source; the
// pulse scale (10 us/cm) is the device's published behaviour, and the
// timeouts and re-arm gap are this design's.
module lidar_pwm_ctrl
  import lv_pkg::*;
#(
  parameter int unsigned CLK_HZ        = CLK_HZ_DEF,
  parameter int unsigned CYCLES_PER_CM = CLK_HZ / 100_000,
  parameter int unsigned MAX_CM        = 4000,
  parameter int unsigned WAIT_CYCLES   = CLK_HZ / 50,     // 20 ms
  parameter int unsigned REARM         = CLK_HZ / 1_000_000 // 1 us
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        pwm_in,
  output logic        trig_n,
  output logic [15:0] dist_cm,
  output logic        dist_valid,
  output logic        timeout_seen,
  output logic [15:0] meas_count
);

  typedef enum logic [1:0] {S_REARM, S_WAIT, S_MEAS} state_t;
  state_t state;

  logic [2:0]  sync;
  logic        pwm, pwm_q;
  logic [31:0] tmr;
  logic [31:0] pre;
  logic [15:0] cm;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sync <= '0;
    else        sync <= {sync[1:0], pwm_in};
  end
  assign pwm   = sync[1];
  assign pwm_q = sync[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_REARM;
      tmr          <= '0;
      pre          <= '0;
      cm           <= '0;
      dist_cm      <= '0;
      dist_valid   <= 1'b0;
      timeout_seen <= 1'b0;
      meas_count   <= '0;
    end else begin
      dist_valid <= 1'b0;
      case (state)
        S_REARM: begin
          tmr <= tmr + 1'b1;
          if (tmr >= 32'(REARM)) begin
            tmr   <= '0;
            state <= S_WAIT;
          end
        end
        S_WAIT: begin
          tmr <= tmr + 1'b1;
          if (pwm && !pwm_q) begin
            // The clock that saw the rising edge is the pulse's first.
            tmr   <= '0;
            pre   <= 32'd1;
            cm    <= '0;
            state <= S_MEAS;
          end else if (tmr >= 32'(WAIT_CYCLES)) begin
            timeout_seen <= 1'b1;
            tmr          <= '0;
            state        <= S_REARM;
          end
        end
        S_MEAS: begin
          if (!pwm) begin
            dist_cm    <= cm;
            dist_valid <= 1'b1;
            meas_count <= meas_count + 1'b1;
            tmr        <= '0;
            state      <= S_REARM;
          end else begin
            if (pre == 32'(CYCLES_PER_CM - 1)) begin
              pre <= '0;
              cm  <= cm + 1'b1;
              if (cm >= 16'(MAX_CM)) begin
                timeout_seen <= 1'b1;
                tmr          <= '0;
                state        <= S_REARM;
              end
            end else begin
              pre <= pre + 1'b1;
            end
          end
        end
        default: state <= S_REARM;
      endcase
    end
  end

  assign trig_n = (state == S_REARM);

endmodule
