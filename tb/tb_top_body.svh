// Shared body of the end-to-end testbenches of landing_vision_top. The
// including module defines HA, VA, HT, VT, WL, CPC (clocks per centimetre of
// the range finder) and instantiates the top as "dut" on the signals
// declared here.
//
// Picture: a landing marker - a thick dark ring with a square, a rectangle
// and a small ring inside - on a background whose brightness falls from
// left to right, plus isolated dark specks. Three frames are sent. The
// first is binarised with the reset thresholds; frames 1 and 2 use the
// window thresholds of the frame before. After frame 1 the object list is
// read over AXI4-Lite, as the processor would after the interrupt, and the
// ring, the square and the rectangle must each appear with a bounding box
// within TOL pixels of the drawn one; the specks must be gone. The range
// finder model answers with a fixed distance that must appear in the
// DISTANCE register. Each mechanism is counted and must occur at least once.

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        vid_vs = 0, vid_hs = 0, vid_de = 0;
  logic [23:0] vid_rgb = '0;
  logic        lidar_pwm, lidar_trig_n, irq;
  logic [15:0] awaddr = 0, araddr = 0;
  logic        awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0;
  logic [31:0] wdata = 0, rdata;
  logic [3:0]  wstrb = 0;
  logic [1:0]  bresp, rresp;
  logic        arvalid = 0, arready, rvalid, rready = 0;
  sync_t       mon_sync;
  logic        mon_bin;

  localparam int S   = VA / 180;            // marker scale
  localparam int CX  = HA / 2, CY = VA / 2;
  localparam int RO  = 60 * S, RI = 48 * S; // big ring radii
  localparam int TOL = 3;
  localparam int DIST = 120;                // range finder answer, cm

  int   model_pulses;
  lidar_model #(.CYC_PER_CM(CPC), .DELAY(20)) dev (
    .clk, .trig_n (lidar_trig_n), .enable (1'b1), .dist_cm (DIST),
    .pwm (lidar_pwm), .pulses (model_pulses));

  int checks = 0, failures = 0;
  // Mechanism counters.
  int n_thr_update = 0, n_merge = 0, n_specks_removed = 0, n_irq = 0,
      n_dist = 0, n_frames = 0;

  function automatic bit dark(int x, int y);
    int dx, dy, r2, sx, sy;
    dx = x - CX; dy = y - CY; r2 = dx * dx + dy * dy;
    if (r2 <= RO * RO && r2 >= RI * RI) return 1;                     // big ring
    if (x >= CX - 12 * S && x < CX + 12 * S && y >= CY - 38 * S && y < CY - 14 * S) return 1; // square
    if (x >= CX - 24 * S && x < CX + 24 * S && y >= CY + 12 * S && y < CY + 32 * S) return 1; // rectangle
    if (r2 <= 7 * S * 7 * S && r2 >= 3 * S * 3 * S) return 1;        // small ring
    // isolated 3 x 3 specks away from the marker
    if (x % 37 < 3 && y % 29 < 3 && (dx * dx + dy * dy) > (RO + 8) * (RO + 8)) return 1;
    return 0;
  endfunction

  function automatic logic [23:0] pixel(int x, int y);
    int bg, v;
    bg = 215 - (90 * x) / HA;
    v  = dark(x, y) ? 35 + (20 * x) / HA : bg;
    return {8'(v), 8'(v), 8'(v)};
  endfunction

  task automatic axi_read(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1; rready = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(negedge clk);
    rready = 0;
  endtask

  task automatic axi_write(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; wdata = d; wstrb = 4'hF; awvalid = 1; wvalid = 1; bready = 1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
    @(negedge clk);
    bready = 0;
  endtask

  // Expected boxes: {xmin, xmax, ymin, ymax}
  function automatic bit box_near(logic [31:0] xw, logic [31:0] yw, int x0, int x1, int y0, int y1);
    int a, b, c, d;
    a = int'(xw[15:0]); b = int'(xw[31:16]); c = int'(yw[15:0]); d = int'(yw[31:16]);
    return (a - x0 <= TOL && x0 - a <= TOL && b - x1 <= TOL && x1 - b <= TOL &&
            c - y0 <= TOL && y0 - c <= TOL && d - y1 <= TOL && y1 - d <= TOL);
  endfunction

  logic [7:0] th_prev = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_thr.eof && dut.u_thr.th_cur != dut.u_thr.th_next) n_thr_update++;
    if (dut.u_ccl.do_merge) n_merge++;
    if (dut.u_regs.frame_done) n_frames++;
  end

  task automatic send_frame(int f);
    for (int y = 0; y < VT; y++)
      for (int x = 0; x < HT; x++) begin
        @(negedge clk);
        vid_de  = (y < VA) && (x < HA);
        vid_hs  = (x >= HA + 8) && (x < HA + 48);
        vid_vs  = (y >= VA + 2) && (y < VA + 5);
        vid_rgb = vid_de ? pixel(x, y) : 24'd0;
      end
  endtask

  task automatic check_objects();
    logic [31:0] d, n, area, xw, yw;
    bit got_ring, got_sq, got_rect;
    int n_small;
    got_ring = 0; got_sq = 0; got_rect = 0; n_small = 0;
    axi_read(16'h0004, n);
    $display("objects reported: %0d", n);
    for (int i = 0; i < int'(n); i++) begin
      axi_read(16'(16'h1000 + 16 * i), area);
      axi_read(16'(16'h1000 + 16 * i + 4), xw);
      axi_read(16'(16'h1000 + 16 * i + 8), yw);
      $display("  obj %0d: area %0d x %0d..%0d y %0d..%0d", i, area, xw[15:0], xw[31:16], yw[15:0], yw[31:16]);
      if (box_near(xw, yw, CX - RO, CX + RO, CY - RO, CY + RO)) got_ring = 1;
      if (box_near(xw, yw, CX - 12 * S, CX + 12 * S - 1, CY - 38 * S, CY - 14 * S - 1)) got_sq = 1;
      if (box_near(xw, yw, CX - 24 * S, CX + 24 * S - 1, CY + 12 * S, CY + 32 * S - 1)) got_rect = 1;
      if (area < 40) n_small++;
    end
    checks++; if (!got_ring) begin failures++; $display("ring not found"); end
    checks++; if (!got_sq)   begin failures++; $display("square not found"); end
    checks++; if (!got_rect) begin failures++; $display("rectangle not found"); end
    checks++; if (n_small != 0) begin failures++; $display("%0d specks survived", n_small); end
    else n_specks_removed++;
  endtask

  initial begin
    logic [31:0] d;
    repeat (3) @(posedge clk);
    rst_n = 1;
    axi_write(16'h0010, 32'h1);                   // interrupt enable
    send_frame(0);
    send_frame(1);
    // The labelling readout of frame 1 runs in its vertical blanking; the
    // interrupt follows.
    while (!irq) @(negedge clk);
    n_irq++;
    axi_write(16'h0000, 32'h1);
    fork
      send_frame(2);
      check_objects();
    join
    axi_read(16'h0008, d);
    checks++;
    if (d < 2) begin failures++; $display("frame count %0d", d); end
    // Wait for a range finder reading if none has arrived yet.
    while (dut.u_lidar.meas_count == 0) @(negedge clk);
    axi_read(16'h000C, d);
    checks++;
    if (d != {1'b1, 15'd0, 16'(DIST)}) begin failures++; $display("distance register %h", d); end
    else n_dist++;
    $display("mechanisms: threshold table updates %0d, label merges %0d, frames %0d, interrupts %0d, distance reads %0d, speck removal %0d",
             n_thr_update, n_merge, n_frames, n_irq, n_dist, n_specks_removed);
    checks++; if (n_thr_update == 0) begin failures++; $display("threshold table never updated"); end
    checks++; if (n_merge == 0) begin failures++; $display("no label merge"); end
    checks++; if (n_irq == 0) failures++;
    checks++; if (n_dist == 0) failures++;
    checks++; if (n_specks_removed == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4 * HT * VT + 200 * CPC + 20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
