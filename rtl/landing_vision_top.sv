// landing_vision_top: programmable-logic part of the landing-pad vision
// system.
//
// A 24-bit RGB camera stream (pixel clock, data enable, sync) passes through
//   rgb2gray -> gauss5x5 -> adaptive_threshold -> erosion3x3 -> median5x5
//   -> dilation3x3 -> ccl
// one pixel per clock, with no frame buffer. The labelling stage reports,
// once per frame during vertical blanking, the area, bounding box and
// centroid of every dark object; axi_result_regs holds that list for the
// processor together with the latest range finder distance measured by
// lidar_pwm_ctrl. Shape classification, marker assembly and position and
// orientation computation run as software on the processor and are not part
// of this logic.
// Pipeline latency from a pixel entering to its binary value reaching the
// labelling stage: 1 + (2H+4) + 3 + (H+3) + (2H+4) + (H+3) = 6H + 18 clocks
// with H = H_TOTAL. The chain of stages is the source's; the interfaces
// between them are this design's.
module landing_vision_top
  import lv_pkg::*;
#(
  parameter int unsigned H_ACTIVE   = H_ACTIVE_DEF,
  parameter int unsigned V_ACTIVE   = V_ACTIVE_DEF,
  parameter int unsigned H_TOTAL    = H_TOTAL_DEF,
  parameter int unsigned WLOG2      = WIN_LOG2,
  parameter int unsigned MAX_LABELS = 256,
  parameter int unsigned CLK_HZ     = CLK_HZ_DEF,
  parameter int unsigned ADDR_W     = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // camera stream
  input  logic              vid_vs,
  input  logic              vid_hs,
  input  logic              vid_de,
  input  logic [23:0]       vid_rgb,
  // range finder
  input  logic              lidar_pwm,
  output logic              lidar_trig_n,
  // to the processor
  output logic              irq,
  input  logic [ADDR_W-1:0] s_axi_awaddr,
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  input  logic [31:0]       s_axi_wdata,
  input  logic [3:0]        s_axi_wstrb,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  output logic [1:0]        s_axi_bresp,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  input  logic [ADDR_W-1:0] s_axi_araddr,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  output logic [31:0]       s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,
  // binary image after filtering, for an optional monitor output
  output sync_t             mon_sync,
  output logic              mon_bin
);

  sync_t      s_in, s_gray, s_blur, s_thr, s_ero, s_med, s_dil;
  logic [7:0] d_gray, d_blur, th_dbg;
  logic       d_thr, d_ero, d_med, d_dil;

  assign s_in = '{vs: vid_vs, hs: vid_hs, de: vid_de};

  rgb2gray u_gray (
    .clk (clk), .rst_n (rst_n),
    .in_sync (s_in), .in_rgb (vid_rgb),
    .out_sync (s_gray), .out_gray (d_gray)
  );

  gauss5x5 #(.H_TOTAL(H_TOTAL)) u_gauss (
    .clk (clk), .rst_n (rst_n),
    .in_sync (s_gray), .in_data (d_gray),
    .out_sync (s_blur), .out_data (d_blur)
  );

  adaptive_threshold #(.H_ACTIVE(H_ACTIVE), .V_ACTIVE(V_ACTIVE), .WLOG2(WLOG2)) u_thr (
    .clk (clk), .rst_n (rst_n),
    .in_sync (s_blur), .in_data (d_blur),
    .out_sync (s_thr), .out_data (d_thr), .out_th (th_dbg)
  );

  erosion3x3 #(.H_TOTAL(H_TOTAL)) u_ero (
    .clk (clk), .rst_n (rst_n),
    .in_sync (s_thr), .in_data (d_thr),
    .out_sync (s_ero), .out_data (d_ero)
  );

  median5x5 #(.H_TOTAL(H_TOTAL)) u_med (
    .clk (clk), .rst_n (rst_n),
    .in_sync (s_ero), .in_data (d_ero),
    .out_sync (s_med), .out_data (d_med)
  );

  dilation3x3 #(.H_TOTAL(H_TOTAL)) u_dil (
    .clk (clk), .rst_n (rst_n),
    .in_sync (s_med), .in_data (d_med),
    .out_sync (s_dil), .out_data (d_dil)
  );

  assign mon_sync = s_dil;
  assign mon_bin  = d_dil;

  logic        obj_valid, frame_done, ovf, ccl_busy;
  obj_t        obj;
  logic [15:0] obj_count, merges;

  ccl #(.H_TOTAL(H_TOTAL), .MAX_LABELS(MAX_LABELS)) u_ccl (
    .clk (clk), .rst_n (rst_n),
    .in_sync (s_dil), .in_data (d_dil),
    .obj_valid (obj_valid), .obj (obj), .frame_done (frame_done),
    .obj_count (obj_count), .ovf (ovf), .busy (ccl_busy), .merges (merges)
  );

  logic [15:0] dist_cm, meas_count;
  logic        dist_valid, dist_timeout;

  lidar_pwm_ctrl #(.CLK_HZ(CLK_HZ)) u_lidar (
    .clk (clk), .rst_n (rst_n),
    .pwm_in (lidar_pwm), .trig_n (lidar_trig_n),
    .dist_cm (dist_cm), .dist_valid (dist_valid),
    .timeout_seen (dist_timeout), .meas_count (meas_count)
  );

  axi_result_regs #(.MAX_OBJ(MAX_LABELS - 1), .ADDR_W(ADDR_W)) u_regs (
    .clk (clk), .rst_n (rst_n),
    .obj_valid (obj_valid), .obj (obj), .frame_done (frame_done),
    .obj_count (obj_count), .ovf (ovf),
    .dist_cm (dist_cm), .dist_valid (dist_valid), .dist_timeout (dist_timeout),
    .irq (irq),
    .s_axi_awaddr (s_axi_awaddr), .s_axi_awvalid (s_axi_awvalid), .s_axi_awready (s_axi_awready),
    .s_axi_wdata (s_axi_wdata), .s_axi_wstrb (s_axi_wstrb), .s_axi_wvalid (s_axi_wvalid),
    .s_axi_wready (s_axi_wready), .s_axi_bresp (s_axi_bresp), .s_axi_bvalid (s_axi_bvalid),
    .s_axi_bready (s_axi_bready), .s_axi_araddr (s_axi_araddr), .s_axi_arvalid (s_axi_arvalid),
    .s_axi_arready (s_axi_arready), .s_axi_rdata (s_axi_rdata), .s_axi_rresp (s_axi_rresp),
    .s_axi_rvalid (s_axi_rvalid), .s_axi_rready (s_axi_rready)
  );

endmodule
