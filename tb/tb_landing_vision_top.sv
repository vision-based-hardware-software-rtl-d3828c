// tb_landing_vision_top: end-to-end test of the whole pipeline at a quarter
// of the camera resolution (320 x 180 picture, 32 x 32 threshold windows,
// so the window grid is the same 10 x 6 as at full size). The range finder
// runs at a scaled clock of 100 clocks per centimetre. The test itself is
// in tb_top_body.svh.
module tb_landing_vision_top;
  import lv_pkg::*;

  localparam int HA = 320, VA = 180, HT = 412, VT = 200, WL = 5, CPC = 100;

  landing_vision_top #(
    .H_ACTIVE (HA), .V_ACTIVE (VA), .H_TOTAL (HT), .WLOG2 (WL),
    .MAX_LABELS (256), .CLK_HZ (CPC * 100_000)
  ) dut (
    .clk, .rst_n, .vid_vs, .vid_hs, .vid_de, .vid_rgb,
    .lidar_pwm, .lidar_trig_n, .irq,
    .s_axi_awaddr (awaddr), .s_axi_awvalid (awvalid), .s_axi_awready (awready),
    .s_axi_wdata (wdata), .s_axi_wstrb (wstrb), .s_axi_wvalid (wvalid), .s_axi_wready (wready),
    .s_axi_bresp (bresp), .s_axi_bvalid (bvalid), .s_axi_bready (bready),
    .s_axi_araddr (araddr), .s_axi_arvalid (arvalid), .s_axi_arready (arready),
    .s_axi_rdata (rdata), .s_axi_rresp (rresp), .s_axi_rvalid (rvalid), .s_axi_rready (rready),
    .mon_sync, .mon_bin);

  `include "tb_top_body.svh"
endmodule
