// tb_landing_vision_full: the end-to-end test of tb_top_body.svh with the
// top at its default parameters: 1280 x 720 picture in a 1650 x 750 raster,
// 128 x 128 threshold windows, 256 labels, 74.25 MHz clock (742 clocks per
// centimetre of range).
module tb_landing_vision_full;
  import lv_pkg::*;

  localparam int HA = 1280, VA = 720, HT = 1650, VT = 750, WL = 7, CPC = 742;

  landing_vision_top dut (
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
