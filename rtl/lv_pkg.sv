// lv_pkg: types and constants shared by the landing-pad vision pipeline.
//
// The video stream moves through the pipeline one pixel per clock as a
// sync_t word (data enable, horizontal and vertical sync) beside the pixel
// data. The frame size defaults are the 1280 x 720 camera stream; the
// blanking totals (1650 x 750) are those of the standard 720p60 raster at a
// 74.25 MHz pixel clock, a choice of this design since the source only gives
// the active size and the frame rate. obj_t is one labelled object as the
// connected component labelling stage reports it.
package lv_pkg;

  // Active picture (from the system description: 1280 x 720 @ 60 fps).
  localparam int unsigned H_ACTIVE_DEF = 1280;
  localparam int unsigned V_ACTIVE_DEF = 720;
  // Raster totals including blanking (standard 720p60 timing, assumed).
  localparam int unsigned H_TOTAL_DEF  = 1650;
  localparam int unsigned V_TOTAL_DEF  = 750;
  localparam int unsigned CLK_HZ_DEF   = 74_250_000;

  // Adaptive threshold window edge (128 x 128 pixel windows).
  localparam int unsigned WIN_LOG2     = 7;

  // Synchronisation bits that travel with every pixel. All active high.
  typedef struct packed {
    logic vs;   // vertical sync
    logic hs;   // horizontal sync
    logic de;   // data enable: pixel belongs to the active picture
  } sync_t;

  typedef logic [15:0] coord_t;

  // One labelled object: area, bounding box and centroid (integer part).
  typedef struct packed {
    logic [31:0] area;
    coord_t      xmin;
    coord_t      xmax;
    coord_t      ymin;
    coord_t      ymax;
    coord_t      cx;
    coord_t      cy;
  } obj_t;

endpackage
