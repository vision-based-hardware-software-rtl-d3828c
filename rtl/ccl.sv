// ccl: single-pass connected component labelling with object features.
//
// The binary stream (1 = object pixel) is labelled in raster order with
// 8-connectivity, one pixel per clock, without a frame buffer. For each
// pixel the labels of its four causal neighbours are known: the left one
// from the previous clock, the three above from a line buffer of labels
// (one raster line long). Labels are translated through an equivalence
// table that is kept flat at all times: when two objects meet, every entry
// pointing at the absorbed label is redirected to the surviving one in the
// same clock (a parallel compare-and-replace over the table), so one table
// read always yields the final label. In 8-connectivity at most two
// different labels can meet at a pixel (left/upper-left and upper-right),
// so at most one merge happens per clock.
// Each label owns a feature record - area, bounding box, sums of x and y -
// updated with the pixel every clock; a merge adds the absorbed record to
// the survivor. At the start of vertical sync the labels still in use are
// read out, one object at a time, with the centroid sum/area computed by
// two serial dividers (about W+3 clocks per object); then the tables are
// cleared for the next frame. Readout must finish in the vertical blanking:
// (MAX_LABELS-1)*(W+3) clocks, about 8,900 for 256 labels, against 49,500
// blanking clocks of the 720p raster.
// If more than MAX_LABELS-1 labels are needed in one frame, new objects are
// left unlabelled and ovf is reported with the frame.
//   obj_valid/obj  one object per pulse during readout
//   frame_done     pulse after the last object; obj_count, ovf valid then
// The outputs (area, bounding box, centroid per object) are the source's;
// the labelling method, table size and readout timing are this design's.
module ccl
  import lv_pkg::*;
#(
  parameter int unsigned H_TOTAL    = H_TOTAL_DEF,
  parameter int unsigned MAX_LABELS = 256
) (
  input  logic         clk,
  input  logic         rst_n,
  input  sync_t        in_sync,
  input  logic         in_data,
  output logic         obj_valid,
  output obj_t         obj,
  output logic         frame_done,
  output logic [15:0]  obj_count,
  output logic         ovf,
  output logic         busy,
  // Number of label merges since reset (observation only).
  output logic [15:0]  merges
);

  localparam int unsigned LW    = $clog2(MAX_LABELS);
  localparam int unsigned DEPTH = H_TOTAL - 1;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned DW    = 32;

  typedef logic [LW-1:0] label_t;

  typedef struct packed {
    logic [31:0] area;
    coord_t      xmin;
    coord_t      xmax;
    coord_t      ymin;
    coord_t      ymax;
    logic [31:0] sx;
    logic [31:0] sy;
  } feat_t;

  logic [15:0] x, y;
  logic        sof, eof;

  coord_counter #(.XW(16), .YW(16)) u_coord (
    .clk     (clk),
    .rst_n   (rst_n),
    .in_sync (in_sync),
    .x       (x),
    .y       (y),
    .sof     (sof),
    .eof     (eof)
  );

  // ---------------- label line buffer and neighbour labels --------------
  label_t         lmem [DEPTH];
  logic [AW-1:0]  lptr;
  label_t         ur_raw, u_raw, ul_raw, l_raw;
  label_t         parent [MAX_LABELS];
  feat_t          feat   [MAX_LABELS];
  logic [LW:0]    next_lbl;

  initial for (int i = 0; i < int'(DEPTH); i++) lmem[i] = '0;

  assign ur_raw = lmem[lptr];

  // ---------------- labelling decision ---------------------------------
  label_t rl, ru, rul, rur, a, b, cur, surv, dead;
  logic   fg, do_alloc, do_merge, no_label;
  feat_t  px, f_cur, f_upd;

  function automatic feat_t feat_add(input feat_t p, input feat_t q);
    feat_t r;
    r.area = p.area + q.area;
    r.xmin = (q.xmin < p.xmin) ? q.xmin : p.xmin;
    r.xmax = (q.xmax > p.xmax) ? q.xmax : p.xmax;
    r.ymin = (q.ymin < p.ymin) ? q.ymin : p.ymin;
    r.ymax = (q.ymax > p.ymax) ? q.ymax : p.ymax;
    r.sx   = p.sx + q.sx;
    r.sy   = p.sy + q.sy;
    return r;
  endfunction

  always_comb begin
    fg  = in_sync.de && in_data && !busy;
    rl  = parent[l_raw];
    ru  = parent[u_raw];
    rul = parent[ul_raw];
    rur = parent[ur_raw];
    // Left, upper-left and upper neighbours always share one object.
    a = (rl != '0) ? rl : ((rul != '0) ? rul : ru);
    b = rur;
    do_merge = fg && (a != '0) && (b != '0) && (a != b);
    surv     = (a < b) ? a : b;
    dead     = (a < b) ? b : a;
    no_label = fg && (a == '0) && (b == '0);
    do_alloc = no_label && (next_lbl < (LW+1)'(MAX_LABELS));
    if (!fg)           cur = '0;
    else if (do_merge) cur = surv;
    else if (a != '0)  cur = a;
    else if (b != '0)  cur = b;
    else if (do_alloc) cur = label_t'(next_lbl);
    else               cur = '0;
    px = '{area: 32'd1, xmin: x, xmax: x, ymin: y, ymax: y,
           sx: 32'(x), sy: 32'(y)};
    f_cur = feat_add(feat[cur], px);
    f_upd = do_merge ? feat_add(f_cur, feat[dead]) : f_cur;
  end

  // ---------------- readout state machine -------------------------------
  typedef enum logic [1:0] {S_RUN, S_SCAN, S_DIV, S_DONE} state_t;
  state_t      state;
  label_t      ridx;
  logic        div_start, div_done_x, div_done_y, div_busy_x, div_busy_y;
  logic [DW-1:0] qx, qy, remx, remy;
  logic [15:0] count;
  logic        ovf_r;

  assign busy = (state != S_RUN);

  seq_div #(.W(DW)) u_divx (
    .clk (clk), .rst_n (rst_n), .start (div_start),
    .dividend (feat[ridx].sx), .divisor (feat[ridx].area),
    .busy (div_busy_x), .done (div_done_x), .quotient (qx), .remainder (remx)
  );
  seq_div #(.W(DW)) u_divy (
    .clk (clk), .rst_n (rst_n), .start (div_start),
    .dividend (feat[ridx].sy), .divisor (feat[ridx].area),
    .busy (div_busy_y), .done (div_done_y), .quotient (qy), .remainder (remy)
  );

  logic ridx_live;
  always_comb begin
    ridx_live = ({1'b0, ridx} < next_lbl) && (parent[ridx] == ridx);
    div_start = (state == S_SCAN) && ridx_live;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lptr     <= '0;
      u_raw    <= '0;
      ul_raw   <= '0;
      l_raw    <= '0;
      next_lbl <= (LW+1)'(1);
      state    <= S_RUN;
      ridx     <= '0;
      count    <= '0;
      ovf_r    <= 1'b0;
      merges   <= '0;
      obj_valid  <= 1'b0;
      obj        <= '0;
      frame_done <= 1'b0;
      obj_count  <= '0;
      ovf        <= 1'b0;
      for (int i = 0; i < int'(MAX_LABELS); i++) begin
        parent[i] <= label_t'(i);
        feat[i]   <= '0;
      end
    end else begin
      obj_valid  <= 1'b0;
      frame_done <= 1'b0;

      // Raster side: one pixel per clock.
      lmem[lptr] <= cur;
      lptr       <= (lptr == AW'(DEPTH - 1)) ? '0 : lptr + 1'b1;
      ul_raw     <= u_raw;
      u_raw      <= ur_raw;
      l_raw      <= cur;
      if (no_label && !do_alloc) ovf_r <= 1'b1;
      if (do_merge) begin
        for (int i = 0; i < int'(MAX_LABELS); i++)
          if (parent[i] == dead) parent[i] <= surv;
        merges <= merges + 1'b1;
      end
      if (do_alloc) begin
        parent[cur] <= cur;
        feat[cur]   <= px;
        next_lbl    <= next_lbl + 1'b1;
      end else if (fg && cur != '0) begin
        feat[cur] <= f_upd;
      end

      // Readout side: runs in vertical blanking.
      case (state)
        S_RUN: if (eof) begin
          state <= S_SCAN;
          ridx  <= label_t'(1);
          count <= '0;
        end
        S_SCAN: begin
          if ({1'b0, ridx} >= next_lbl) state <= S_DONE;
          else if (ridx_live) state <= S_DIV;
          else if (ridx == label_t'(MAX_LABELS - 1)) state <= S_DONE;
          else ridx <= ridx + 1'b1;
        end
        S_DIV: if (div_done_x) begin
          obj_valid <= 1'b1;
          obj <= '{area: feat[ridx].area,
                   xmin: feat[ridx].xmin, xmax: feat[ridx].xmax,
                   ymin: feat[ridx].ymin, ymax: feat[ridx].ymax,
                   cx: coord_t'(qx), cy: coord_t'(qy)};
          count <= count + 1'b1;
          if (ridx == label_t'(MAX_LABELS - 1)) state <= S_DONE;
          else begin
            ridx  <= ridx + 1'b1;
            state <= S_SCAN;
          end
        end
        S_DONE: begin
          frame_done <= 1'b1;
          obj_count  <= count;
          ovf        <= ovf_r;
          ovf_r      <= 1'b0;
          next_lbl   <= (LW+1)'(1);
          state      <= S_RUN;
        end
        default: state <= S_RUN;
      endcase
    end
  end

  // The readout must end before the next frame's first pixel arrives.
  a_no_pixel_in_readout: assert property (@(posedge clk) disable iff (!rst_n)
    !(busy && in_sync.de && in_data));

endmodule
