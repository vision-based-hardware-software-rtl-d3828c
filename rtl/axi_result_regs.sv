// axi_result_regs: AXI4-Lite slave through which the processor reads the
// vision and altitude results.
//
// The labelling stage delivers its object list once per frame, during
// vertical blanking; each object is stored in an object memory in order.
// When the frame_done pulse arrives the count is latched, the frame counter
// advances and the frame-ready flag (and the interrupt, if enabled) is
// raised. The list then stays unchanged for one whole frame period, while
// the processor reads it. The last range finder reading is held beside it.
// Register map (32-bit words, byte addresses):
//   0x000 STATUS   [0] frame ready (write 1 to clear), [1] label overflow
//                  in that frame, [2] range finder timeout seen
//   0x004 OBJ_COUNT   objects in the list
//   0x008 FRAME_COUNT frames completed
//   0x00C DISTANCE    [15:0] last distance in cm, [31] a reading exists
//   0x010 CTRL        [0] interrupt enable (read/write)
//   0x014 DIST_COUNT  range finder readings so far
//   0x1000 + 16 i     object i: +0 area, +4 {xmax, xmin}, +8 {ymax, ymin},
//                     +12 {cy, cx}   (16-bit halves)
// Reads answer one clock after the address is accepted; writes complete
// with OKAY one clock after address and data are both present. The AXI
// link itself is named by the source; the register map is this design's.
module axi_result_regs
  import lv_pkg::*;
#(
  parameter int unsigned MAX_OBJ = 255,
  parameter int unsigned ADDR_W  = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // result inputs
  input  logic              obj_valid,
  input  obj_t              obj,
  input  logic              frame_done,
  input  logic [15:0]       obj_count,
  input  logic              ovf,
  input  logic [15:0]       dist_cm,
  input  logic              dist_valid,
  input  logic              dist_timeout,
  output logic              irq,
  // AXI4-Lite slave
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
  input  logic              s_axi_rready
);

  localparam int unsigned OW = $clog2(MAX_OBJ + 1);
  localparam logic [ADDR_W-1:0] OBJ_BASE = ADDR_W'(16'h1000);

  obj_t        omem [MAX_OBJ];
  logic [OW-1:0] wptr;
  logic        ready_flag, ovf_flag, irq_en, have_dist;
  logic [31:0] obj_cnt_r, frame_cnt, dist_cnt;
  logic [15:0] dist_r;

  // ---------------- result capture ---------------------------------------
  always_ff @(posedge clk) begin
    if (obj_valid && wptr < OW'(MAX_OBJ)) omem[wptr] <= obj;
  end

  logic wr_fire;
  assign wr_fire = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr       <= '0;
      ready_flag <= 1'b0;
      ovf_flag   <= 1'b0;
      irq_en     <= 1'b0;
      have_dist  <= 1'b0;
      obj_cnt_r  <= '0;
      frame_cnt  <= '0;
      dist_cnt   <= '0;
      dist_r     <= '0;
    end else begin
      if (obj_valid && wptr < OW'(MAX_OBJ)) wptr <= wptr + 1'b1;
      if (frame_done) begin
        wptr       <= '0;
        obj_cnt_r  <= 32'(obj_count);
        ovf_flag   <= ovf;
        frame_cnt  <= frame_cnt + 1'b1;
      end
      if (dist_valid) begin
        dist_r    <= dist_cm;
        have_dist <= 1'b1;
        dist_cnt  <= dist_cnt + 1'b1;
      end
      // Software writes; a new frame has priority over clearing its flag.
      if (wr_fire && s_axi_wstrb[0]) begin
        if (s_axi_awaddr == ADDR_W'(16'h0010)) irq_en <= s_axi_wdata[0];
        if (s_axi_awaddr == ADDR_W'(16'h0000) && s_axi_wdata[0]) ready_flag <= 1'b0;
      end
      if (frame_done) ready_flag <= 1'b1;
    end
  end

  assign irq = irq_en && ready_flag;

  // ---------------- AXI4-Lite write channel ------------------------------
  assign s_axi_awready = wr_fire;
  assign s_axi_wready  = wr_fire;
  assign s_axi_bresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                          s_axi_bvalid <= 1'b0;
    else if (wr_fire)                    s_axi_bvalid <= 1'b1;
    else if (s_axi_bvalid && s_axi_bready) s_axi_bvalid <= 1'b0;
  end

  // ---------------- AXI4-Lite read channel -------------------------------
  logic [31:0]       rd_val;
  logic [ADDR_W-1:0] oaddr;
  logic [OW-1:0]     oidx;
  obj_t              orec;

  always_comb begin
    oaddr  = s_axi_araddr - OBJ_BASE;
    oidx   = OW'(oaddr >> 4);
    orec   = omem[(oidx < OW'(MAX_OBJ)) ? oidx : '0];
    rd_val = '0;
    if (s_axi_araddr >= OBJ_BASE && (oaddr >> 4) < ADDR_W'(MAX_OBJ)) begin
      case (oaddr[3:2])
        2'd0: rd_val = orec.area;
        2'd1: rd_val = {orec.xmax, orec.xmin};
        2'd2: rd_val = {orec.ymax, orec.ymin};
        default: rd_val = {orec.cy, orec.cx};
      endcase
    end else begin
      case (s_axi_araddr)
        ADDR_W'(16'h0000): rd_val = {29'd0, dist_timeout, ovf_flag, ready_flag};
        ADDR_W'(16'h0004): rd_val = obj_cnt_r;
        ADDR_W'(16'h0008): rd_val = frame_cnt;
        ADDR_W'(16'h000C): rd_val = {have_dist, 15'd0, dist_r};
        ADDR_W'(16'h0010): rd_val = {31'd0, irq_en};
        ADDR_W'(16'h0014): rd_val = dist_cnt;
        default:           rd_val = '0;
      endcase
    end
  end

  assign s_axi_arready = !s_axi_rvalid;
  assign s_axi_rresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else if (s_axi_arvalid && s_axi_arready) begin
      s_axi_rvalid <= 1'b1;
      s_axi_rdata  <= rd_val;
    end else if (s_axi_rvalid && s_axi_rready) begin
      s_axi_rvalid <= 1'b0;
    end
  end

  // AXI rule: a response, once offered, holds until it is taken.
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);

endmodule
