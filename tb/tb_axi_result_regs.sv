// tb_axi_result_regs: checks the processor-side register block. Two object
// lists of random records are delivered as the labelling stage would, with a
// frame_done pulse each; a distance reading is delivered too. Every object
// word and every status register is then read over AXI4-Lite and compared
// with the values sent. Also checked: the frame-ready flag, the interrupt
// (enabled by a write, cleared by writing 1 to STATUS bit 0), a read held
// under back-pressure (rready low) and a write response.
module tb_axi_result_regs;
  import lv_pkg::*;

  localparam int MO = 15, AW = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        obj_valid = 0, frame_done = 0, ovf = 0, dist_valid = 0, dist_timeout = 0, irq;
  obj_t        obj;
  logic [15:0] obj_count = 0, dist_cm = 0;
  logic [AW-1:0] awaddr = 0, araddr = 0;
  logic        awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0;
  logic [31:0] wdata = 0, rdata;
  logic [3:0]  wstrb = 0;
  logic [1:0]  bresp, rresp;
  logic        arvalid = 0, arready, rvalid, rready = 0;

  axi_result_regs #(.MAX_OBJ(MO), .ADDR_W(AW)) dut (
    .clk, .rst_n, .obj_valid, .obj, .frame_done, .obj_count, .ovf,
    .dist_cm, .dist_valid, .dist_timeout, .irq,
    .s_axi_awaddr (awaddr), .s_axi_awvalid (awvalid), .s_axi_awready (awready),
    .s_axi_wdata (wdata), .s_axi_wstrb (wstrb), .s_axi_wvalid (wvalid), .s_axi_wready (wready),
    .s_axi_bresp (bresp), .s_axi_bvalid (bvalid), .s_axi_bready (bready),
    .s_axi_araddr (araddr), .s_axi_arvalid (arvalid), .s_axi_arready (arready),
    .s_axi_rdata (rdata), .s_axi_rresp (rresp), .s_axi_rvalid (rvalid), .s_axi_rready (rready));

  int checks = 0, failures = 0;
  obj_t sent [MO];

  task automatic axi_read(input logic [AW-1:0] a, output logic [31:0] d, input int stall = 0);
    @(negedge clk);
    araddr = a; arvalid = 1; rready = 0;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    repeat (stall) begin
      @(negedge clk);
      checks++;
      if (!rvalid || rdata != d) begin failures++; $display("read not held"); end
    end
    rready = 1;
    @(negedge clk);
    rready = 0;
  endtask

  task automatic axi_write(input logic [AW-1:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; wdata = d; wstrb = 4'hF; awvalid = 1; wvalid = 1; bready = 1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
    checks++;
    if (bresp != 2'b00) failures++;
    @(negedge clk);
    bready = 0;
  endtask

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic send_frame(int n, bit of);
    for (int i = 0; i < n; i++) begin
      sent[i] = obj_t'({$urandom, $urandom, $urandom, $urandom});
      @(negedge clk);
      obj = sent[i]; obj_valid = 1;
      @(negedge clk);
      obj_valid = 0;
      repeat (2) @(negedge clk);
    end
    @(negedge clk);
    obj_count = 16'(n); ovf = of; frame_done = 1;
    @(negedge clk);
    frame_done = 0;
  endtask

  initial begin
    logic [31:0] d;
    repeat (3) @(posedge clk);
    rst_n = 1;
    send_frame(6, 0);
    send_frame(11, 1);
    @(negedge clk);
    dist_cm = 16'd123; dist_valid = 1;
    @(negedge clk);
    dist_valid = 0;
    axi_read(16'h0000, d); check("status", d, 32'h3);
    axi_read(16'h0004, d); check("count", d, 11);
    axi_read(16'h0008, d, 3); check("frames", d, 2);
    axi_read(16'h000C, d); check("distance", d, 32'h8000_007B);
    axi_read(16'h0014, d); check("dist count", d, 1);
    checks++;
    if (irq) begin failures++; $display("irq while disabled"); end
    axi_write(16'h0010, 32'h1);
    @(negedge clk);
    checks++;
    if (!irq) begin failures++; $display("irq not raised"); end
    for (int i = 0; i < 11; i++) begin
      axi_read(16'(16'h1000 + 16 * i), d);      check("area", d, sent[i].area);
      axi_read(16'(16'h1000 + 16 * i + 4), d);  check("x box", d, {sent[i].xmax, sent[i].xmin});
      axi_read(16'(16'h1000 + 16 * i + 8), d);  check("y box", d, {sent[i].ymax, sent[i].ymin});
      axi_read(16'(16'h1000 + 16 * i + 12), d); check("centroid", d, {sent[i].cy, sent[i].cx});
    end
    axi_write(16'h0000, 32'h1);
    axi_read(16'h0000, d); check("status after clear", d, 32'h2);
    checks++;
    if (irq) begin failures++; $display("irq not cleared"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
