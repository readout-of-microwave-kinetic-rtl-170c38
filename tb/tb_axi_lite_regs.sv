// tb_axi_lite_regs: exercises the AXI4-Lite register file. Writes with the
// address before the data, the data before the address and both together;
// byte-strobed writes; holds bready/rready low to check that responses stay
// valid; reads back every register (CTRL, FTW, the frame counter driven by
// the bench, the ID constant) and checks the register outputs, the write
// to a read-only register and the self-clearing phase-reset bit.
module tb_axi_lite_regs;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [3:0]  s_axi_awaddr = '0, s_axi_araddr = '0, s_axi_wstrb = '0;
  logic        s_axi_awvalid = 0, s_axi_wvalid = 0, s_axi_bready = 0, s_axi_arvalid = 0, s_axi_rready = 0;
  logic [31:0] s_axi_wdata = '0;
  logic        s_axi_awready, s_axi_wready, s_axi_bvalid, s_axi_arready, s_axi_rvalid;
  logic [1:0]  s_axi_bresp, s_axi_rresp;
  logic [31:0] s_axi_rdata;
  logic        ctrl_nco_en, ctrl_src_sel, ctrl_nco_sync;
  logic [31:0] ftw;
  logic [31:0] frame_count = 32'd0;
  int checks = 0, failures = 0;
  int sync_pulses = 0;

  always #5 clk = ~clk;

  axi_lite_regs dut (.*);

  always @(posedge clk) if (ctrl_nco_sync) sync_pulses++;

  task automatic check(string what, logic [31:0] got, logic [31:0] want);
    checks++;
    if (got !== want) begin
      failures++;
      $display("%s: got %h want %h", what, got, want);
    end
  endtask

  // order: 0 = together, 1 = address first, 2 = data first
  task automatic axi_write(logic [3:0] a, logic [31:0] d, logic [3:0] strb, int order, int bdelay);
    if (order != 2) begin s_axi_awvalid = 1; s_axi_awaddr = a; end
    if (order != 1) begin s_axi_wvalid = 1; s_axi_wdata = d; s_axi_wstrb = strb; end
    if (order != 0) begin
      @(negedge clk);
      if (order == 1) begin s_axi_awvalid = 0; s_axi_wvalid = 1; s_axi_wdata = d; s_axi_wstrb = strb; end
      else            begin s_axi_wvalid = 0; s_axi_awvalid = 1; s_axi_awaddr = a; end
    end
    @(negedge clk);
    s_axi_awvalid = 0; s_axi_wvalid = 0;
    while (!s_axi_bvalid) @(negedge clk);
    repeat (bdelay) begin
      @(negedge clk);
      check("bvalid held", 32'(s_axi_bvalid), 32'd1);
    end
    check("bresp", 32'(s_axi_bresp), 32'd0);
    s_axi_bready = 1;
    @(negedge clk);
    s_axi_bready = 0;
  endtask

  task automatic axi_read(logic [3:0] a, int rdelay, output logic [31:0] d);
    s_axi_arvalid = 1; s_axi_araddr = a;
    @(negedge clk);
    s_axi_arvalid = 0;
    while (!s_axi_rvalid) @(negedge clk);
    d = s_axi_rdata;
    repeat (rdelay) begin
      @(negedge clk);
      check("rvalid held", {31'd0, s_axi_rvalid}, 32'd1);
      check("rdata held", s_axi_rdata, d);
    end
    check("rresp", 32'(s_axi_rresp), 32'd0);
    s_axi_rready = 1;
    @(negedge clk);
    s_axi_rready = 0;
  endtask

  initial begin
    logic [31:0] d;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check("reset ctrl", {29'd0, ctrl_nco_sync, ctrl_src_sel, ctrl_nco_en}, 32'd0);
    check("reset ftw", ftw, 32'd0);
    axi_write(4'h4, 32'd34 << 22, 4'hF, 0, 0);
    check("ftw", ftw, 32'd34 << 22);
    axi_write(4'h0, 32'h1, 4'hF, 1, 3);
    check("nco_en", {31'd0, ctrl_nco_en}, 32'd1);
    check("src_sel", {31'd0, ctrl_src_sel}, 32'd0);
    axi_write(4'h4, 32'hAABB_CCDD, 4'b0101, 2, 1);
    check("ftw strobe", ftw, 32'h08BB_00DD);
    axi_write(4'h0, 32'h3, 4'h1, 0, 0);
    check("src_sel", {31'd0, ctrl_src_sel}, 32'd1);
    axi_write(4'h0, 32'h7, 4'h1, 2, 0);      // phase-reset pulse
    @(negedge clk);
    check("sync pulses", 32'(sync_pulses), 32'd1);
    axi_write(4'h8, 32'hFFFF_FFFF, 4'hF, 0, 0);  // read-only: ignored
    frame_count = 32'd12345;
    axi_read(4'h0, 0, d); check("read ctrl", d, 32'h3);
    axi_read(4'h4, 2, d); check("read ftw", d, 32'h08BB_00DD);
    axi_read(4'h8, 1, d); check("read frames", d, 32'd12345);
    axi_read(4'hC, 0, d); check("read id", d, 32'h5046_4231);
    axi_write(4'h4, 32'd288 << 22, 4'hF, 1, 0);
    axi_read(4'h4, 0, d); check("read ftw 288", d, 32'd288 << 22);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
