// tb_grid_axil_ctrl: self-checking test of the AXI4-Lite grid_size register.
//
// Acts as an AXI4-Lite master half a clock away from the rising edge. Write
// transfers present the address and the data in either order and with
// random delays between them, and hold bready low for a random time; reads
// hold rready low for a random time. A model of the register (16 bits at
// offset 0x10, reset value 16, byte strobes honoured, every other offset
// reading 0 and ignoring writes) gives the expected read data and the
// expected grid_size output, which is compared after every transfer. Also
// checks that held responses stay valid and that every response is OKAY.
module tb_grid_axil_ctrl;
  localparam int unsigned AW = 6;

  logic          clk = 1'b0, rstn = 1'b0;
  logic [AW-1:0] awaddr, araddr;
  logic          awvalid, awready, wvalid, wready, bvalid, bready;
  logic          arvalid, arready, rvalid, rready;
  logic [31:0]   wdata, rdata;
  logic [3:0]    wstrb;
  logic [1:0]    bresp, rresp;
  logic [15:0]   grid_size;

  int checks = 0, failures = 0;
  logic [15:0] model = 16'd16;

  grid_axil_ctrl dut (
    .aclk(clk), .aresetn(rstn),
    .awaddr(awaddr), .awvalid(awvalid), .awready(awready),
    .wdata(wdata), .wstrb(wstrb), .wvalid(wvalid), .wready(wready),
    .bresp(bresp), .bvalid(bvalid), .bready(bready),
    .araddr(araddr), .arvalid(arvalid), .arready(arready),
    .rdata(rdata), .rresp(rresp), .rvalid(rvalid), .rready(rready),
    .grid_size(grid_size)
  );

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_eq(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got 0x%08h expected 0x%08h", what, got, exp);
    end
  endtask

  task automatic send_aw(logic [AW-1:0] a, int delay);
    repeat (delay) @(negedge clk);
    awaddr = a; awvalid = 1'b1;
    #1;
    while (!awready) begin @(negedge clk); #1; end
    @(negedge clk);
    awvalid = 1'b0;
  endtask

  task automatic send_w(logic [31:0] d, logic [3:0] s, int delay);
    repeat (delay) @(negedge clk);
    wdata = d; wstrb = s; wvalid = 1'b1;
    #1;
    while (!wready) begin @(negedge clk); #1; end
    @(negedge clk);
    wvalid = 1'b0;
  endtask

  task automatic axi_write(logic [AW-1:0] a, logic [31:0] d, logic [3:0] s);
    int hold;
    fork
      send_aw(a, $urandom_range(0, 3));
      send_w(d, s, $urandom_range(0, 3));
    join
    // Wait for the response, keeping bready low for a while.
    hold = $urandom_range(0, 3);
    bready = 1'b0;
    #1;
    while (!bvalid) begin @(negedge clk); #1; end
    repeat (hold) begin
      @(negedge clk); #1;
      check_eq("bvalid held", 32'(bvalid), 32'd1);
    end
    bready = 1'b1;
    check_eq("bresp", 32'(bresp), 32'd0);
    @(negedge clk);
    bready = 1'b0;
    if (a == 6'h10) begin
      if (s[0]) model[7:0]  = d[7:0];
      if (s[1]) model[15:8] = d[15:8];
    end
    @(negedge clk);
    check_eq("grid_size output", 32'(grid_size), 32'(model));
  endtask

  task automatic axi_read(logic [AW-1:0] a, output logic [31:0] d);
    int hold;
    araddr = a; arvalid = 1'b1;
    #1;
    while (!arready) begin @(negedge clk); #1; end
    @(negedge clk);
    arvalid = 1'b0;
    #1;
    while (!rvalid) begin @(negedge clk); #1; end
    d = rdata;
    hold = $urandom_range(0, 3);
    repeat (hold) begin
      @(negedge clk); #1;
      check_eq("rvalid held", 32'(rvalid), 32'd1);
      check_eq("rdata held", rdata, d);
    end
    rready = 1'b1;
    check_eq("rresp", 32'(rresp), 32'd0);
    @(negedge clk);
    rready = 1'b0;
  endtask

  task automatic read_check(logic [AW-1:0] a);
    logic [31:0] d;
    axi_read(a, d);
    check_eq($sformatf("read 0x%02h", a), d, (a == 6'h10) ? {16'h0, model} : 32'h0);
  endtask

  initial begin
    logic [31:0] d;
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    awaddr = 0; araddr = 0; wdata = 0; wstrb = 0;
    repeat (3) @(negedge clk);
    rstn = 1'b1;
    @(negedge clk);

    check_eq("reset grid_size", 32'(grid_size), 32'd16);
    read_check(6'h10);
    read_check(6'h00);
    axi_write(6'h10, 32'h0000_0020, 4'hF);      // 32 pixels per cell
    read_check(6'h10);
    axi_write(6'h10, 32'hDEAD_0107, 4'hF);      // upper half ignored
    read_check(6'h10);
    axi_write(6'h10, 32'h0000_AB55, 4'h1);      // low byte only
    read_check(6'h10);
    axi_write(6'h10, 32'h0000_12CC, 4'h2);      // high byte only
    read_check(6'h10);
    axi_write(6'h14, 32'h0000_0003, 4'hF);      // not mapped
    read_check(6'h10);
    read_check(6'h14);
    for (int k = 0; k < 200; k++) begin
      logic [AW-1:0] a;
      a = ($urandom_range(0, 3) == 0) ? AW'($urandom_range(0, 15) * 4) : 6'h10;
      if ($urandom_range(0, 1) == 0)
        axi_write(a, $urandom, 4'($urandom));
      else
        read_check(a);
    end
    // Reset brings back 16.
    rstn = 1'b0;
    @(negedge clk);
    rstn = 1'b1;
    model = 16'd16;
    @(negedge clk);
    check_eq("grid_size after second reset", 32'(grid_size), 32'd16);
    read_check(6'h10);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
