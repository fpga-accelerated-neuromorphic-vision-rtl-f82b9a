// grid_axil_ctrl: the AXI4-Lite control port (s_axi_control) of the grid
// clustering core, holding the grid_size register.
//
// grid_size, the number of pixels per grid cell along each axis, is the one
// run-time setting of the core; that it is a 16-bit value written over
// AXI-Lite is published. It resets to 16. The register map is this design's
// choice:
//
//   offset 0x10  grid_size  read/write, bits 15..0; bits 31..16 read 0
//   any other    reads 0, writes are ignored; every response is OKAY
//
// Write: the address (AW) and data (W) channels are taken independently,
// each into a holding register (awready/wready are high while it is empty).
// Once both are held the register is written, honouring WSTRB per byte, and
// a response is raised on B the clock after; both holding registers empty
// when the response is taken. Read: arready is high while no read data
// waits; an accepted address returns its data on R the clock after, held
// until rready. Reset (aresetn, active low, synchronous) sets grid_size
// to 16 and clears every pending transfer.
module grid_axil_ctrl
  import grid_pkg::*;
#(
  parameter int unsigned           ADDR_W     = AXIL_ADDR_W,
  parameter logic [COORD_W-1:0]    RESET_SIZE = GRID_SIZE_RESET
) (
  input  logic              aclk,
  input  logic              aresetn,
  // Write address channel
  input  logic [ADDR_W-1:0] awaddr,
  input  logic              awvalid,
  output logic              awready,
  // Write data channel
  input  logic [31:0]       wdata,
  input  logic [3:0]        wstrb,
  input  logic              wvalid,
  output logic              wready,
  // Write response channel
  output logic [1:0]        bresp,
  output logic              bvalid,
  input  logic              bready,
  // Read address channel
  input  logic [ADDR_W-1:0] araddr,
  input  logic              arvalid,
  output logic              arready,
  // Read data channel
  output logic [31:0]       rdata,
  output logic [1:0]        rresp,
  output logic              rvalid,
  input  logic              rready,
  // Register value to the datapath
  output logic [COORD_W-1:0] grid_size
);

  logic              aw_full, w_full;
  logic [ADDR_W-1:0] aw_addr_q;
  logic [31:0]       w_data_q;
  logic [3:0]        w_strb_q;
  logic              do_write;

  assign awready  = !aw_full;
  assign wready   = !w_full;
  assign do_write = aw_full && w_full && !bvalid;
  assign bresp    = RESP_OKAY;
  assign rresp    = RESP_OKAY;
  assign arready  = !rvalid;

  always_ff @(posedge aclk) begin
    if (!aresetn) begin
      aw_full   <= 1'b0;
      w_full    <= 1'b0;
      aw_addr_q <= '0;
      w_data_q  <= '0;
      w_strb_q  <= '0;
      bvalid    <= 1'b0;
      grid_size <= RESET_SIZE;
    end else begin
      if (awvalid && awready) begin
        aw_full   <= 1'b1;
        aw_addr_q <= awaddr;
      end
      if (wvalid && wready) begin
        w_full   <= 1'b1;
        w_data_q <= wdata;
        w_strb_q <= wstrb;
      end
      if (do_write) begin
        bvalid <= 1'b1;
        if (aw_addr_q == REG_GRID_SIZE[ADDR_W-1:0]) begin
          if (w_strb_q[0]) grid_size[7:0]  <= w_data_q[7:0];
          if (w_strb_q[1]) grid_size[15:8] <= w_data_q[15:8];
        end
      end
      if (bvalid && bready) begin
        bvalid  <= 1'b0;
        aw_full <= 1'b0;
        w_full  <= 1'b0;
      end
    end
  end

  always_ff @(posedge aclk) begin
    if (!aresetn) begin
      rvalid <= 1'b0;
      rdata  <= '0;
    end else begin
      if (arvalid && arready) begin
        rvalid <= 1'b1;
        rdata  <= (araddr == REG_GRID_SIZE[ADDR_W-1:0]) ? {16'h0, grid_size} : 32'h0;
      end else if (rvalid && rready) begin
        rvalid <= 1'b0;
      end
    end
  end

  // AXI rule: a response, once raised, is held until it is taken.
  a_b_hold: assert property (@(posedge aclk) disable iff (!aresetn)
    bvalid && !bready |=> bvalid)
    else $error("write response dropped before bready");
  a_r_hold: assert property (@(posedge aclk) disable iff (!aresetn)
    rvalid && !rready |=> rvalid && $stable(rdata))
    else $error("read data changed or dropped before rready");

endmodule
