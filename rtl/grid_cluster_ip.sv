// grid_cluster_ip: the grid clustering core of the event-camera detection
// system, the part of the design that runs in programmable logic.
//
// A host streams event coordinates into in_stream, one event per 32-bit
// word (x in bits 15..0, y in bits 31..16), and reads back from out_stream
// one word per event holding the event's grid cell (cell_x = x / grid_size
// in bits 15..0, cell_y = y / grid_size in bits 31..16), in the same order.
// grid_size is a 16-bit register behind the AXI4-Lite port s_axi_control
// (offset 0x10, reset value 16). The core keeps no state across events: the
// counting of events per cell, the event threshold and the centroids are
// left to the host.
//
// Inside, grid_axil_ctrl holds the register and grid_quant_pipe is the
// three-stage Unpack / Divide / Repack pipeline. The pipeline accepts one
// event per clock and delivers each result two clocks after it was
// accepted while out_stream_tready is high; a low out_stream_tready stalls
// the whole pipeline and, through it, in_stream_tready. TLAST is carried
// from input to output with its event.
//
// In the system this core sits between an AXI DMA engine, which feeds
// in_stream from memory and writes out_stream back to memory, and an AXI
// interconnect that brings the processor's control bus to s_axi_control.
// Both are vendor blocks and are not part of this RTL; their signals are
// this module's ports. One clock (aclk) and one active-low synchronous
// reset (aresetn) serve both ports.
module grid_cluster_ip
  import grid_pkg::*;
(
  input  logic                   aclk,
  input  logic                   aresetn,

  // s_axi_control: AXI4-Lite configuration port
  input  logic [AXIL_ADDR_W-1:0] s_axi_control_awaddr,
  input  logic                   s_axi_control_awvalid,
  output logic                   s_axi_control_awready,
  input  logic [31:0]            s_axi_control_wdata,
  input  logic [3:0]             s_axi_control_wstrb,
  input  logic                   s_axi_control_wvalid,
  output logic                   s_axi_control_wready,
  output logic [1:0]             s_axi_control_bresp,
  output logic                   s_axi_control_bvalid,
  input  logic                   s_axi_control_bready,
  input  logic [AXIL_ADDR_W-1:0] s_axi_control_araddr,
  input  logic                   s_axi_control_arvalid,
  output logic                   s_axi_control_arready,
  output logic [31:0]            s_axi_control_rdata,
  output logic [1:0]             s_axi_control_rresp,
  output logic                   s_axi_control_rvalid,
  input  logic                   s_axi_control_rready,

  // in_stream: event coordinates, from the DMA's memory-to-stream channel
  input  event_word_t            in_stream_tdata,
  input  logic                   in_stream_tvalid,
  output logic                   in_stream_tready,
  input  logic                   in_stream_tlast,

  // out_stream: grid cells, to the DMA's stream-to-memory channel (S_AXIS_S2MM)
  output cell_word_t             out_stream_tdata,
  output logic                   out_stream_tvalid,
  input  logic                   out_stream_tready,
  output logic                   out_stream_tlast
);

  logic [COORD_W-1:0] grid_size;

  grid_axil_ctrl u_ctrl (
    .aclk     (aclk),
    .aresetn  (aresetn),
    .awaddr   (s_axi_control_awaddr),
    .awvalid  (s_axi_control_awvalid),
    .awready  (s_axi_control_awready),
    .wdata    (s_axi_control_wdata),
    .wstrb    (s_axi_control_wstrb),
    .wvalid   (s_axi_control_wvalid),
    .wready   (s_axi_control_wready),
    .bresp    (s_axi_control_bresp),
    .bvalid   (s_axi_control_bvalid),
    .bready   (s_axi_control_bready),
    .araddr   (s_axi_control_araddr),
    .arvalid  (s_axi_control_arvalid),
    .arready  (s_axi_control_arready),
    .rdata    (s_axi_control_rdata),
    .rresp    (s_axi_control_rresp),
    .rvalid   (s_axi_control_rvalid),
    .rready   (s_axi_control_rready),
    .grid_size(grid_size)
  );

  grid_quant_pipe u_pipe (
    .aclk      (aclk),
    .aresetn   (aresetn),
    .grid_size (grid_size),
    .in_tdata  (in_stream_tdata),
    .in_tvalid (in_stream_tvalid),
    .in_tready (in_stream_tready),
    .in_tlast  (in_stream_tlast),
    .out_tdata (out_stream_tdata),
    .out_tvalid(out_stream_tvalid),
    .out_tready(out_stream_tready),
    .out_tlast (out_stream_tlast)
  );

endmodule
