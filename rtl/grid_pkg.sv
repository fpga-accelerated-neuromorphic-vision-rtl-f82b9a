// grid_pkg: types and constants shared by the grid clustering IP core.
//
// An event travels through the core as one 32-bit AXI4-Stream word. On the
// input side the word holds the pixel coordinates of an event, x in bits
// 15..0 and y in bits 31..16; on the output side it holds the grid cell of
// that event, cell_x in bits 15..0 and cell_y in bits 31..16. Both layouts
// are the published ones. The reset value of grid_size (16) follows the
// published fixed grid size of 16. The AXI-Lite register offset (0x10) is
// this design's choice: it is where a high-level-synthesis tool usually puts
// the first scalar argument of a core, after its four control registers.
package grid_pkg;

  // Width of one coordinate and of one cell index.
  localparam int unsigned COORD_W = 16;

  // AXI-Lite control port of the core.
  localparam int unsigned AXIL_ADDR_W = 6;
  localparam logic [AXIL_ADDR_W-1:0] REG_GRID_SIZE = 6'h10;

  // Value of grid_size after reset: pixels per cell along each axis.
  localparam logic [COORD_W-1:0] GRID_SIZE_RESET = 16'd16;

  typedef logic [COORD_W-1:0] coord_t;

  // Input word: an event's pixel coordinates.
  typedef struct packed {
    coord_t y;  // bits 31..16
    coord_t x;  // bits 15..0
  } event_word_t;

  // Output word: the event's grid cell.
  typedef struct packed {
    coord_t cell_y;  // bits 31..16
    coord_t cell_x;  // bits 15..0
  } cell_word_t;

  // AXI response codes.
  typedef enum logic [1:0] {
    RESP_OKAY   = 2'b00,
    RESP_EXOKAY = 2'b01,
    RESP_SLVERR = 2'b10,
    RESP_DECERR = 2'b11
  } axi_resp_e;

endpackage
