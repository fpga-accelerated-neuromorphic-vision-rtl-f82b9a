// grid_quant_pipe: the three-stage streaming datapath of the grid clustering
// core, from the input AXI4-Stream to the output AXI4-Stream.
//
//   Stage 1, Unpack : x = in_tdata[15:0], y = in_tdata[31:16]  -> register R1
//   Stage 2, Divide : cell_x = x / grid_size, cell_y = y / grid_size
//                     (grid_divider)                          -> register R2
//   Stage 3, Repack : out_tdata = {cell_y, cell_x}, cell_x in bits 15..0
//
// The stage names, the two pipeline registers R1 and R2 between them, the
// bit layout of both words and the rate of one event per clock (initiation
// interval 1) follow the published core. How the pipeline reacts to a
// stalled output is this design's choice, as is the TLAST side band:
//
// * Every register holds a valid flag. A register loads when it is empty or
//   when the register after it is being emptied in the same clock, so the
//   input is ready (in_tready) whenever some register ahead can move. The
//   ready path is combinational from out_tready back to in_tready; there is
//   no skid buffer. With out_tready held high one event is accepted every
//   clock and each appears on the output two clocks after it was accepted.
// * in_tlast travels with its event and comes out as out_tlast, so that a
//   DMA engine writing the results knows where a batch ends.
// * grid_size is read by the Divide stage while an event sits in R1, as the
//   control arrow into the Divide stage shows; it should be changed only while
//   the pipeline is empty.
//
// Reset (aresetn, active low, synchronous) empties both registers.
module grid_quant_pipe #(
  parameter int unsigned COORD_W = grid_pkg::COORD_W
) (
  input  logic                   aclk,
  input  logic                   aresetn,
  input  logic [COORD_W-1:0]     grid_size,
  // Input stream: events, y in the upper half, x in the lower half.
  input  logic [2*COORD_W-1:0]   in_tdata,
  input  logic                   in_tvalid,
  output logic                   in_tready,
  input  logic                   in_tlast,
  // Output stream: cells, cell_y in the upper half, cell_x in the lower half.
  output logic [2*COORD_W-1:0]   out_tdata,
  output logic                   out_tvalid,
  input  logic                   out_tready,
  output logic                   out_tlast
);

  typedef logic [COORD_W-1:0] coord_t;

  typedef struct packed {
    logic   valid;
    logic   last;
    coord_t a;  // x in R1, cell_x in R2
    coord_t b;  // y in R1, cell_y in R2
  } stage_t;

  stage_t r1, r2;
  logic   r1_load, r2_load;
  coord_t div_x, div_y;

  // A register may load when it is empty or is emptied in this clock.
  assign r2_load   = !r2.valid || out_tready;
  assign r1_load   = !r1.valid || r2_load;
  assign in_tready = r1_load;

  // Stage 2: the division, between R1 and R2.
  grid_divider #(.COORD_W(COORD_W)) u_divide (
    .x        (r1.a),
    .y        (r1.b),
    .grid_size(grid_size),
    .cell_x   (div_x),
    .cell_y   (div_y)
  );

  always_ff @(posedge aclk) begin
    if (!aresetn) begin
      r1 <= '0;
      r2 <= '0;
    end else begin
      // Stage 1: unpack the input word into R1.
      if (r1_load) begin
        r1.valid <= in_tvalid;
        r1.last  <= in_tlast;
        r1.a     <= in_tdata[COORD_W-1:0];
        r1.b     <= in_tdata[2*COORD_W-1:COORD_W];
      end
      // Stage 2 result into R2.
      if (r2_load) begin
        r2.valid <= r1.valid;
        r2.last  <= r1.last;
        r2.a     <= div_x;
        r2.b     <= div_y;
      end
    end
  end

  // Stage 3: repack R2 onto the output stream.
  assign out_tdata  = {r2.b, r2.a};
  assign out_tvalid = r2.valid;
  assign out_tlast  = r2.last;

  // AXI4-Stream rule on the output: once valid, a word stays valid and
  // unchanged until it is taken.
  property p_out_hold;
    @(posedge aclk) disable iff (!aresetn)
      out_tvalid && !out_tready |=> out_tvalid && $stable(out_tdata) && $stable(out_tlast);
  endproperty
  a_out_hold: assert property (p_out_hold)
    else $error("out_stream word changed or dropped before it was taken");

endmodule
