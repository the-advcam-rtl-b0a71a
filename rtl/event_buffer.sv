// event_buffer: circular sample buffer of one module.
//
// Holds the last DEPTH samples of all 49 pixels, 6 us at 1 GS/s by default,
// so that the data of an event are still present when the central trigger's
// decision comes back. One frame (one sample of every pixel) is written every
// clock at wr_addr, which wraps from DEPTH-1 to 0; the write address is also
// an output so that the readout can locate past samples. The read port is
// synchronous: rd_data shows the frame at rd_addr one clock after rd_en. A read
// of the address written in the same clock returns the old frame.
//
// The depth follows the described design; a plain memory array with one write
// and one read port, written unconditionally, is this design's choice.
module event_buffer
  import advcam_pkg::*;
#(
  parameter int unsigned DEPTH = BUF_DEPTH,
  parameter int unsigned W     = $bits(frame_t),
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic           clk,
  input  logic           rst,
  input  logic [W-1:0]   wr_data,
  output logic [AW-1:0]  wr_addr,
  input  logic           rd_en,
  input  logic [AW-1:0]  rd_addr,
  output logic [W-1:0]   rd_data
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (rst) wr_addr <= '0;
    else if (wr_addr == AW'(DEPTH - 1)) wr_addr <= '0;
    else wr_addr <= wr_addr + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
