// data_sram: frame store of one camera.
//
// The chip gives every camera its own data SRAM, so a camera's DMA can write
// a frame while cores read other cameras' frames. This model is a simple
// two-port memory: port A is the write port of the camera DMA, port B is the
// read port seen through the SoC interconnect. A read returns its word one
// cycle after the address is presented (rd_en high). Reads and writes to
// the same address in the same cycle return the old word.
//
// The depth defaults to one 640 x 480 frame with 3 channels of 8-bit pixels,
// stored channel-planar (addr = (c*H + y)*W + x). The frame size is the one
// the paper quotes for its images; the channel count and pixel width are
// this design's choice. The paper's chip uses compiler-generated SRAM macros;
// here the memory is a plain array that synthesis maps to memory cells.
module data_sram #(
  parameter int unsigned DEPTH  = 640 * 480 * 3,
  parameter int unsigned DATA_W = 8,
  parameter int unsigned ADDR_W = 20
) (
  input  logic              clk,
  // write port (camera DMA)
  input  logic              wr_en,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [DATA_W-1:0] wr_data,
  // read port (interconnect)
  input  logic              rd_en,
  input  logic [ADDR_W-1:0] rd_addr,
  output logic [DATA_W-1:0] rd_data
);

  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && (wr_addr < ADDR_W'(DEPTH))) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= (rd_addr < ADDR_W'(DEPTH)) ? mem[rd_addr] : '0;
  end

endmodule
