// camera_dma: point-to-point DMA from one camera into its own data SRAM.
//
// The sensor controller pulses `start` when the camera has signalled a new
// frame. The DMA then takes FRAME_WORDS pixels from the camera's pixel
// stream (pix_valid/pix_data, no back-pressure: a camera cannot wait) and
// writes them to consecutive data SRAM addresses from 0. Each accepted pixel
// is written in the same cycle. `done` pulses for one cycle in the cycle
// after the last pixel was accepted; `busy` is high from the cycle after
// `start` until then. Pixels that arrive while the DMA is idle are dropped.
//
// The paper says only that the controller launches a DMA transfer per
// camera and that it moves the frame point to point; the stream interface,
// the zero base address and the done pulse are this design's choice.
module camera_dma #(
  parameter int unsigned FRAME_WORDS = 640 * 480 * 3,
  parameter int unsigned DATA_W      = 8,
  parameter int unsigned ADDR_W      = 20
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  // camera pixel stream
  input  logic              pix_valid,
  input  logic [DATA_W-1:0] pix_data,
  // data SRAM write port
  output logic              wr_en,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [DATA_W-1:0] wr_data
);

  logic [ADDR_W-1:0] cnt;

  assign wr_en   = busy && pix_valid;
  assign wr_addr = cnt;
  assign wr_data = pix_data;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          cnt  <= '0;
        end
      end else if (pix_valid) begin
        if (cnt == ADDR_W'(FRAME_WORDS - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          cnt  <= '0;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

endmodule
