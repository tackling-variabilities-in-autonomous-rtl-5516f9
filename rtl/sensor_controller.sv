// sensor_controller: turns camera frame signals into DMA launches and a queue
// of camera IDs for the control CPU.
//
// Each camera has its own frame-request line; the line's index is the
// camera ID. When camera i raises frame_req[i] and its DMA is idle, the
// controller pulses dma_start[i] in the next cycle. A request that arrives
// while that camera's DMA is still busy is refused and reported with a
// one-cycle drop[i] pulse (the previous frame is not cut short).
// When dma_done[i] pulses, the frame is complete in camera i's data SRAM and
// the camera ID becomes pending. Pending IDs enter a FIFO, one per cycle,
// picked round-robin so that no camera can starve another; the CPU pops the
// FIFO through the interconnect with a valid/ready handshake (cid_valid,
// cid, cid_ready). A pending ID waits while the FIFO is full.
//
// From the paper: cameras signal the controller with their ID, the
// controller launches the DMA into the camera's own data SRAM, and the CPU
// reads the camera ID of the current task from the controller. Announcing
// the ID only once the frame is complete, the refusal of overlapping frames,
// the round-robin order and the FIFO depth are this design's choices.
module sensor_controller #(
  parameter int unsigned NUM_CAM    = 30,
  parameter int unsigned CAM_W      = 5,
  parameter int unsigned FIFO_DEPTH = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  // cameras
  input  logic [NUM_CAM-1:0] frame_req,
  output logic [NUM_CAM-1:0] drop,
  // per-camera DMAs
  output logic [NUM_CAM-1:0] dma_start,
  input  logic [NUM_CAM-1:0] dma_busy,
  input  logic [NUM_CAM-1:0] dma_done,
  // camera-ID queue towards the CPU
  output logic               cid_valid,
  output logic [CAM_W-1:0]   cid,
  input  logic               cid_ready
);

  localparam int unsigned PTR_W = $clog2(FIFO_DEPTH);

  logic [NUM_CAM-1:0] pending;
  logic [CAM_W-1:0]   rr_ptr;
  logic               pick_valid;
  logic [CAM_W-1:0]   pick;

  // FIFO of camera IDs
  logic [CAM_W-1:0] fifo [FIFO_DEPTH];
  logic [PTR_W-1:0] wr_ptr, rd_ptr;
  logic [PTR_W:0]   count;
  logic             push, pop;

  // Round-robin pick among pending cameras, starting at rr_ptr.
  always_comb begin
    pick_valid = 1'b0;
    pick       = '0;
    for (int k = 0; k < int'(NUM_CAM); k++) begin
      int idx;
      idx = int'(rr_ptr) + k;
      if (idx >= int'(NUM_CAM)) idx = idx - int'(NUM_CAM);
      if (!pick_valid && pending[idx]) begin
        pick_valid = 1'b1;
        pick       = CAM_W'(idx);
      end
    end
  end

  assign push      = pick_valid && (count < (PTR_W+1)'(FIFO_DEPTH));
  assign pop       = cid_valid && cid_ready;
  assign cid_valid = (count != '0);
  assign cid       = fifo[rd_ptr];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dma_start <= '0;
      drop      <= '0;
      pending   <= '0;
      rr_ptr    <= '0;
      wr_ptr    <= '0;
      rd_ptr    <= '0;
      count     <= '0;
    end else begin
      dma_start <= frame_req & ~dma_busy & ~dma_start;
      drop      <= frame_req & (dma_busy | dma_start);
      begin
        logic [NUM_CAM-1:0] p;
        p = pending | dma_done;
        if (push) p[pick] = 1'b0;
        pending <= p;
      end
      if (push) begin
        fifo[wr_ptr] <= pick;
        wr_ptr       <= (wr_ptr == PTR_W'(FIFO_DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
        rr_ptr       <= (pick == CAM_W'(NUM_CAM - 1)) ? '0 : pick + 1'b1;
      end
      if (pop) rd_ptr <= (rd_ptr == PTR_W'(FIFO_DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (PTR_W+1)'(push) - (PTR_W+1)'(pop);
    end
  end

  // The CPU must not see a changing ID while it is being offered.
  property p_cid_stable;
    @(posedge clk) disable iff (!rst_n) (cid_valid && !cid_ready) |=> (cid_valid && $stable(cid));
  endproperty
  a_cid_stable: assert property (p_cid_stable);

endmodule
