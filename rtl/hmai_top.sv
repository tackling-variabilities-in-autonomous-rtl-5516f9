// hmai_top: the heterogeneous multicore AI accelerator (HMAI) for the
// perception tasks of an automated vehicle.
//
// Data and control flow:
//  1. A camera raises its frame-request line; the sensor controller launches
//     that camera's DMA.
//  2. The DMA writes the frame, point to point, into the camera's own data
//     SRAM (one SRAM per camera).
//  3. When the frame is complete, the sensor controller queues the camera ID;
//     the CPU reads it (cid_valid/cid/cid_ready).
//  4. The scheduler on the CPU picks a core for the task and sends a task
//     descriptor (camera, model, tag) through the interconnect into that
//     core's instruction SRAM (task_valid/task_core/task_in/task_ready).
//  5. The core takes the task, reads the frame from the camera's data SRAM
//     through the interconnect and streams its ofmap neurons out
//     (core_ofmap, towards the external memory). core_done pulses with the
//     task's tag; core_busy and core_qlevel give the scheduler the state of
//     every core.
// Filter weights are written into a core's weight store from the external
// memory (wt_core, wt_wr).
//
// The core mix is the paper's chosen configuration: 4 SconvOD, 4 SconvIC and
// 3 MconvMC, numbered 0-3, 4-7 and 8-10. 30 cameras as in the paper's camera
// set-up. The CPU, the scheduler software, the cameras and the external
// memory are outside this module; their signals are its ports.
module hmai_top
  import hmai_pkg::*;
#(
  parameter int unsigned NUM_CAM     = 30,
  parameter int unsigned N_OD        = 4,
  parameter int unsigned N_IC        = 4,
  parameter int unsigned N_MC        = 3,
  parameter int unsigned IMG_W       = 640,
  parameter int unsigned IMG_H       = 480,
  parameter int unsigned NUM_CH      = 3,
  parameter int unsigned NUM_FILT    = 4,
  parameter int unsigned KSIZE       = 3,
  parameter int unsigned IC_PR       = 8,
  parameter int unsigned IC_PC       = 8,
  parameter int unsigned ISRAM_DEPTH = 16,
  parameter int unsigned CID_DEPTH   = 32,
  localparam int unsigned NCORE      = N_OD + N_IC + N_MC,
  localparam int unsigned CORE_W     = $clog2(NCORE),
  localparam int unsigned LVL_W      = $clog2(ISRAM_DEPTH + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // cameras
  input  logic [NUM_CAM-1:0]     cam_frame_req,
  input  logic [NUM_CAM-1:0]     cam_pix_valid,
  input  logic [PIX_W-1:0]       cam_pix_data [NUM_CAM],
  output logic [NUM_CAM-1:0]     cam_drop,
  // CPU: camera IDs of finished frames
  output logic                   cid_valid,
  output logic [CAM_W-1:0]       cid,
  input  logic                   cid_ready,
  // CPU: scheduling decisions
  input  logic                   task_valid,
  input  logic [CORE_W-1:0]      task_core,
  input  task_desc_t             task_in,
  output logic                   task_ready,
  // CPU: core state
  output logic [NCORE-1:0]       core_busy,
  output logic [NCORE-1:0]       core_done,
  output logic [7:0]             core_done_tag [NCORE],
  output logic [LVL_W-1:0]       core_qlevel   [NCORE],
  // external memory: filter weights in, ofmaps out
  input  logic [CORE_W-1:0]      wt_core,
  input  wt_wr_t                 wt_wr,
  output ofmap_t                 core_ofmap [NCORE]
);

  localparam int unsigned FRAME_WORDS = IMG_W * IMG_H * NUM_CH;

  // ---------------------------------------------------------------- sensing
  logic [NUM_CAM-1:0] dma_start, dma_busy, dma_done;
  logic               dma_we   [NUM_CAM];
  logic [ADDR_W-1:0]  dma_addr [NUM_CAM];
  logic [PIX_W-1:0]   dma_data [NUM_CAM];
  logic               sram_rd_en   [NUM_CAM];
  logic [ADDR_W-1:0]  sram_rd_addr [NUM_CAM];
  logic [PIX_W-1:0]   sram_rd_data [NUM_CAM];

  sensor_controller #(
    .NUM_CAM(NUM_CAM), .CAM_W(CAM_W), .FIFO_DEPTH(CID_DEPTH)
  ) u_sensor_ctrl (
    .clk, .rst_n,
    .frame_req (cam_frame_req),
    .drop      (cam_drop),
    .dma_start (dma_start),
    .dma_busy  (dma_busy),
    .dma_done  (dma_done),
    .cid_valid (cid_valid),
    .cid       (cid),
    .cid_ready (cid_ready)
  );

  for (genvar i = 0; i < NUM_CAM; i++) begin : g_cam
    camera_dma #(
      .FRAME_WORDS(FRAME_WORDS), .DATA_W(PIX_W), .ADDR_W(ADDR_W)
    ) u_dma (
      .clk, .rst_n,
      .start     (dma_start[i]),
      .busy      (dma_busy[i]),
      .done      (dma_done[i]),
      .pix_valid (cam_pix_valid[i]),
      .pix_data  (cam_pix_data[i]),
      .wr_en     (dma_we[i]),
      .wr_addr   (dma_addr[i]),
      .wr_data   (dma_data[i])
    );

    data_sram #(
      .DEPTH(FRAME_WORDS), .DATA_W(PIX_W), .ADDR_W(ADDR_W)
    ) u_sram (
      .clk,
      .wr_en   (dma_we[i]),
      .wr_addr (dma_addr[i]),
      .wr_data (dma_data[i]),
      .rd_en   (sram_rd_en[i]),
      .rd_addr (sram_rd_addr[i]),
      .rd_data (sram_rd_data[i])
    );
  end

  // ---------------------------------------------------------------- interconnect
  rd_req_t             core_req [NCORE];
  rd_rsp_t             core_rsp [NCORE];
  logic [NCORE-1:0]    isram_wr_valid, isram_wr_ready;
  task_desc_t          isram_wr_data;

  soc_interconnect #(
    .NUM_CORE(NCORE), .NUM_CAM(NUM_CAM)
  ) u_noc (
    .clk, .rst_n,
    .core_req, .core_rsp,
    .sram_rd_en, .sram_rd_addr, .sram_rd_data,
    .task_valid, .task_core, .task_in, .task_ready,
    .isram_wr_valid, .isram_wr_ready, .isram_wr_data
  );

  // ---------------------------------------------------------------- cores
  logic [NCORE-1:0] core_task_valid, core_task_ready;
  task_desc_t       core_task [NCORE];
  wt_wr_t           core_wt   [NCORE];

  for (genvar k = 0; k < NCORE; k++) begin : g_core
    logic [$bits(task_desc_t)-1:0] q_data;

    instr_sram #(
      .DEPTH(ISRAM_DEPTH), .DATA_W($bits(task_desc_t))
    ) u_isram (
      .clk, .rst_n,
      .wr_valid (isram_wr_valid[k]),
      .wr_ready (isram_wr_ready[k]),
      .wr_data  (isram_wr_data),
      .rd_valid (core_task_valid[k]),
      .rd_ready (core_task_ready[k]),
      .rd_data  (q_data),
      .level    (core_qlevel[k])
    );
    assign core_task[k] = task_desc_t'(q_data);

    always_comb begin
      core_wt[k]    = wt_wr;
      core_wt[k].we = wt_wr.we && (wt_core == CORE_W'(k));
    end

    if (k < N_OD) begin : g_od
      sconv_od #(
        .IMG_W(IMG_W), .IMG_H(IMG_H), .NUM_CH(NUM_CH), .NUM_FILT(NUM_FILT), .KSIZE(KSIZE)
      ) u_core (
        .clk, .rst_n,
        .task_valid (core_task_valid[k]),
        .task_ready (core_task_ready[k]),
        .task_in    (core_task[k]),
        .wt_wr      (core_wt[k]),
        .rd_req     (core_req[k]),
        .rd_rsp     (core_rsp[k]),
        .ofmap      (core_ofmap[k]),
        .busy       (core_busy[k]),
        .done       (core_done[k]),
        .done_tag   (core_done_tag[k])
      );
    end else if (k < N_OD + N_IC) begin : g_ic
      sconv_ic #(
        .IMG_W(IMG_W), .IMG_H(IMG_H), .NUM_CH(NUM_CH), .NUM_FILT(NUM_FILT), .KSIZE(KSIZE),
        .PR(IC_PR), .PC(IC_PC)
      ) u_core (
        .clk, .rst_n,
        .task_valid (core_task_valid[k]),
        .task_ready (core_task_ready[k]),
        .task_in    (core_task[k]),
        .wt_wr      (core_wt[k]),
        .rd_req     (core_req[k]),
        .rd_rsp     (core_rsp[k]),
        .ofmap      (core_ofmap[k]),
        .busy       (core_busy[k]),
        .done       (core_done[k]),
        .done_tag   (core_done_tag[k])
      );
    end else begin : g_mc
      mconv_mc #(
        .IMG_W(IMG_W), .IMG_H(IMG_H), .NUM_CH(NUM_CH), .NUM_FILT(NUM_FILT), .KSIZE(KSIZE)
      ) u_core (
        .clk, .rst_n,
        .task_valid (core_task_valid[k]),
        .task_ready (core_task_ready[k]),
        .task_in    (core_task[k]),
        .wt_wr      (core_wt[k]),
        .rd_req     (core_req[k]),
        .rd_rsp     (core_rsp[k]),
        .ofmap      (core_ofmap[k]),
        .busy       (core_busy[k]),
        .done       (core_done[k]),
        .done_tag   (core_done_tag[k])
      );
    end
  end

endmodule
