// hmai_pkg: types and constants shared by the heterogeneous multicore AI
// accelerator (HMAI).
//
// The chip holds one data SRAM per camera and three kinds of CNN cores
// (SconvOD, SconvIC, MconvMC). Everything a core needs to start work is a
// task descriptor that the control CPU writes into the core's instruction
// SRAM. A task is one convolution layer (C input channels, M filters of
// F x F, stride 1, no padding) over the frame held in one camera's data SRAM.
//
// Counts that come from the paper: 30 cameras (11 forward, 4+4+4+4 side,
// 3 rear), 4 SconvOD + 4 SconvIC + 3 MconvMC cores, 640 x 480 frames.
// Widths, the descriptor layout and the layer shape are this design's own.
package hmai_pkg;

  // Pixel and arithmetic widths (own choice: 8-bit camera pixels,
  // 16-bit signed weights, 32-bit accumulators).
  localparam int unsigned PIX_W = 8;
  localparam int unsigned WGT_W = 16;
  localparam int unsigned ACC_W = 32;

  // Address width into one data SRAM (a 640 x 480 x 3 frame needs 20 bits).
  localparam int unsigned ADDR_W = 20;
  // Camera index width (30 cameras need 5 bits).
  localparam int unsigned CAM_W = 5;
  // Coordinate width of an output neuron (covers 640).
  localparam int unsigned COORD_W = 10;
  // Filter and channel index widths.
  localparam int unsigned MIDX_W = 4;
  localparam int unsigned CIDX_W = 4;
  // Weight-store address width inside a core.
  localparam int unsigned WADDR_W = 10;

  // CNN model a task belongs to (Sec. 2: YOLO and SSD for detection,
  // GOTURN for tracking). The cores do not behave differently per model;
  // the tag travels with the task for the scheduler's bookkeeping.
  typedef enum logic [1:0] {
    TASK_YOLO   = 2'd0,
    TASK_SSD    = 2'd1,
    TASK_GOTURN = 2'd2
  } task_kind_e;

  // Task descriptor held in an instruction SRAM.
  typedef struct packed {
    logic [7:0]       tag;   // scheduler's task number, returned on completion
    task_kind_e       kind;  // CNN model of the task
    logic [CAM_W-1:0] cam;   // camera whose data SRAM holds the frame
  } task_desc_t;

  // Read request from a core to the data SRAMs through the interconnect.
  typedef struct packed {
    logic              valid;
    logic [CAM_W-1:0]  cam;
    logic [ADDR_W-1:0] addr;
  } rd_req_t;

  // Grant (same cycle as the request) and data (one cycle after the grant).
  typedef struct packed {
    logic             gnt;
    logic             rvalid;
    logic [PIX_W-1:0] rdata;
  } rd_rsp_t;

  // Filter-weight write from the external memory into a core's weight store.
  typedef struct packed {
    logic               we;
    logic [WADDR_W-1:0] addr;   // ((m*C + c)*F + ky)*F + kx
    logic [WGT_W-1:0]   data;
  } wt_wr_t;

  // One output neuron (or, for SconvOD, one per-channel partial sum).
  typedef struct packed {
    logic               valid;
    logic               partial; // 1: single-channel partial sum, to be summed over ch
    logic [MIDX_W-1:0]  m;       // filter
    logic [CIDX_W-1:0]  ch;      // input channel of a partial sum (0 otherwise)
    logic [COORD_W-1:0] y;
    logic [COORD_W-1:0] x;
    logic [ACC_W-1:0]   data;
  } ofmap_t;

endpackage
