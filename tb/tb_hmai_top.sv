// tb_hmai_top: end-to-end testbench of hmai_top at reduced size.
//
// The testbench plays the parts outside the chip:
//  * camera models stream frames of random pixels when the testbench asks;
//  * a CPU model pops camera IDs of finished frames and sends tasks to
//    cores (a fixed rotation over the cores stands in for the scheduler);
//  * an external-memory model writes random filter weights into every core
//    and collects each core's ofmap stream, adding SconvOD's per-channel
//    partial sums.
// Each finished task is compared, neuron by neuron, with a convolution of
// the frame the camera sent, computed here. All six cameras send a frame at once, each frame becomes three tasks on cores of the three kinds, and a burst of tasks fills one instruction SRAM. The testbench counts how often each mechanism happened (refused mid-frame request, read contention at a data SRAM, queued tasks, full instruction SRAM, CPU late to read camera IDs, SconvOD partial sums, SconvIC tile load overlapping compute, DMAs in parallel) and fails if one never did. Small frames (13 x 9) and six cameras keep the run short; the core mix is the full 4 + 4 + 3.
module tb_hmai_top;
  import hmai_pkg::*;

  localparam int unsigned NUM_CAM  = 6;
  localparam int unsigned N_OD     = 4;
  localparam int unsigned N_IC     = 4;
  localparam int unsigned N_MC     = 3;
  localparam int unsigned NCORE    = N_OD + N_IC + N_MC;
  localparam int unsigned W        = 13;
  localparam int unsigned H        = 9;
  localparam int unsigned C        = 3;
  localparam int unsigned M        = 4;
  localparam int unsigned F        = 3;
  localparam int unsigned ISRAM    = 4;
  localparam int unsigned NPIX     = W * H;
  localparam int unsigned OW       = W - F + 1;
  localparam int unsigned OH       = H - F + 1;
  localparam int unsigned CORE_W   = $clog2(NCORE);
  localparam int unsigned LVL_W    = $clog2(ISRAM + 1);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NUM_CAM-1:0] cam_frame_req, cam_pix_valid, cam_drop;
  logic [PIX_W-1:0]   cam_pix_data [NUM_CAM];
  logic               cid_valid, cid_ready, task_valid, task_ready;
  logic [CAM_W-1:0]   cid;
  logic [CORE_W-1:0]  task_core, wt_core;
  task_desc_t         task_in;
  logic [NCORE-1:0]   core_busy, core_done;
  logic [7:0]         core_done_tag [NCORE];
  logic [LVL_W-1:0]   core_qlevel [NCORE];
  wt_wr_t             wt_wr;
  ofmap_t             core_ofmap [NCORE];

  hmai_top #(.NUM_CAM(NUM_CAM), .IMG_W(W), .IMG_H(H), .ISRAM_DEPTH(ISRAM)) dut (.*);

  int checks = 0;
  int failures = 0;

  // ---------------------------------------------------------------- models
  logic [7:0]         frame   [NUM_CAM][C * NPIX];
  logic signed [15:0] wgt     [NCORE][M * C * F * F];
  longint             got     [NCORE][M][OH][OW];
  int                 hits    [NCORE][M][OH][OW];
  int                 q_cam   [NCORE][$];
  int                 q_tag   [NCORE][$];
  int                 tasks_done [NCORE];

  // mechanism counters
  int n_drop = 0, n_contention = 0, n_queue2 = 0, n_isram_full = 0;
  int n_cid_stall = 0, n_partial = 0, n_ic_overlap = 0, n_dma_parallel = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      int busy_dma;
      for (int k = 0; k < int'(NCORE); k++) begin
        if (core_ofmap[k].valid) begin
          if (int'(core_ofmap[k].m) < int'(M) && int'(core_ofmap[k].y) < int'(OH)
              && int'(core_ofmap[k].x) < int'(OW)) begin
            got[k][core_ofmap[k].m][core_ofmap[k].y][core_ofmap[k].x] += longint'($signed(core_ofmap[k].data));
            hits[k][core_ofmap[k].m][core_ofmap[k].y][core_ofmap[k].x]++;
          end else begin
            failures++; $display("FAIL core %0d output out of range", k);
          end
          if (core_ofmap[k].partial) n_partial++;
        end
        if (dut.core_req[k].valid && !dut.core_rsp[k].gnt) n_contention++;
        if (int'(core_qlevel[k]) >= 2) n_queue2++;
        if (core_done[k]) check_task(k);
      end
      if (task_valid && !task_ready) n_isram_full++;
      if (cid_valid && !cid_ready) n_cid_stall++;
      n_drop += $countones(cam_drop);
      busy_dma = 0;
      for (int i = 0; i < int'(NUM_CAM); i++) busy_dma += int'(dut.dma_busy[i]);
      if (busy_dma > 1) n_dma_parallel++;
    end
  end

  // SconvIC double buffer: a tile loads while the previous one computes
  for (genvar k = N_OD; k < N_OD + N_IC; k++) begin : g_icmon
    always @(posedge clk)
      if (rst_n && dut.g_core[k].g_ic.u_core.ld_active && dut.g_core[k].g_ic.u_core.cp_active)
        n_ic_overlap++;
  end

  task automatic check_task(int k);
    int cam, tag, bad;
    if (q_cam[k].size() == 0) begin
      failures++; $display("FAIL core %0d done without a task", k); return;
    end
    cam = q_cam[k].pop_front();
    tag = q_tag[k].pop_front();
    checks++;
    if (int'(core_done_tag[k]) != tag) begin failures++; $display("FAIL core %0d tag", k); end
    bad = 0;
    for (int m = 0; m < int'(M); m++)
      for (int y = 0; y < int'(OH); y++)
        for (int x = 0; x < int'(OW); x++) begin
          longint s = 0;
          int want_hits = (k < int'(N_OD)) ? int'(C) : 1;
          for (int c = 0; c < int'(C); c++)
            for (int ky = 0; ky < int'(F); ky++)
              for (int kx = 0; kx < int'(F); kx++)
                s += longint'(wgt[k][((m * C + c) * F + ky) * F + kx])
                   * longint'(frame[cam][c * NPIX + (y + ky) * W + x + kx]);
          checks++;
          if (got[k][m][y][x] != s || hits[k][m][y][x] != want_hits) begin
            bad++;
            if (bad < 4) $display("FAIL core %0d task %0d m%0d y%0d x%0d got %0d/%0d want %0d",
                                  k, tag, m, y, x, got[k][m][y][x], hits[k][m][y][x], s);
          end
          got[k][m][y][x]  = 0;
          hits[k][m][y][x] = 0;
        end
    failures += bad;
    tasks_done[k]++;
  endtask

  // camera models
  logic [NUM_CAM-1:0] want_frame;
  initial begin
    want_frame = '0;
    for (int i = 0; i < int'(NUM_CAM); i++) begin cam_pix_data[i] = '0; end
  end
  for (genvar i = 0; i < NUM_CAM; i++) begin : g_cm
    initial begin
      cam_frame_req[i] = 1'b0;
      cam_pix_valid[i] = 1'b0;
      forever begin
        @(negedge clk);
        if (want_frame[i]) begin
          want_frame[i] = 1'b0;
          for (int a = 0; a < int'(C * NPIX); a++) frame[i][a] = 8'($urandom);
          cam_frame_req[i] = 1'b1;
          @(negedge clk);
          cam_frame_req[i] = 1'b0;
          @(negedge clk);
          for (int a = 0; a < int'(C * NPIX); a++) begin
            while (($urandom % 8) == 0 && 1) begin
              cam_pix_valid[i] = 1'b0;
              @(negedge clk);
            end
            cam_pix_valid[i] = 1'b1;
            cam_pix_data[i]  = frame[i][a];
            // a second request in mid-frame must be refused
            cam_frame_req[i] = (a == 5) && 1;
            @(negedge clk);
          end
          cam_frame_req[i] = 1'b0;
          cam_pix_valid[i] = 1'b0;
        end
      end
    end
  end

  task automatic load_weights();
    for (int k = 0; k < int'(NCORE); k++)
      for (int a = 0; a < int'(M * C * F * F); a++) begin
        wgt[k][a] = 16'($signed($urandom_range(0, 200)) - 100);
        @(negedge clk);
        wt_wr   = '{we: 1'b1, addr: WADDR_W'(a), data: wgt[k][a]};
        wt_core = CORE_W'(k);
      end
    @(negedge clk);
    wt_wr.we = 1'b0;
  endtask

  task automatic send_task(int core, int cam, int tag);
    @(negedge clk);
    task_valid = 1'b1;
    task_core  = CORE_W'(core);
    task_in    = '{tag: 8'(tag), kind: task_kind_e'(tag % 3), cam: CAM_W'(cam)};
    q_cam[core].push_back(cam);
    q_tag[core].push_back(tag);
    @(posedge clk);
    while (!task_ready) @(posedge clk);
    @(negedge clk);
    task_valid = 1'b0;
  endtask

  function automatic int total_done();
    int s = 0;
    for (int k = 0; k < int'(NCORE); k++) s += tasks_done[k];
    return s;
  endfunction

  initial begin
    int tag = 0;
    int ids_seen = 0;
    task_valid = 1'b0; task_core = '0; task_in = '0; cid_ready = 1'b0;
    wt_wr = '0; wt_core = '0;
    for (int k = 0; k < int'(NCORE); k++) tasks_done[k] = 0;
    for (int k = 0; k < int'(NCORE); k++)
      for (int m = 0; m < int'(M); m++)
        for (int y = 0; y < int'(OH); y++)
          for (int x = 0; x < int'(OW); x++) begin got[k][m][y][x] = 0; hits[k][m][y][x] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_weights();
    // all cameras send a frame at once (DMAs in parallel, IDs queued)
    want_frame = '1;
    // the CPU is slow to read IDs at first
    repeat (C * NPIX + 40) @(negedge clk);
    // every ID is turned into tasks on three cores of different kinds,
    // so several cores read one data SRAM at the same time
    while (ids_seen < int'(NUM_CAM)) begin
      @(negedge clk);
      if (cid_valid) begin
        int cam;
        cam = int'(cid);
        cid_ready = 1'b1;
        @(negedge clk);
        cid_ready = 1'b0;
        ids_seen++;
        send_task(ids_seen % N_OD, cam, tag);          tag++;
        send_task(N_OD + (ids_seen % N_IC), cam, tag);   tag++;
        send_task(N_OD + N_IC + (ids_seen % N_MC), cam, tag); tag++;
      end
    end
    // a burst to one core fills its instruction SRAM
    for (int i = 0; i < int'(ISRAM) + 3; i++) begin
      send_task(N_OD + N_IC, i % NUM_CAM, tag); tag++;
    end
    while (total_done() < tag) @(negedge clk);
    repeat (10) @(negedge clk);
    checks++;
    if (total_done() != tag) begin failures++; $display("FAIL %0d of %0d tasks", total_done(), tag); end
    for (int k = 0; k < int'(NCORE); k++) begin
      checks++;
      if (tasks_done[k] == 0) begin failures++; $display("FAIL core %0d never ran", k); end
    end
    $display("mechanisms: drop=%0d contention=%0d queue>=2=%0d isram_full=%0d cid_stall=%0d partial=%0d ic_overlap=%0d dma_parallel=%0d",
             n_drop, n_contention, n_queue2, n_isram_full, n_cid_stall, n_partial, n_ic_overlap, n_dma_parallel);
    checks += 8;
    if (n_drop == 0)         begin failures++; $display("FAIL no refused frame"); end
    if (n_contention == 0)   begin failures++; $display("FAIL no read contention"); end
    if (n_queue2 == 0)       begin failures++; $display("FAIL no queued tasks"); end
    if (n_isram_full == 0)   begin failures++; $display("FAIL instruction SRAM never full"); end
    if (n_cid_stall == 0)    begin failures++; $display("FAIL camera-ID queue never waited"); end
    if (n_partial == 0)      begin failures++; $display("FAIL no SconvOD partial sums"); end
    if (n_ic_overlap == 0)   begin failures++; $display("FAIL SconvIC never loaded while computing"); end
    if (n_dma_parallel == 0) begin failures++; $display("FAIL DMAs never ran in parallel"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
