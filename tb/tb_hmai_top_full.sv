// tb_hmai_top_full: end-to-end testbench of hmai_top at full size (all parameters at their defaults).
//
// The testbench plays the parts outside the chip:
//  * camera models stream frames of random pixels when the testbench asks;
//  * a CPU model pops camera IDs of finished frames and sends tasks to
//    cores (a fixed rotation over the cores stands in for the scheduler);
//  * an external-memory model writes random filter weights into every core
//    and collects each core's ofmap stream, adding SconvOD's per-channel
//    partial sums.
// Each finished task is compared, neuron by neuron, with a convolution of
// the frame the camera sent, computed here. Camera 7 sends one 640 x 480 x 3 frame, which is then processed as one task on a SconvOD, a SconvIC and an MconvMC core at the same time, so that the three cores share that camera's data SRAM.
module tb_hmai_top_full;
  import hmai_pkg::*;

  localparam int unsigned NUM_CAM  = 30;
  localparam int unsigned N_OD     = 4;
  localparam int unsigned N_IC     = 4;
  localparam int unsigned N_MC     = 3;
  localparam int unsigned NCORE    = N_OD + N_IC + N_MC;
  localparam int unsigned W        = 640;
  localparam int unsigned H        = 480;
  localparam int unsigned C        = 3;
  localparam int unsigned M        = 4;
  localparam int unsigned F        = 3;
  localparam int unsigned ISRAM    = 16;
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

  hmai_top  dut (.*);

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
            while (($urandom % 8) == 0 && 0) begin
              cam_pix_valid[i] = 1'b0;
              @(negedge clk);
            end
            cam_pix_valid[i] = 1'b1;
            cam_pix_data[i]  = frame[i][a];
            // a second request in mid-frame must be refused
            cam_frame_req[i] = (a == 5) && 0;
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
    // one camera sends one full frame; its ID goes to one core of each kind
    want_frame[7] = 1'b1;
    wait (cid_valid);
    @(negedge clk);
    checks++;
    if (cid != CAM_W'(7)) begin failures++; $display("FAIL camera id %0d", cid); end
    cid_ready = 1'b1;
    @(negedge clk);
    cid_ready = 1'b0;
    send_task(0, 7, 1);
    send_task(N_OD, 7, 2);
    send_task(N_OD + N_IC, 7, 3);
    while (total_done() < 3) @(negedge clk);
    repeat (10) @(negedge clk);
    checks += 3;
    if (tasks_done[0] != 1 || tasks_done[N_OD] != 1 || tasks_done[N_OD + N_IC] != 1) begin
      failures++; $display("FAIL tasks done %0d %0d %0d", tasks_done[0], tasks_done[N_OD], tasks_done[N_OD + N_IC]);
    end
    $display("mechanisms: drop=%0d contention=%0d queue>=2=%0d isram_full=%0d cid_stall=%0d partial=%0d ic_overlap=%0d dma_parallel=%0d",
             n_drop, n_contention, n_queue2, n_isram_full, n_cid_stall, n_partial, n_ic_overlap, n_dma_parallel);
    checks += 3;
    if (n_contention == 0)   begin failures++; $display("FAIL no read contention"); end
    if (n_partial == 0)      begin failures++; $display("FAIL no SconvOD partial sums"); end
    if (n_ic_overlap == 0)   begin failures++; $display("FAIL SconvIC never loaded while computing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
