// tb_sconv_od: self-checking testbench of sconv_od (NeuFlow-style PE lines with line FIFOs).
//
// A behavioural frame memory answers the core's read requests: it grants a
// request in the same cycle (always in phase 1, about three times in four in
// phase 2) and returns the pixel one cycle later, as the interconnect does.
// Pixel values follow a fixed formula of the address, and the filter weights
// are random, so the expected ofmap (a plain C-channel, M-filter, F x F,
// stride-1 convolution without padding) is computed here independently of
// the core. Every output neuron is checked for value, for not being out of
// range, and for arriving the right number of times (SconvOD sends one partial sum per input channel, which are added here as the external memory would).
// Phase 1 also checks the task's cycle count against M*C*(W*H + F*F + 3) + 4: one pixel per cycle per pass.
// A small image keeps the run short.
module tb_sconv_od;
  import hmai_pkg::*;

  localparam int unsigned W  = 13;
  localparam int unsigned H  = 9;
  localparam int unsigned C  = 3;
  localparam int unsigned M  = 2;
  localparam int unsigned F  = 3;
  localparam int unsigned OW = W - F + 1;
  localparam int unsigned OH = H - F + 1;
  localparam int unsigned NPIX = W * H;
  localparam int unsigned EXPECT_HITS = C;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       task_valid, task_ready, busy, done;
  task_desc_t task_in;
  wt_wr_t     wt_wr;
  rd_req_t    rd_req;
  rd_rsp_t    rd_rsp;
  ofmap_t     ofmap;
  logic [7:0] done_tag;

  sconv_od #(.IMG_W(W), .IMG_H(H), .NUM_CH(C), .NUM_FILT(M), .KSIZE(F)) dut (
    .clk, .rst_n, .task_valid, .task_ready, .task_in, .wt_wr, .rd_req, .rd_rsp,
    .ofmap, .busy, .done, .done_tag);

  int checks = 0;
  int failures = 0;

  function automatic logic [7:0] pixel(int cam, int addr);
    return 8'((addr * 37 + cam * 101 + (addr >> 3)) ^ (addr >> 5));
  endfunction

  // behavioural frame memory
  int  grant_pct = 100;
  logic [CAM_W-1:0]  q_cam;
  logic [ADDR_W-1:0] q_addr;
  logic              q_valid;
  logic              gnt_now;
  always_comb begin
    rd_rsp.gnt    = rd_req.valid && gnt_now;
    rd_rsp.rvalid = q_valid;
    rd_rsp.rdata  = pixel(int'(q_cam), int'(q_addr));
  end
  always_ff @(posedge clk) begin
    gnt_now <= (($urandom % 100) < grant_pct);
    q_valid <= rd_rsp.gnt;
    if (rd_rsp.gnt) begin
      q_cam  <= rd_req.cam;
      q_addr <= rd_req.addr;
      if (int'(rd_req.addr) >= int'(C * NPIX)) begin
        failures++;
        $display("FAIL read address %0d out of frame", rd_req.addr);
      end
    end
  end

  // weights and reference
  logic signed [15:0] w [M][C][F][F];
  longint ref_o [M][OH][OW];
  longint got   [M][OH][OW];
  int     hits  [M][OH][OW];
  int     cam_sel;

  task automatic compute_ref(int cam);
    for (int m = 0; m < int'(M); m++)
      for (int y = 0; y < int'(OH); y++)
        for (int x = 0; x < int'(OW); x++) begin
          longint s = 0;
          for (int c = 0; c < int'(C); c++)
            for (int ky = 0; ky < int'(F); ky++)
              for (int kx = 0; kx < int'(F); kx++)
                s += longint'(w[m][c][ky][kx]) * longint'(pixel(cam, c * NPIX + (y + ky) * W + x + kx));
          ref_o[m][y][x] = s;
          got[m][y][x]   = 0;
          hits[m][y][x]  = 0;
        end
  endtask

  // collect outputs
  always @(posedge clk) begin
    if (rst_n && ofmap.valid) begin
      if (int'(ofmap.m) >= int'(M) || int'(ofmap.y) >= int'(OH) || int'(ofmap.x) >= int'(OW)) begin
        failures++;
        $display("FAIL output out of range m=%0d y=%0d x=%0d", ofmap.m, ofmap.y, ofmap.x);
      end else begin
        got[ofmap.m][ofmap.y][ofmap.x] += longint'($signed(ofmap.data));
        hits[ofmap.m][ofmap.y][ofmap.x]++;
        if (ofmap.partial != 1'b1) begin
          failures++;
          $display("FAIL partial flag %0d", ofmap.partial);
        end
      end
    end
  end

  task automatic load_weights();
    for (int m = 0; m < int'(M); m++)
      for (int c = 0; c < int'(C); c++)
        for (int ky = 0; ky < int'(F); ky++)
          for (int kx = 0; kx < int'(F); kx++) begin
            w[m][c][ky][kx] = 16'($signed($urandom_range(0, 400)) - 200);
            @(negedge clk);
            wt_wr.we   = 1'b1;
            wt_wr.addr = WADDR_W'(((m * C + c) * F + ky) * F + kx);
            wt_wr.data = w[m][c][ky][kx];
          end
    @(negedge clk);
    wt_wr.we = 1'b0;
  endtask

  task automatic run_task(int cam, int tag, int bound);
    int cyc = 0;
    compute_ref(cam);
    @(negedge clk);
    task_in     = '{tag: 8'(tag), kind: TASK_SSD, cam: CAM_W'(cam)};
    task_valid  = 1'b1;
    checks++;
    if (!task_ready) begin failures++; $display("FAIL core not ready"); end
    @(negedge clk);
    task_valid = 1'b0;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (done_tag != 8'(tag)) begin failures++; $display("FAIL done tag %0d", done_tag); end
    if (bound > 0) begin
      checks++;
      if (cyc > bound) begin failures++; $display("FAIL took %0d cycles, bound %0d", cyc, bound); end
      else $display("task took %0d cycles (bound %0d)", cyc, bound);
    end
    repeat (5) @(negedge clk);
    for (int m = 0; m < int'(M); m++)
      for (int y = 0; y < int'(OH); y++)
        for (int x = 0; x < int'(OW); x++) begin
          checks++;
          if (got[m][y][x] != ref_o[m][y][x] || hits[m][y][x] != int'(EXPECT_HITS)) begin
            failures++;
            if (failures < 10)
              $display("FAIL m=%0d y=%0d x=%0d got %0d (%0d hits) want %0d",
                       m, y, x, got[m][y][x], hits[m][y][x], ref_o[m][y][x]);
          end
        end
  endtask

  initial begin
    task_valid = 1'b0;
    task_in    = '0;
    wt_wr      = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_weights();
    // phase 1: every read granted at once; the cycle count is checked
    run_task(5, 17, int'(M * C * (NPIX + F * F + 3) + 4));
    // phase 2: new weights, another camera, reads granted at random
    grant_pct = 70;
    load_weights();
    run_task(2, 99, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
