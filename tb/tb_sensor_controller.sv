// tb_sensor_controller: self-checking testbench of sensor_controller.
//
// Simple DMA models (busy for a random number of cycles after dma_start,
// then a done pulse) stand behind every camera. Cameras raise frame
// requests at random, sometimes while their DMA is still busy. Checked:
// dma_start follows a request to an idle DMA in the next cycle and never
// goes to a busy one; a request to a busy DMA gives a drop pulse; every
// finished frame's camera ID reaches the CPU exactly once; the ID offered
// to a stalled CPU stays stable; when all cameras finish at once, the IDs
// come out in round-robin order, one per cycle.
module tb_sensor_controller;
  localparam int unsigned N  = 8;
  localparam int unsigned CW = 5;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0]  frame_req, drop, dma_start, dma_busy, dma_done;
  logic          cid_valid, cid_ready;
  logic [CW-1:0] cid;

  sensor_controller #(.NUM_CAM(N), .CAM_W(CW), .FIFO_DEPTH(4)) dut (.*);

  int checks = 0;
  int failures = 0;
  int busy_cnt [N];
  int finished [N];
  int announced [N];
  int drops = 0;
  int force_done = 0;
  logic [N-1:0] req_q, busy_q, start_q;

  // DMA models
  always @(posedge clk) begin
    req_q  <= frame_req;
    busy_q <= dma_busy;
    start_q <= dma_start;
    for (int i = 0; i < int'(N); i++) begin
      dma_done[i] <= 1'b0;
      if (!rst_n) begin
        dma_busy[i] <= 1'b0;
        busy_cnt[i] = 0;
      end else if (dma_start[i]) begin
        dma_busy[i] <= 1'b1;
        busy_cnt[i] = (force_done != 0) ? 3 : 2 + ($urandom % 20);
      end else if (dma_busy[i]) begin
        busy_cnt[i]--;
        if (busy_cnt[i] == 0) begin
          dma_busy[i] <= 1'b0;
          dma_done[i] <= 1'b1;
          finished[i]++;
        end
      end
    end
  end

  // start / drop rules
  always @(posedge clk) begin
    if (rst_n) begin
      for (int i = 0; i < int'(N); i++) begin
        if (dma_start[i]) begin
          checks++;
          if (!req_q[i] || busy_q[i] || start_q[i]) begin failures++; $display("FAIL start %0d", i); end
        end
        if (req_q[i] && !busy_q[i] && !dma_start[i] && !start_q[i]) begin
          checks++;
          failures++;
          $display("FAIL request %0d not started", i);
        end
        if (drop[i]) drops++;
      end
    end
  end

  // CPU side
  logic [CW-1:0] held;
  logic          held_v = 1'b0;
  always @(posedge clk) begin
    if (rst_n && cid_valid) begin
      if (held_v) begin
        checks++;
        if (cid != held) begin failures++; $display("FAIL cid changed while stalled"); end
      end
      if (cid_ready) begin
        announced[cid]++;
        held_v <= 1'b0;
      end else begin
        held_v <= 1'b1;
        held   <= cid;
      end
    end
  end

  initial begin
    frame_req = '0; cid_ready = 1'b0;
    for (int i = 0; i < int'(N); i++) begin finished[i] = 0; announced[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      for (int i = 0; i < int'(N); i++) frame_req[i] = (($urandom % 100) < 4);
      cid_ready = (($urandom % 100) < 60);
    end
    frame_req = '0;
    cid_ready = 1'b1;
    repeat (100) @(negedge clk);
    for (int i = 0; i < int'(N); i++) begin
      checks++;
      if (finished[i] != announced[i] || finished[i] == 0) begin
        failures++; $display("FAIL cam %0d finished %0d announced %0d", i, finished[i], announced[i]);
      end
    end
    checks++;
    if (drops == 0) begin failures++; $display("FAIL no refused request seen"); end
    // all cameras at once: IDs leave one per cycle in round-robin order
    force_done = 1;
    @(negedge clk);
    frame_req = '1;
    @(negedge clk);
    frame_req = '0;
    wait (cid_valid);
    @(negedge clk);
    begin
      int first, prev, got;
      first = int'(cid);
      prev = -1;
      got = 0;
      while (cid_valid && got < int'(N)) begin
        checks++;
        if (prev >= 0 && int'(cid) != (prev + 1) % int'(N)) begin
          failures++; $display("FAIL order %0d after %0d", cid, prev);
        end
        prev = int'(cid);
        got++;
        @(negedge clk);
      end
      checks++;
      if (got != int'(N)) begin failures++; $display("FAIL only %0d IDs back to back", got); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
