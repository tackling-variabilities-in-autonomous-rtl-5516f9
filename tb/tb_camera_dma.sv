// tb_camera_dma: self-checking testbench of camera_dma.
//
// A camera model sends frames of FRAME_WORDS pixels with random gaps in the
// pixel stream. The testbench checks that every pixel of a started frame is
// written once, in order, to addresses 0..FRAME_WORDS-1, that pixels before
// the start are not written, that `done` pulses exactly once per frame in
// the cycle after the last pixel, and that with an unbroken stream the frame
// takes FRAME_WORDS cycles.
module tb_camera_dma;
  localparam int unsigned FW = 100;
  localparam int unsigned AW = 20;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          start, busy, done, pix_valid, wr_en;
  logic [7:0]    pix_data, wr_data;
  logic [AW-1:0] wr_addr;

  camera_dma #(.FRAME_WORDS(FW), .DATA_W(8), .ADDR_W(AW)) dut (.*);

  int checks = 0;
  int failures = 0;
  int wr_count = 0;
  int done_count = 0;
  logic [7:0] sent [FW];

  always @(posedge clk) begin
    if (rst_n && wr_en) begin
      checks++;
      if (int'(wr_addr) != wr_count || wr_data != sent[wr_count]) begin
        failures++;
        $display("FAIL write %0d: addr %0d data %0h", wr_count, wr_addr, wr_data);
      end
      wr_count++;
    end
    if (rst_n && done) done_count++;
  end

  task automatic frame(int gap_pct);
    int cyc;
    for (int i = 0; i < int'(FW); i++) sent[i] = 8'($urandom);
    wr_count = 0;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 0;
    for (int i = 0; i < int'(FW); i++) begin
      while (($urandom % 100) < gap_pct) begin
        pix_valid = 1'b0;
        @(negedge clk);
        cyc++;
      end
      pix_valid = 1'b1;
      pix_data  = sent[i];
      @(negedge clk);
      cyc++;
    end
    pix_valid = 1'b0;
    checks++;
    if (!done) begin failures++; $display("FAIL done not in the cycle after the last pixel"); end
    if (gap_pct == 0) begin
      checks++;
      if (cyc != int'(FW)) begin failures++; $display("FAIL frame took %0d cycles", cyc); end
    end
    @(negedge clk);
    checks++;
    if (wr_count != int'(FW) || busy) begin
      failures++; $display("FAIL %0d pixels written, busy %0b", wr_count, busy);
    end
  endtask

  initial begin
    start = 1'b0; pix_valid = 1'b0; pix_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // pixels while idle must be dropped
    pix_valid = 1'b1;
    repeat (5) @(negedge clk);
    pix_valid = 1'b0;
    checks++;
    if (wr_count != 0) begin failures++; $display("FAIL idle pixels written"); end
    frame(0);
    frame(40);
    frame(10);
    checks++;
    if (done_count != 3) begin failures++; $display("FAIL %0d done pulses", done_count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
