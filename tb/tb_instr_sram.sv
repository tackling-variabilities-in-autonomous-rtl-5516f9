// tb_instr_sram: self-checking testbench of instr_sram.
//
// Random writes and reads, some in the same cycle, are compared with a
// queue model: every descriptor must come out once, in order; wr_ready must
// fall exactly when DEPTH entries are held, rd_valid exactly when none are,
// and `level` must equal the model's count every cycle.
module tb_instr_sram;
  localparam int unsigned DEPTH = 16;
  localparam int unsigned DW    = 15;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          wr_valid, wr_ready, rd_valid, rd_ready;
  logic [DW-1:0] wr_data, rd_data;
  logic [$clog2(DEPTH+1)-1:0] level;

  instr_sram #(.DEPTH(DEPTH), .DATA_W(DW)) dut (.*);

  int checks = 0;
  int failures = 0;
  logic [DW-1:0] q [$];
  int full_seen = 0;

  initial begin
    wr_valid = 1'b0; rd_ready = 1'b0; wr_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      int wp;
      wp = (i < 1000) ? 70 : (i < 2000 ? 30 : 50);
      @(negedge clk);
      checks++;
      if (int'(level) != q.size() || wr_ready != (q.size() < int'(DEPTH))
          || rd_valid != (q.size() > 0)) begin
        failures++;
        if (failures < 10) $display("FAIL level %0d model %0d", level, q.size());
      end
      if (q.size() == int'(DEPTH)) full_seen++;
      if (rd_valid) begin
        checks++;
        if (rd_data != q[0]) begin failures++; $display("FAIL data %0h want %0h", rd_data, q[0]); end
      end
      wr_valid = (($urandom % 100) < wp);
      wr_data  = DW'($urandom);
      rd_ready = (($urandom % 100) < 50);
      @(posedge clk);
      if (rd_valid && rd_ready) void'(q.pop_front());
      if (wr_valid && wr_ready) q.push_back(wr_data);
    end
    checks++;
    if (full_seen == 0) begin failures++; $display("FAIL never full"); end
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
