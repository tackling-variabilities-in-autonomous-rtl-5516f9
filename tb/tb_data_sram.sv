// tb_data_sram: self-checking testbench of data_sram.
//
// Writes random words to random addresses through the write port while
// reading random addresses through the read port, and compares every read
// word, one cycle after its address, with a shadow copy kept here. Also
// checks that a read and a write to the same address in one cycle return
// the old word. A 256-word memory keeps the run short.
module tb_data_sram;
  localparam int unsigned DEPTH = 256;
  localparam int unsigned AW    = 20;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic          wr_en, rd_en;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [7:0]    wr_data, rd_data;

  data_sram #(.DEPTH(DEPTH), .DATA_W(8), .ADDR_W(AW)) dut (.*);

  int checks = 0;
  int failures = 0;
  logic [7:0] shadow [DEPTH];

  initial begin
    wr_en = 1'b0; rd_en = 1'b0; wr_addr = '0; rd_addr = '0; wr_data = '0;
    // fill every word
    for (int a = 0; a < int'(DEPTH); a++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_addr = AW'(a); wr_data = 8'($urandom); shadow[a] = wr_data;
    end
    @(negedge clk);
    wr_en = 1'b0;
    // random mixed traffic
    for (int i = 0; i < 2000; i++) begin
      logic [7:0] expect_v;
      @(negedge clk);
      rd_en   = 1'b1;
      rd_addr = AW'($urandom % DEPTH);
      wr_en   = ($urandom % 2) == 1;
      wr_addr = (i % 7 == 0) ? rd_addr : AW'($urandom % DEPTH);
      wr_data = 8'($urandom);
      expect_v = shadow[rd_addr];
      if (wr_en) shadow[wr_addr] = wr_data;
      @(negedge clk);
      wr_en = 1'b0;
      rd_en = 1'b0;
      checks++;
      if (rd_data !== expect_v) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d got %0h want %0h", rd_addr, rd_data, expect_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
