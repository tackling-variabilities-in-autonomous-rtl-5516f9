// tb_soc_interconnect: self-checking testbench of soc_interconnect.
//
// Five core models send random read requests to four SRAM models (which
// return a known function of camera and address one cycle after the read
// enable). A core keeps a request until it is granted. Checked every cycle:
// each SRAM grants at most one core and grants one whenever a core wants
// it; a granted core gets the right pixel exactly one cycle later; no core
// waits more than NUM_CORE cycles (round-robin fairness). Then task
// descriptors sent by the CPU must reach only the addressed instruction
// SRAM, and task_ready must follow that SRAM's ready.
module tb_soc_interconnect;
  import hmai_pkg::*;
  localparam int unsigned NC = 5;
  localparam int unsigned NS = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  rd_req_t            core_req [NC];
  rd_rsp_t            core_rsp [NC];
  logic               sram_rd_en   [NS];
  logic [ADDR_W-1:0]  sram_rd_addr [NS];
  logic [PIX_W-1:0]   sram_rd_data [NS];
  logic               task_valid, task_ready;
  logic [$clog2(NC)-1:0] task_core;
  task_desc_t         task_in, isram_wr_data;
  logic [NC-1:0]      isram_wr_valid, isram_wr_ready;

  soc_interconnect #(.NUM_CORE(NC), .NUM_CAM(NS)) dut (.*);

  int checks = 0;
  int failures = 0;

  function automatic logic [7:0] f(int cam, int addr);
    return 8'(addr * 13 + cam * 71 + (addr >> 4));
  endfunction

  // SRAM models
  always @(posedge clk)
    for (int s = 0; s < int'(NS); s++)
      if (sram_rd_en[s]) sram_rd_data[s] <= f(s, int'(sram_rd_addr[s]));

  // core models
  int  wait_cyc [NC];
  logic        exp_v [NC];
  logic [7:0]  exp_d [NC];
  int          reads = 0;
  logic        run = 1'b0;
  always @(posedge clk) begin
    if (rst_n && run) begin
      for (int s = 0; s < int'(NS); s++) begin
        int g, want;
        g = 0;
        want = 0;
        for (int k = 0; k < int'(NC); k++) begin
          if (core_req[k].valid && int'(core_req[k].cam) == s) want++;
          if (core_rsp[k].gnt && int'(core_req[k].cam) == s) g++;
        end
        checks++;
        if (g > 1 || (want > 0 && g == 0)) begin
          failures++; $display("FAIL sram %0d: %0d wanting, %0d granted", s, want, g);
        end
      end
      for (int k = 0; k < int'(NC); k++) begin
        if (exp_v[k]) begin
          checks++;
          if (!core_rsp[k].rvalid || core_rsp[k].rdata != exp_d[k]) begin
            failures++; $display("FAIL core %0d data %0h want %0h", k, core_rsp[k].rdata, exp_d[k]);
          end
          reads++;
        end else if (core_rsp[k].rvalid) begin
          failures++; $display("FAIL core %0d unexpected rvalid", k);
        end
        exp_v[k] <= core_rsp[k].gnt;
        exp_d[k] <= f(int'(core_req[k].cam), int'(core_req[k].addr));
        if (core_req[k].valid && !core_rsp[k].gnt) begin
          wait_cyc[k]++;
          if (wait_cyc[k] >= int'(NC)) begin
            failures++; $display("FAIL core %0d starved", k);
          end
        end else wait_cyc[k] = 0;
        // next request
        if (!core_req[k].valid || core_rsp[k].gnt) begin
          core_req[k].valid <= (($urandom % 100) < 80);
          core_req[k].cam   <= CAM_W'((k < 3) ? 1 : $urandom % NS);
          core_req[k].addr  <= ADDR_W'($urandom % 5000);
        end
      end
    end
  end

  initial begin
    for (int k = 0; k < int'(NC); k++) begin
      core_req[k] = '0; wait_cyc[k] = 0; exp_v[k] = 1'b0; exp_d[k] = '0;
    end
    task_valid = 1'b0; task_core = '0; task_in = '0; isram_wr_ready = '1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run = 1'b1;
    repeat (3000) @(negedge clk);
    run = 1'b0;
    checks++;
    if (reads < 3000) begin failures++; $display("FAIL only %0d reads", reads); end
    // task dispatch
    for (int i = 0; i < 50; i++) begin
      @(negedge clk);
      task_valid     = 1'b1;
      task_core      = 3'($urandom % NC);
      task_in        = '{tag: 8'(i), kind: TASK_YOLO, cam: CAM_W'(i % 30)};
      isram_wr_ready = NC'($urandom);
      #1;
      checks++;
      if (isram_wr_valid != (NC'(1) << task_core) || isram_wr_data != task_in
          || task_ready != isram_wr_ready[task_core]) begin
        failures++; $display("FAIL dispatch to %0d: valid %b", task_core, isram_wr_valid);
      end
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
