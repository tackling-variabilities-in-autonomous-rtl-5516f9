// soc_interconnect: on-chip interconnect of the HMAI.
//
// It carries the two kinds of traffic of the chip:
//  * Frame reads: every core (master) may read any camera's data SRAM
//    (slave). A core drives one read request {valid, cam, addr}. For each
//    data SRAM a round-robin arbiter grants one of the cores addressing it;
//    the grant is returned in the same cycle, the SRAM is read at the clock
//    edge and the pixel comes back with rvalid one cycle after the grant.
//    Cores that address different SRAMs proceed in parallel; a core that is
//    not granted keeps its request and tries again next cycle.
//  * Scheduling decisions: the CPU sends a task descriptor to one core with
//    {task_valid, task_core, task}; it is routed to that core's instruction
//    SRAM and task_ready is that SRAM's ready.
//
// The paper's chip uses a bus generated from a vendor's AMBA library; this
// is a simple crossbar with the same connectivity (cores to data SRAMs, CPU
// to instruction SRAMs). The round-robin policy and single-cycle SRAM
// latency are this design's choices.
module soc_interconnect
  import hmai_pkg::*;
#(
  parameter int unsigned NUM_CORE = 11,
  parameter int unsigned NUM_CAM  = 30
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // cores' frame reads
  input  rd_req_t                 core_req  [NUM_CORE],
  output rd_rsp_t                 core_rsp  [NUM_CORE],
  // data SRAM read ports
  output logic                    sram_rd_en   [NUM_CAM],
  output logic [ADDR_W-1:0]       sram_rd_addr [NUM_CAM],
  input  logic [PIX_W-1:0]        sram_rd_data [NUM_CAM],
  // CPU task dispatch
  input  logic                    task_valid,
  input  logic [$clog2(NUM_CORE)-1:0] task_core,
  input  task_desc_t              task_in,
  output logic                    task_ready,
  // instruction SRAM write ports
  output logic [NUM_CORE-1:0]     isram_wr_valid,
  input  logic [NUM_CORE-1:0]     isram_wr_ready,
  output task_desc_t              isram_wr_data
);

  localparam int unsigned CW = $clog2(NUM_CORE);

  logic [CW-1:0]       rr_ptr   [NUM_CAM];
  logic                gnt_any  [NUM_CAM];
  logic [CW-1:0]       gnt_core [NUM_CAM];
  logic [NUM_CORE-1:0] gnt_vec;
  // response routing: which SRAM each core was granted last cycle
  logic [NUM_CORE-1:0] rsp_pend;
  logic [CAM_W-1:0]    rsp_cam [NUM_CORE];

  always_comb begin
    gnt_vec = '0;
    for (int s = 0; s < int'(NUM_CAM); s++) begin
      gnt_any[s]  = 1'b0;
      gnt_core[s] = '0;
      for (int k = 0; k < int'(NUM_CORE); k++) begin
        int idx;
        idx = int'(rr_ptr[s]) + k;
        if (idx >= int'(NUM_CORE)) idx = idx - int'(NUM_CORE);
        if (!gnt_any[s] && core_req[idx].valid && (int'(core_req[idx].cam) == s)) begin
          gnt_any[s]  = 1'b1;
          gnt_core[s] = CW'(idx);
        end
      end
      if (gnt_any[s]) gnt_vec[gnt_core[s]] = 1'b1;
      sram_rd_en[s]   = gnt_any[s];
      sram_rd_addr[s] = core_req[gnt_core[s]].addr;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(NUM_CAM); s++) rr_ptr[s] <= '0;
      rsp_pend <= '0;
      for (int k = 0; k < int'(NUM_CORE); k++) rsp_cam[k] <= '0;
    end else begin
      for (int s = 0; s < int'(NUM_CAM); s++)
        if (gnt_any[s])
          rr_ptr[s] <= (gnt_core[s] == CW'(NUM_CORE - 1)) ? '0 : gnt_core[s] + 1'b1;
      rsp_pend <= gnt_vec;
      for (int k = 0; k < int'(NUM_CORE); k++)
        if (gnt_vec[k]) rsp_cam[k] <= core_req[k].cam;
    end
  end

  always_comb begin
    for (int k = 0; k < int'(NUM_CORE); k++) begin
      core_rsp[k].gnt    = gnt_vec[k];
      core_rsp[k].rvalid = rsp_pend[k];
      core_rsp[k].rdata  = sram_rd_data[int'(rsp_cam[k]) < int'(NUM_CAM) ? int'(rsp_cam[k]) : 0];
    end
  end

  // task dispatch to the instruction SRAMs
  always_comb begin
    isram_wr_valid = '0;
    if (task_valid && (int'(task_core) < int'(NUM_CORE))) isram_wr_valid[task_core] = 1'b1;
    isram_wr_data = task_in;
    task_ready    = (int'(task_core) < int'(NUM_CORE)) ? isram_wr_ready[task_core] : 1'b0;
  end

  // a core that was granted gets its pixel exactly one cycle later
  for (genvar k = 0; k < NUM_CORE; k++) begin : g_chk
    a_rsp_follows_gnt: assert property (@(posedge clk) disable iff (!rst_n)
      core_rsp[k].gnt |=> core_rsp[k].rvalid);
  end

endmodule
