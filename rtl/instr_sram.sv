// instr_sram: instruction SRAM of one core, holding the scheduling decisions
// (task descriptors) that the CPU has sent to that core.
//
// The CPU writes descriptors through the interconnect (wr_valid/wr_ready);
// the core takes them in arrival order (rd_valid/rd_ready). It is a circular
// buffer of DEPTH entries over a memory array: a write is accepted while the
// buffer is not full, a read is offered while it is not empty, and both may
// happen in one cycle. rd_data shows the oldest entry combinationally.
// `level` reports the number of queued tasks, which the scheduler can use
// as part of the core's state.
//
// The paper draws an instruction SRAM on each core and says the strategy is
// sent to the chosen core; the in-order queue behaviour and DEPTH = 16 are
// this design's choices.
module instr_sram #(
  parameter int unsigned DEPTH  = 16,
  parameter int unsigned DATA_W = 15
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_valid,
  output logic                       wr_ready,
  input  logic [DATA_W-1:0]          wr_data,
  output logic                       rd_valid,
  input  logic                       rd_ready,
  output logic [DATA_W-1:0]          rd_data,
  output logic [$clog2(DEPTH+1)-1:0] level
);

  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned LVL_W = $clog2(DEPTH + 1);

  logic [DATA_W-1:0] mem [DEPTH];
  logic [PTR_W-1:0]  wp, rp;
  logic              do_wr, do_rd;

  assign wr_ready = (level != LVL_W'(DEPTH));
  assign rd_valid = (level != '0);
  assign rd_data  = mem[rp];
  assign do_wr    = wr_valid && wr_ready;
  assign do_rd    = rd_valid && rd_ready;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      level <= '0;
    end else begin
      if (do_wr) wp <= (wp == PTR_W'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == PTR_W'(DEPTH - 1)) ? '0 : rp + 1'b1;
      level <= level + LVL_W'(do_wr) - LVL_W'(do_rd);
    end
  end

endmodule
