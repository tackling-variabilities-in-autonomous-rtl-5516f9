// mconv_mc: MconvMC core, the Mconv / multiple-propagation / concentrated-
// register accelerator of the HMAI (modelled on Origami).
//
// One iteration (BasicUnit) uses Tc input channels at once, with Tm = Tc
// as the paper states; here Tc = NUM_CH, so one window covers every input
// channel of the layer. The core has one PE per input channel. An ifmap
// register per channel holds the current F x F window (region A1 of the
// figure). Each cycle the filter register sends a different F x F kernel
// slice w[m][c] to each PE c; PE c forms the F x F dot product with its
// window, and an adder tree sums the Tc PE results into one ofmap neuron
// (m, y, x). The M filters are issued on consecutive cycles.
//
// The window slides down one output column. While the PEs issue the filters
// for the current window, a loader fetches the next row of F pixels per
// channel (region A2, one stride below) from the camera's data SRAM into a
// staging row; when both are finished the window shifts up by one row and
// takes in the staging row. A new column starts by shifting in F rows.
//
// Timing: per window max(F*Tc granted reads, M issue cycles) + 1 cycles;
// results leave two cycles after their issue cycle (PE stage, adder stage).
// `done` pulses with the task's tag after the last neuron.
//
// From the paper: ifmap register per channel fed from A1 and A2 regions,
// F x F data per PE, different F x F filter slices to different PEs each
// cycle, accumulation of all PE results into one ofmap neuron, Tm = Tc.
// The per-channel ifmap SRAM of the figure is served here by the camera's
// data SRAM through the interconnect (this design keeps no second copy);
// stride 1, column-wise scan and the widths are this design's choices.
//
// The model field of the task descriptor (YOLO, SSD, GOTURN) is kept with the
// task for the scheduler but does not change the computation, so its bits are
// not read here (the linter reports them as unused).
module mconv_mc
  import hmai_pkg::*;
#(
  parameter int unsigned IMG_W    = 640,
  parameter int unsigned IMG_H    = 480,
  parameter int unsigned NUM_CH   = 3,
  parameter int unsigned NUM_FILT = 4,
  parameter int unsigned KSIZE    = 3
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       task_valid,
  output logic       task_ready,
  input  task_desc_t task_in,
  input  wt_wr_t     wt_wr,
  output rd_req_t    rd_req,
  input  rd_rsp_t    rd_rsp,
  output ofmap_t     ofmap,
  output logic       busy,
  output logic       done,
  output logic [7:0] done_tag
);

  localparam int unsigned F    = KSIZE;
  localparam int unsigned TC   = NUM_CH;
  localparam int unsigned OW   = IMG_W - F + 1;
  localparam int unsigned NPIX = IMG_W * IMG_H;
  localparam int unsigned NW   = NUM_FILT * NUM_CH * F * F;

  logic       running;
  task_desc_t cur;

  // filter register
  logic signed [WGT_W-1:0] wreg [NUM_FILT][TC][F][F];
  // ifmap register per channel (window) and staging row (A2)
  logic [PIX_W-1:0] win [TC][F][F];
  logic [PIX_W-1:0] nrow [TC][F];

  // column / row position of the row being loaded
  logic [COORD_W-1:0] col;      // output column = left edge of the window
  logic [COORD_W-1:0] ld_row;   // image row being fetched into nrow
  logic               ld_active, ld_full, li_done, last_row_loaded;
  logic [CIDX_W-1:0]  li_c, lr_c;
  logic [COORD_W-1:0] li_k, lr_k;

  // window state
  logic [COORD_W-1:0] win_row;    // image row of the window's bottom row
  logic [COORD_W-1:0] win_col;
  logic [COORD_W-1:0] fill;       // rows shifted into this column so far
  logic               issuing;
  logic [MIDX_W-1:0]  im;

  // pipeline
  logic                    p1_valid;
  logic [MIDX_W-1:0]       p1_m;
  logic [COORD_W-1:0]      p1_y, p1_x;
  logic signed [ACC_W-1:0] pe_out [TC];

  assign task_ready = !running;
  assign busy       = running;

  always_ff @(posedge clk) begin
    if (wt_wr.we && (wt_wr.addr < WADDR_W'(NW))) begin
      int a;
      a = int'(wt_wr.addr);
      wreg[a / int'(TC*F*F)][(a / int'(F*F)) % int'(TC)][(a / int'(F)) % int'(F)][a % int'(F)]
        <= $signed(wt_wr.data);
    end
  end

  // ---- loader of the A2 row: F pixels of row ld_row per channel
  assign rd_req.valid = ld_active && !li_done;
  assign rd_req.cam   = cur.cam;
  assign rd_req.addr  = ADDR_W'(li_c) * ADDR_W'(NPIX) + ADDR_W'(ld_row) * ADDR_W'(IMG_W)
                      + ADDR_W'(col) + ADDR_W'(li_k);

  always_ff @(posedge clk) begin
    if (ld_active && rd_rsp.rvalid) nrow[int'(lr_c)][int'(lr_k)] <= rd_rsp.rdata;
  end

  // ---- PEs: F x F dot product per channel, then the adder tree
  always_ff @(posedge clk) begin
    for (int c = 0; c < int'(TC); c++) begin
      logic signed [ACC_W-1:0] sum;
      sum = '0;
      for (int ky = 0; ky < int'(F); ky++)
        for (int kx = 0; kx < int'(F); kx++)
          sum = sum + ACC_W'(wreg[int'(im)][c][ky][kx] * $signed({1'b0, win[c][ky][kx]}));
      pe_out[c] <= sum;
    end
  end

  logic signed [ACC_W-1:0] tree;
  always_comb begin
    tree = '0;
    for (int c = 0; c < int'(TC); c++) tree = tree + pe_out[c];
  end

  // shift happens when the staging row is loaded and the window is free
  logic shift;
  assign shift = ld_full && !issuing;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running   <= 1'b0;
      cur       <= '0;
      col       <= '0;
      ld_row    <= '0;
      ld_active <= 1'b0;
      ld_full   <= 1'b0;
      li_done   <= 1'b0;
      last_row_loaded <= 1'b0;
      {li_c, lr_c, li_k, lr_k} <= '0;
      win_row   <= '0;
      win_col   <= '0;
      fill      <= '0;
      issuing   <= 1'b0;
      im        <= '0;
      p1_valid  <= 1'b0;
      {p1_m, p1_y, p1_x} <= '0;
      ofmap     <= '0;
      done      <= 1'b0;
      done_tag  <= '0;
    end else begin
      done <= 1'b0;

      if (!running && task_valid) begin
        running   <= 1'b1;
        cur       <= task_in;
        col       <= '0;
        ld_row    <= '0;
        ld_active <= 1'b1;
        ld_full   <= 1'b0;
        li_done   <= 1'b0;
        last_row_loaded <= 1'b0;
        {li_c, lr_c, li_k, lr_k} <= '0;
        fill      <= '0;
      end

      // loader issue
      if (rd_req.valid && rd_rsp.gnt) begin
        if (li_k == COORD_W'(F - 1)) begin
          li_k <= '0;
          if (li_c == CIDX_W'(TC - 1)) begin
            li_c    <= '0;
            li_done <= 1'b1;
          end else li_c <= li_c + 1'b1;
        end else li_k <= li_k + 1'b1;
      end
      // loader receive
      if (ld_active && rd_rsp.rvalid) begin
        if (lr_k == COORD_W'(F - 1)) begin
          lr_k <= '0;
          if (lr_c == CIDX_W'(TC - 1)) begin
            lr_c      <= '0;
            ld_active <= 1'b0;
            ld_full   <= 1'b1;
          end else lr_c <= lr_c + 1'b1;
        end else lr_k <= lr_k + 1'b1;
      end

      // window shift: rows move up, the staging row enters at the bottom
      if (shift) begin
        for (int c = 0; c < int'(TC); c++) begin
          for (int r = 0; r < int'(F) - 1; r++) win[c][r] <= win[c][r+1];
          win[c][F-1] <= nrow[c];
        end
        ld_full <= 1'b0;
        win_row <= ld_row;
        win_col <= col;
        if (fill >= COORD_W'(F - 1)) begin
          issuing   <= 1'b1;
          im        <= '0;
        end
        fill <= fill + 1'b1;
        // next row to fetch
        if (ld_row == COORD_W'(IMG_H - 1)) begin
          if (col == COORD_W'(OW - 1)) begin
            last_row_loaded <= 1'b1;
          end else begin
            col       <= col + 1'b1;
            ld_row    <= '0;
            fill      <= '0;
            ld_active <= 1'b1;
            li_done   <= 1'b0;
          end
        end else begin
          ld_row    <= ld_row + 1'b1;
          ld_active <= 1'b1;
          li_done   <= 1'b0;
        end
      end

      // filter issue: one filter per cycle on the current window
      p1_valid <= 1'b0;
      if (issuing) begin
        p1_valid <= 1'b1;
        p1_m     <= im;
        p1_y     <= win_row - COORD_W'(F - 1);
        p1_x     <= win_col;
        if (im == MIDX_W'(NUM_FILT - 1)) begin
          issuing <= 1'b0;
          im      <= '0;
        end else im <= im + 1'b1;
      end

      // adder-tree stage
      ofmap.valid   <= p1_valid;
      ofmap.partial <= 1'b0;
      ofmap.m       <= p1_m;
      ofmap.ch      <= '0;
      ofmap.y       <= p1_y;
      ofmap.x       <= p1_x;
      ofmap.data    <= tree;

      // end of task: everything loaded, issued and drained
      if (running && last_row_loaded && !issuing && !p1_valid && !ofmap.valid
          && !ld_full && !shift) begin
        running  <= 1'b0;
        done     <= 1'b1;
        done_tag <= cur.tag;
      end
    end
  end

endmodule
