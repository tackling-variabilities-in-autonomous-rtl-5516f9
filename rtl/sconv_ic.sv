// sconv_ic: SconvIC core, the SSconv / ifmap-propagation / concentrated-
// register accelerator of the HMAI (modelled on ShiDianNao).
//
// The core works on output tiles of PR x PC neurons, one PE per neuron
// (output stationary: the partial sum never leaves the PE). For one tile and
// one filter m it steps through all C*F*F kernel taps; each cycle the same
// weight w[m][c][ky][kx] is broadcast to every PE, while PE (i, j) receives
// its own ifmap neuron in[c][ty+i+ky][tx+j+kx] from the ifmap register. After
// the last tap every PE holds one finished ofmap neuron. The tile's ifmaps
// ((PR+F-1) x (PC+F-1) pixels per channel) live in a double-buffered ifmap
// register: while the PEs work on one bank, a loader fills the other bank
// with the next tile from the camera's data SRAM. Finished results are copied
// into an output register and sent out one neuron per cycle (neurons past
// the image edge are skipped), while the PEs go on with the next filter.
//
// Timing: a filter on a tile takes C*F*F cycles, its drain PR*PC cycles; the
// PEs wait at a filter's last tap while the previous filter is still being
// drained. Loading a tile takes C*(PR+F-1)*(PC+F-1) granted reads and is
// overlapped with the compute of the previous tile. `done` pulses with the
// task's tag once the last neuron has left.
//
// From the paper: the same filter weight to all PEs each cycle, different
// ifmap neurons from a double-buffered ifmap register, one output neuron per
// PE. The 8 x 8 array (ShiDianNao's size; the paper gives none), the tile
// order, the output register and the weight store are this design's choices.
//
// The model field of the task descriptor (YOLO, SSD, GOTURN) is kept with the
// task for the scheduler but does not change the computation, so its bits are
// not read here (the linter reports them as unused).
module sconv_ic
  import hmai_pkg::*;
#(
  parameter int unsigned IMG_W    = 640,
  parameter int unsigned IMG_H    = 480,
  parameter int unsigned NUM_CH   = 3,
  parameter int unsigned NUM_FILT = 4,
  parameter int unsigned KSIZE    = 3,
  parameter int unsigned PR       = 8,
  parameter int unsigned PC       = 8
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
  localparam int unsigned OW   = IMG_W - F + 1;
  localparam int unsigned OH   = IMG_H - F + 1;
  localparam int unsigned TW   = PC + F - 1;          // tile width in pixels
  localparam int unsigned TH   = PR + F - 1;          // tile height in pixels
  localparam int unsigned NTX  = (OW + PC - 1) / PC;  // tiles per row
  localparam int unsigned NTY  = (OH + PR - 1) / PR;  // tile rows
  localparam int unsigned NPIX = IMG_W * IMG_H;
  localparam int unsigned NW   = NUM_FILT * NUM_CH * F * F;

  // ---------------------------------------------------------------- state
  logic       running;
  task_desc_t cur;

  // weight store
  logic signed [WGT_W-1:0] wstore [NW];

  // double-buffered ifmap register
  logic [PIX_W-1:0] ibuf [2][NUM_CH][TH][TW];

  // loader
  logic               ld_active, ld_full, ld_bank;
  logic [COORD_W-1:0] ld_tx, ld_ty;          // tile index being loaded
  logic [CIDX_W-1:0]  li_c, lr_c;            // issue / receive counters
  logic [COORD_W-1:0] li_i, li_j, lr_i, lr_j;
  logic               li_done;

  // compute
  logic               cp_active, cp_bank, cp_first, all_computed;
  logic [COORD_W-1:0] cp_tx, cp_ty;
  logic [MIDX_W-1:0]  cp_m;
  logic [CIDX_W-1:0]  cp_c;
  logic [COORD_W-1:0] cp_ky, cp_kx;
  logic               cp_last_tap, cp_stall;
  logic signed [ACC_W-1:0] acc [PR][PC];

  // drain
  logic                    fin;              // acc holds a finished filter
  logic                    dr_busy;
  logic signed [ACC_W-1:0] obuf [PR][PC];
  logic [COORD_W-1:0]      dr_i, dr_j, dr_tx, dr_ty;
  logic [MIDX_W-1:0]       dr_m;

  assign task_ready = !running;
  assign busy       = running;

  always_ff @(posedge clk) begin
    if (wt_wr.we && (wt_wr.addr < WADDR_W'(NW))) wstore[int'(wt_wr.addr)] <= $signed(wt_wr.data);
  end

  // ---------------------------------------------------------------- loader
  logic [ADDR_W-1:0] li_y, li_x;
  assign li_y = ADDR_W'(ld_ty) * ADDR_W'(PR) + ADDR_W'(li_i);
  assign li_x = ADDR_W'(ld_tx) * ADDR_W'(PC) + ADDR_W'(li_j);

  assign rd_req.valid = ld_active && !li_done;
  assign rd_req.cam   = cur.cam;
  // pixels past the right or bottom edge are read from a clamped address;
  // they only feed neurons that are never sent out
  assign rd_req.addr  = ADDR_W'(li_c) * ADDR_W'(NPIX)
                      + ((li_y < ADDR_W'(IMG_H)) ? li_y : ADDR_W'(IMG_H - 1)) * ADDR_W'(IMG_W)
                      + ((li_x < ADDR_W'(IMG_W)) ? li_x : ADDR_W'(IMG_W - 1));

  always_ff @(posedge clk) begin
    if (ld_active && rd_rsp.rvalid) ibuf[ld_bank][int'(lr_c)][int'(lr_i)][int'(lr_j)] <= rd_rsp.rdata;
  end

  // ---------------------------------------------------------------- PEs
  logic signed [WGT_W-1:0] wcur;
  assign wcur = wstore[((int'(cp_m) * int'(NUM_CH) + int'(cp_c)) * int'(F) + int'(cp_ky)) * int'(F)
                       + int'(cp_kx)];
  assign cp_last_tap = (cp_c == CIDX_W'(NUM_CH - 1)) && (cp_ky == COORD_W'(F - 1))
                    && (cp_kx == COORD_W'(F - 1));
  // a filter's last tap waits until the output register is free
  assign cp_stall = cp_last_tap && (dr_busy || fin);

  always_ff @(posedge clk) begin
    if (cp_active && !cp_stall) begin
      for (int i = 0; i < int'(PR); i++)
        for (int j = 0; j < int'(PC); j++)
          acc[i][j] <= (cp_first ? ACC_W'(0) : acc[i][j])
                     + ACC_W'(wcur * $signed({1'b0,
                         ibuf[cp_bank][int'(cp_c)][i + int'(cp_ky)][j + int'(cp_kx)]}));
    end
    if (fin) obuf <= acc;
  end

  // ---------------------------------------------------------------- control
  logic last_ld_tile, last_cp_tile;
  assign last_ld_tile = (ld_tx == COORD_W'(NTX - 1)) && (ld_ty == COORD_W'(NTY - 1));
  assign last_cp_tile = (cp_tx == COORD_W'(NTX - 1)) && (cp_ty == COORD_W'(NTY - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running      <= 1'b0;
      cur          <= '0;
      ld_active    <= 1'b0;
      ld_full      <= 1'b0;
      ld_bank      <= 1'b0;
      ld_tx        <= '0;
      ld_ty        <= '0;
      li_done      <= 1'b0;
      {li_c, li_i, li_j, lr_c, lr_i, lr_j} <= '0;
      cp_active    <= 1'b0;
      cp_bank      <= 1'b0;
      cp_first     <= 1'b0;
      all_computed <= 1'b0;
      {cp_tx, cp_ty, cp_m, cp_c, cp_ky, cp_kx} <= '0;
      fin          <= 1'b0;
      dr_busy      <= 1'b0;
      {dr_i, dr_j, dr_tx, dr_ty, dr_m} <= '0;
      ofmap        <= '0;
      done         <= 1'b0;
      done_tag     <= '0;
    end else begin
      done        <= 1'b0;
      ofmap.valid <= 1'b0;

      // ---- task start: load tile 0 into bank 0
      if (!running && task_valid) begin
        running      <= 1'b1;
        cur          <= task_in;
        ld_active    <= 1'b1;
        ld_full      <= 1'b0;
        ld_bank      <= 1'b0;
        ld_tx        <= '0;
        ld_ty        <= '0;
        li_done      <= 1'b0;
        {li_c, li_i, li_j, lr_c, lr_i, lr_j} <= '0;
        all_computed <= 1'b0;
      end

      // ---- loader: issue side
      if (rd_req.valid && rd_rsp.gnt) begin
        if (li_j == COORD_W'(TW - 1)) begin
          li_j <= '0;
          if (li_i == COORD_W'(TH - 1)) begin
            li_i <= '0;
            if (li_c == CIDX_W'(NUM_CH - 1)) begin
              li_c    <= '0;
              li_done <= 1'b1;
            end else li_c <= li_c + 1'b1;
          end else li_i <= li_i + 1'b1;
        end else li_j <= li_j + 1'b1;
      end
      // ---- loader: receive side
      if (ld_active && rd_rsp.rvalid) begin
        if (lr_j == COORD_W'(TW - 1)) begin
          lr_j <= '0;
          if (lr_i == COORD_W'(TH - 1)) begin
            lr_i <= '0;
            if (lr_c == CIDX_W'(NUM_CH - 1)) begin
              lr_c      <= '0;
              ld_active <= 1'b0;
              ld_full   <= 1'b1;
            end else lr_c <= lr_c + 1'b1;
          end else lr_i <= lr_i + 1'b1;
        end else lr_j <= lr_j + 1'b1;
      end

      // ---- hand a loaded bank to the PEs and start loading the next tile
      if (running && !cp_active && ld_full && !ld_active && !all_computed) begin
        cp_active <= 1'b1;
        cp_bank   <= ld_bank;
        cp_tx     <= ld_tx;
        cp_ty     <= ld_ty;
        cp_first  <= 1'b1;
        {cp_m, cp_c, cp_ky, cp_kx} <= '0;
        ld_full   <= 1'b0;
        if (!last_ld_tile) begin
          ld_active <= 1'b1;
          ld_bank   <= !ld_bank;
          li_done   <= 1'b0;
          if (ld_tx == COORD_W'(NTX - 1)) begin
            ld_tx <= '0;
            ld_ty <= ld_ty + 1'b1;
          end else ld_tx <= ld_tx + 1'b1;
        end
      end

      // ---- PE sequencing over filters and taps
      fin <= 1'b0;
      if (cp_active && !cp_stall) begin
        cp_first <= 1'b0;
        if (cp_kx == COORD_W'(F - 1)) begin
          cp_kx <= '0;
          if (cp_ky == COORD_W'(F - 1)) begin
            cp_ky <= '0;
            if (cp_c == CIDX_W'(NUM_CH - 1)) begin
              cp_c     <= '0;
              fin      <= 1'b1;
              dr_m     <= cp_m;
              dr_tx    <= cp_tx;
              dr_ty    <= cp_ty;
              cp_first <= 1'b1;
              if (cp_m == MIDX_W'(NUM_FILT - 1)) begin
                cp_m      <= '0;
                cp_active <= 1'b0;
                if (last_cp_tile) all_computed <= 1'b1;
              end else cp_m <= cp_m + 1'b1;
            end else cp_c <= cp_c + 1'b1;
          end else cp_ky <= cp_ky + 1'b1;
        end else cp_kx <= cp_kx + 1'b1;
      end

      // ---- drain the output register, one neuron per cycle
      if (fin) begin
        dr_busy <= 1'b1;
        dr_i    <= '0;
        dr_j    <= '0;
      end else if (dr_busy) begin
        ofmap.valid   <= ((dr_ty * COORD_W'(PR) + dr_i) < COORD_W'(OH))
                      && ((dr_tx * COORD_W'(PC) + dr_j) < COORD_W'(OW));
        ofmap.partial <= 1'b0;
        ofmap.m       <= dr_m;
        ofmap.ch      <= '0;
        ofmap.y       <= dr_ty * COORD_W'(PR) + dr_i;
        ofmap.x       <= dr_tx * COORD_W'(PC) + dr_j;
        ofmap.data    <= obuf[int'(dr_i)][int'(dr_j)];
        if (dr_j == COORD_W'(PC - 1)) begin
          dr_j <= '0;
          if (dr_i == COORD_W'(PR - 1)) begin
            dr_i    <= '0;
            dr_busy <= 1'b0;
          end else dr_i <= dr_i + 1'b1;
        end else dr_j <= dr_j + 1'b1;
      end

      // ---- task end
      if (running && all_computed && !fin && !dr_busy) begin
        running      <= 1'b0;
        all_computed <= 1'b0;
        done         <= 1'b1;
        done_tag     <= cur.tag;
      end
    end
  end

endmodule
