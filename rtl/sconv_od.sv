// sconv_od: SconvOD core, the Sconv / ofmap-propagation / dispersive-register
// accelerator of the HMAI (modelled on NeuFlow).
//
// The core computes one whole 2-D convolution per pass: one input channel c
// of the frame convolved with the F x F kernel of filter m. The PE grid has
// F lines of F PEs. Each PE keeps one weight in its own register, loaded
// before the pass. Every cycle one ifmap pixel is broadcast to all PEs; each
// PE adds weight*pixel to the partial sum arriving from its left neighbour
// and passes it right. At the end of a line, a FIFO of W-F entries delays the
// partial sum by one image row minus the line length, so it enters the next
// line exactly when the pixels one row lower arrive. The sum leaving the last
// line is a finished ofmap neuron for the window ending at the current pixel;
// windows that wrap round the row or start above the image are discarded
// (those PEs' outputs are "not valid for this ifmap").
//
// Each pixel is read once from the camera's data SRAM per pass. A task (one
// layer of C channels and M filters) takes M*C passes. The core has no
// on-chip buffer for partial sums, so each pass streams its single-channel
// sums out with `partial` set and ch = c; whoever stores the ofmaps (the
// external memory) adds the C partial planes. With C = 1 the outputs are final.
//
// Timing: loading the F*F PE weights takes F*F cycles; after that one pixel
// is consumed per granted read, so a pass takes about W*H + F*F + 3 cycles
// when the interconnect grants every cycle. `done` pulses once with the
// task's tag after the last pass.
//
// From the paper: broadcast ifmap, weights fixed in PE registers, partial
// sums propagating through PEs and line FIFOs, one EXMC read per pixel, no
// on-chip buffer. The loop order, the weight store, the widths and the
// stream ports are this design's choices.
//
// The model field of the task descriptor (YOLO, SSD, GOTURN) is kept with the
// task for the scheduler but does not change the computation, so its bits are
// not read here (the linter reports them as unused).
module sconv_od
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
  // task from the instruction SRAM
  input  logic       task_valid,
  output logic       task_ready,
  input  task_desc_t task_in,
  // filter weights from the external memory
  input  wt_wr_t     wt_wr,
  // ifmap reads from the data SRAMs
  output rd_req_t    rd_req,
  input  rd_rsp_t    rd_rsp,
  // results
  output ofmap_t     ofmap,
  output logic       busy,
  output logic       done,
  output logic [7:0] done_tag
);

  localparam int unsigned F      = KSIZE;
  localparam int unsigned NPIX   = IMG_W * IMG_H;
  localparam int unsigned NW     = NUM_FILT * NUM_CH * F * F;
  localparam int unsigned FDEPTH = IMG_W - F;
  localparam int unsigned FPTR_W = (FDEPTH > 1) ? $clog2(FDEPTH) : 1;
  localparam int unsigned KIDX_W = $clog2(F * F + 1);

  typedef enum logic [1:0] {S_IDLE, S_LOADW, S_STREAM, S_DONE} state_e;
  state_e state;

  task_desc_t           cur;
  logic [MIDX_W-1:0]    m;
  logic [CIDX_W-1:0]    c;
  logic [KIDX_W-1:0]    widx;
  logic [ADDR_W-1:0]    issued, received;
  logic [COORD_W-1:0]   px, py;

  // weight store (filled from the external memory) and PE weight registers
  logic signed [WGT_W-1:0] wstore [NW];
  logic signed [WGT_W-1:0] wpe    [F][F];

  // PE partial-sum registers and line FIFOs
  logic signed [ACC_W-1:0] s   [F][F];
  logic [FPTR_W-1:0]       fptr;

  ofmap_t                  ofq;
  logic                    pix_en;
  logic signed [PIX_W:0]   pix;
  logic signed [ACC_W-1:0] line_in [F];

  assign task_ready = (state == S_IDLE);
  assign busy       = (state != S_IDLE);

  // read request: the next pixel of channel c, row-major
  assign rd_req.valid = (state == S_STREAM) && (issued < ADDR_W'(NPIX));
  assign rd_req.cam   = cur.cam;
  assign rd_req.addr  = ADDR_W'(c) * ADDR_W'(NPIX) + issued;

  assign pix_en = (state == S_STREAM) && rd_rsp.rvalid;
  assign pix    = $signed({1'b0, rd_rsp.rdata});

  // line FIFO r delays the sum leaving line r before it enters line r+1
  // (one memory per line, read and written at the same pointer)
  assign line_in[0] = '0;
  for (genvar r = 0; r < F - 1; r++) begin : g_line
    logic signed [ACC_W-1:0] lfifo [FDEPTH];
    always_ff @(posedge clk) begin
      if (pix_en) lfifo[fptr] <= s[r][F-1];
    end
    assign line_in[r+1] = lfifo[fptr];
  end

  always_ff @(posedge clk) begin
    if (wt_wr.we && (wt_wr.addr < WADDR_W'(NW))) wstore[int'(wt_wr.addr)] <= $signed(wt_wr.data);
  end

  // PE grid and line FIFOs: advance once per received pixel
  always_ff @(posedge clk) begin
    if (pix_en) begin
      for (int r = 0; r < int'(F); r++) begin
        s[r][0] <= line_in[r] + ACC_W'(wpe[r][0] * pix);
        for (int k = 1; k < int'(F); k++) s[r][k] <= s[r][k-1] + ACC_W'(wpe[r][k] * pix);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cur      <= '0;
      m        <= '0;
      c        <= '0;
      widx     <= '0;
      issued   <= '0;
      received <= '0;
      px       <= '0;
      py       <= '0;
      fptr     <= '0;
      done     <= 1'b0;
      done_tag <= '0;
      ofq      <= '0;
    end else begin
      done        <= 1'b0;
      ofq.valid <= 1'b0;
      unique case (state)
        S_IDLE: if (task_valid) begin
          cur   <= task_in;
          m     <= '0;
          c     <= '0;
          widx  <= '0;
          state <= S_LOADW;
        end
        S_LOADW: begin
          // copy kernel (m, c) into the PE registers, one weight per cycle
          wpe[int'(widx) / int'(F)][int'(widx) % int'(F)] <=
            wstore[(int'(m) * int'(NUM_CH) + int'(c)) * int'(F * F) + int'(widx)];
          if (widx == KIDX_W'(F * F - 1)) begin
            widx     <= '0;
            issued   <= '0;
            received <= '0;
            px       <= '0;
            py       <= '0;
            fptr     <= '0;
            state    <= S_STREAM;
          end else begin
            widx <= widx + 1'b1;
          end
        end
        S_STREAM: begin
          if (rd_req.valid && rd_rsp.gnt) issued <= issued + 1'b1;
          if (pix_en) begin
            fptr <= (fptr == FPTR_W'(FDEPTH - 1)) ? '0 : fptr + 1'b1;
            ofq.valid   <= (px >= COORD_W'(F - 1)) && (py >= COORD_W'(F - 1));
            ofq.partial <= (NUM_CH > 1);
            ofq.m       <= m;
            ofq.ch      <= c;
            ofq.y       <= py - COORD_W'(F - 1);
            ofq.x       <= px - COORD_W'(F - 1);
            if (px == COORD_W'(IMG_W - 1)) begin
              px <= '0;
              py <= py + 1'b1;
            end else begin
              px <= px + 1'b1;
            end
            received <= received + 1'b1;
            if (received == ADDR_W'(NPIX - 1)) begin
              if (c == CIDX_W'(NUM_CH - 1)) begin
                c <= '0;
                if (m == MIDX_W'(NUM_FILT - 1)) state <= S_DONE;
                else begin
                  m     <= m + 1'b1;
                  state <= S_LOADW;
                end
              end else begin
                c     <= c + 1'b1;
                state <= S_LOADW;
              end
            end
          end
        end
        S_DONE: begin
          done     <= 1'b1;
          done_tag <= cur.tag;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the ofmap value is the last line's last PE, valid with the registered tag
  always_comb begin
    ofmap      = ofq;
    ofmap.data = s[F-1][F-1];
  end

  initial begin
    assert (IMG_W > KSIZE && IMG_H >= KSIZE) else $error("image smaller than kernel");
  end

endmodule
