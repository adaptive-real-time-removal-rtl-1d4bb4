// denoise_top: real-time salt-and-pepper noise removal for a gray-scale image
// held in on-chip memory.
//
// Operation. The host loads an IMG_W x IMG_H image into the frame RAM through
// the host port and pulses start. The controller then reads the image in
// raster order, extended by two pixels on every side (the nearest image pixel
// is repeated, so border pixels see a full neighbourhood), one pixel per
// clock. The block partitioner forms the 5x5 window around every pixel. In
// pipeline stage 1, 25 pixel labelers label the window (0: value 0,
// 1: value 255, 2: other) and the similarity module decides for each of the
// nine pixels of the central 3x3 whether it is an impulse: a 0/255 pixel is
// noisy when more than T1 of its eight neighbours carry a different label. In
// stage 2 the restoration module computes the median of the non-noisy pixels
// of the central 3x3 (two MFIGs, two median filters, averaging), and pixel
// placement keeps the original centre unless it is noisy. The result is
// written back to the same RAM location. Writing in place is safe: every
// pixel is read for the last time before its own result is written, and the
// window is built from line buffers, not from the RAM.
//
// Interface. start (pulse, ignored while busy), busy, done (one-cycle pulse
// after the last pixel is written). The host port (host_re/host_we, host_addr
// = row*IMG_W+column, host_wdata, host_rdata one cycle after host_re) reaches
// the RAM only while not busy.
//
// Timing. One pixel per clock over the border-extended frame: the controller
// issues (IMG_W+4)*(IMG_H+4) reads, each pixel's result is written back four
// cycles after its last window column was read (RAM read, window register,
// stage 1, stage 2), and done follows the last write. Counted from the clock
// edge that takes start to the edge at which done is first seen, a frame takes
// (IMG_W+4)*(IMG_H+4) + 6 cycles: 67606 for 256x256.
//
// The processing chain (labelling, similarity inspection with threshold T1,
// MFIG/median/averaging restoration, pixel placement) and in-place write-back
// follow the published design. T1 = 4 (majority of the eight neighbours), the
// border handling, the controller, the host port and the pipeline cut are this
// design's choices.
module denoise_top
  import denoise_pkg::*;
#(
  parameter int unsigned DATA_W = PIX_W,
  parameter int unsigned IMG_W  = 256,
  parameter int unsigned IMG_H  = 256,
  parameter int unsigned T1     = 4,
  localparam int unsigned NPIX  = IMG_W * IMG_H,
  localparam int unsigned AW    = $clog2(NPIX),
  localparam int unsigned XW    = $clog2(IMG_W + 2*BORDER),
  localparam int unsigned YW    = $clog2(IMG_H + 2*BORDER),
  localparam int unsigned CXW   = (IMG_W > 1) ? $clog2(IMG_W) : 1,
  localparam int unsigned CYW   = (IMG_H > 1) ? $clog2(IMG_H) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  input  logic              host_we,
  input  logic              host_re,
  input  logic [AW-1:0]     host_addr,
  input  logic [DATA_W-1:0] host_wdata,
  output logic [DATA_W-1:0] host_rdata
);

  typedef logic [DATA_W-1:0] pix_t;

  // ---------------------------------------------------------------- control
  typedef enum logic [1:0] {S_IDLE, S_READ, S_DRAIN} state_t;
  state_t        state;
  logic [XW-1:0] rx;          // column in the extended frame
  logic [YW-1:0] ry;          // row in the extended frame
  logic [AW:0]   wr_count;    // pixels written back in this frame
  logic          rd_issue;
  logic          last_read;

  assign rd_issue  = (state == S_READ);
  assign last_read = (rx == XW'(IMG_W + 2*BORDER - 1)) && (ry == YW'(IMG_H + 2*BORDER - 1));
  assign busy      = (state != S_IDLE);

  // Clamp an extended-frame coordinate back into the image (border replication).
  function automatic logic [CXW-1:0] clamp_x(logic [XW-1:0] x);
    if (x < XW'(BORDER))               return '0;
    else if (x >= XW'(IMG_W + BORDER)) return CXW'(IMG_W - 1);
    else                               return CXW'(x - XW'(BORDER));
  endfunction

  function automatic logic [CYW-1:0] clamp_y(logic [YW-1:0] y);
    if (y < YW'(BORDER))               return '0;
    else if (y >= YW'(IMG_H + BORDER)) return CYW'(IMG_H - 1);
    else                               return CYW'(y - YW'(BORDER));
  endfunction

  logic s2_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      rx       <= '0;
      ry       <= '0;
      wr_count <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          rx       <= '0;
          ry       <= '0;
          wr_count <= '0;
          if (start) state <= S_READ;
        end
        S_READ: begin
          if (rx == XW'(IMG_W + 2*BORDER - 1)) begin
            rx <= '0;
            ry <= ry + 1'b1;
          end else begin
            rx <= rx + 1'b1;
          end
          if (last_read) state <= S_DRAIN;
        end
        S_DRAIN: begin
          if (wr_count == (AW+1)'(NPIX)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
      if (s2_valid) wr_count <= wr_count + 1'b1;
    end
  end

  // ------------------------------------------------------------- frame RAM
  logic          ram_re, ram_we;
  logic [AW-1:0] ram_raddr, ram_waddr;
  pix_t          ram_rdata, ram_wdata;
  logic [AW-1:0] s2_addr;
  pix_t          s2_pixel;

  always_comb begin
    if (busy) begin
      ram_re    = rd_issue;
      ram_raddr = AW'(clamp_y(ry) * IMG_W + clamp_x(rx));
      ram_we    = s2_valid;
      ram_waddr = s2_addr;
      ram_wdata = s2_pixel;
    end else begin
      ram_re    = host_re;
      ram_raddr = host_addr;
      ram_we    = host_we;
      ram_waddr = host_addr;
      ram_wdata = host_wdata;
    end
  end

  frame_ram #(.DATA_W(DATA_W), .DEPTH(NPIX)) u_ram (
    .clk   (clk),
    .re    (ram_re),
    .raddr (ram_raddr),
    .rdata (ram_rdata),
    .we    (ram_we),
    .waddr (ram_waddr),
    .wdata (ram_wdata)
  );

  assign host_rdata = ram_rdata;

  logic rd_valid;   // ram_rdata holds a pixel of the extended stream
  always_ff @(posedge clk) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_issue;
  end

  // ---------------------------------------------------- block partitioning
  logic                               win_valid;
  logic [WIN-1:0][WIN-1:0][DATA_W-1:0] win;
  logic [CXW-1:0]                     win_cx;
  logic [CYW-1:0]                     win_cy;

  block_partitioner #(.DATA_W(DATA_W), .IMG_W(IMG_W), .IMG_H(IMG_H)) u_part (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (start && !busy),
    .in_valid  (rd_valid),
    .in_pixel  (ram_rdata),
    .win_valid (win_valid),
    .win       (win),
    .cx        (win_cx),
    .cy        (win_cy)
  );

  // ------------------------------------- stage 1: labelling and similarity
  label_t [WIN-1:0][WIN-1:0] labels;
  logic   [WIN-1:0][WIN-1:0] noise_free;
  logic   [NBLK-1:0]         non_noisy;

  for (genvar r = 0; r < WIN; r++) begin : g_lab_r
    for (genvar c = 0; c < WIN; c++) begin : g_lab_c
      pixel_labeler #(.DATA_W(DATA_W)) u_lab (
        .pixel      (win[r][c]),
        .label      (labels[r][c]),
        .noise_free (noise_free[r][c])
      );
    end
  end

  similarity_module u_sim (
    .labels        (labels),
    .noise_free    (noise_free),
    .t1            (4'(T1)),
    .non_noisy     (non_noisy),
    .similar_count ()
  );

  typedef struct packed {
    logic [NBLK-1:0][DATA_W-1:0] pix;         // central 3x3, P1..P9
    logic [NBLK-1:0]             non_noisy;
    logic                        noise_free;  // of the centre pixel
    logic [AW-1:0]               addr;
  } s1_t;

  s1_t  s1_d, s1_q;
  logic s1_valid;

  always_comb begin
    for (int k = 0; k < NBLK; k++) s1_d.pix[k] = win[1 + k/BLK][1 + k%BLK];
    s1_d.non_noisy  = non_noisy;
    s1_d.noise_free = noise_free[2][2];
    s1_d.addr       = AW'(win_cy * IMG_W + win_cx);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= win_valid && busy;
    s1_q <= s1_d;
  end

  // ----------------------------------- stage 2: restoration and placement
  pix_t restored, median_lo, median_hi, placed;

  restoration_module #(.DATA_W(DATA_W)) u_rest (
    .pix       (s1_q.pix),
    .non_noisy (s1_q.non_noisy),
    .restored  (restored),
    .median_lo (median_lo),
    .median_hi (median_hi)
  );

  pixel_placement #(.DATA_W(DATA_W)) u_place (
    .center_pixel (s1_q.pix[CTR]),
    .restored     (restored),
    .non_noisy    (s1_q.non_noisy[CTR]),
    .noise_free   (s1_q.noise_free),
    .out_pixel    (placed)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) s2_valid <= 1'b0;
    else        s2_valid <= s1_valid;
    s2_pixel <= placed;
    s2_addr  <= s1_q.addr;
  end

  // ----------------------------------------------------------- assertions
  // The host may not write the RAM while a frame is being processed.
  a_no_host_write_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !host_we) else $error("host write while busy");
  // The trigger-0 list carries at least as many zeros as the trigger-1 list,
  // so its median can never be the larger one.
  a_median_order: assert property (@(posedge clk) disable iff (!rst_n)
    s1_valid |-> median_lo <= median_hi) else $error("median order");
  // Exactly one write per image pixel.
  a_write_count: assert property (@(posedge clk) disable iff (!rst_n)
    s2_valid |-> wr_count < (AW+1)'(NPIX)) else $error("too many writes");

endmodule
