// hmax_top: HMAX feature extractor (S1, C1, S2, C2) for 8-bit grayscale images.
//
// Pixels arrive on a valid/ready stream (raster order, IMG_W*IMG_W per image)
// into a four-image input FIFO. S1 filters each image with NUM_FILT separable
// Gabor filter sizes in two one-dimensional passes, C1 max-pools the results
// into one memory per size band, S2 compares every band with 4*NUM_PATCH
// stored patches (squared Euclidean distance) and C2 keeps the minimum
// distance of every patch over the whole image. At the end of an image the
// 4*NUM_PATCH C2 values leave on a valid/ready stream towards the host, which
// classifies them. The per-band flags let S1/C1 run up to almost one image
// ahead of S2.
// Before use the host loads the S1 kernel table (coef_*) and the S2 patch
// memory (patch_*), one 16-bit value per cycle. Status outputs expose the
// stalls and hand-overs for monitoring.
// The block structure follows the paper's block diagram; the ports and their
// protocols are this design's own.
module hmax_top #(
  parameter int IMG_W     = 128,
  parameter int NUM_FILT  = 16,
  parameter int NUM_PATCH = 320,
  localparam int NB     = NUM_FILT/2,
  localparam int NOUT   = hmax_pkg::NUM_PSIZE * NUM_PATCH,
  localparam int PDEPTH = hmax_pkg::patch_base(hmax_pkg::NUM_PSIZE),
  localparam int NB0    = hmax_pkg::band_nb(IMG_W, 0),
  localparam int MAW    = $clog2(NB0*NB0)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // pixel stream from the receive buffer
  input  logic                          pix_valid,
  output logic                          pix_ready,
  input  logic [hmax_pkg::PIX_W-1:0]    pix_data,
  // S1 kernel load: filter, kernel (0 E, 1 G, 2 O), index from centre
  input  logic                          coef_we,
  input  logic [$clog2(NUM_FILT)-1:0]   coef_filt,
  input  logic [1:0]                    coef_kern,
  input  logic [4:0]                    coef_idx,
  input  logic signed [hmax_pkg::CW-1:0] coef_data,
  // S2 patch load: word address, patch, half of the orientation pair
  input  logic                          patch_we,
  input  logic [$clog2(PDEPTH)-1:0]     patch_addr,
  input  logic [$clog2(NUM_PATCH)-1:0]  patch_idx,
  input  logic                          patch_sel,
  input  logic [hmax_pkg::C1W-1:0]      patch_data,
  // C2 result stream to the transmit buffer
  output logic                          c2_valid,
  input  logic                          c2_ready,
  output logic [$clog2(NOUT)-1:0]       c2_idx,
  output logic [hmax_pkg::C2W-1:0]      c2_data,
  output logic                          c2_last,
  // status
  output logic [NB-1:0]                 band_flags,
  output logic                          s1_stall,
  output logic                          s1_busy,
  output logic                          s2_waiting,
  output logic                          img_released,
  output logic [2:0]                    images_buffered
);
  import hmax_pkg::*;

  // ---------------- input buffer
  logic                        img_avail, img_release;
  logic [$clog2(IMG_W*IMG_W)-1:0] img_addr;
  logic [PIX_W-1:0]            img_pix;
  input_buffer #(.IMG_W(IMG_W), .SLOTS(4)) u_in (
    .clk, .rst_n, .in_valid(pix_valid), .in_ready(pix_ready), .in_pix(pix_data),
    .rd_avail(img_avail), .rd_addr(img_addr), .rd_pix(img_pix), .rd_release(img_release),
    .full_count(images_buffered));
  assign img_released = img_release;

  // ---------------- S1
  logic        s1_valid, c1_ready;
  s1_result_t  s1_res;
  logic [NB-1:0] flags, flag_set, flag_clr;
  s1_stage #(.IMG_W(IMG_W), .NUM_FILT(NUM_FILT)) u_s1 (
    .clk, .rst_n, .img_avail, .img_addr, .img_pix, .img_release,
    .coef_we, .coef_filt, .coef_kern, .coef_idx, .coef_data,
    .band_flag(flags), .c1_ready, .s1_valid, .s1_res, .stall_flag(s1_stall), .busy(s1_busy));

  // ---------------- C1 and the band memories
  logic [2:0]     c1_band;
  logic [MAW-1:0] c1_addr;
  logic           c1_we;
  c1_word_t       c1_wdata, c1_rdata;
  c1_stage #(.IMG_W(IMG_W), .NUM_FILT(NUM_FILT)) u_c1 (
    .clk, .rst_n, .s1_valid, .s1_res, .mem_band(c1_band), .mem_addr(c1_addr),
    .mem_we(c1_we), .mem_wdata(c1_wdata), .mem_rdata(c1_rdata), .flag_set, .ready(c1_ready));

  logic [2:0]     s2_band;
  logic [MAW-1:0] s2_addr;
  c1_word_t       s2_rdata;
  c1_word_t       band_rdata [NB];

  for (genvar b = 0; b < NB; b++) begin : g_band
    localparam int DEPTH = band_nb(IMG_W, b) * band_nb(IMG_W, b);
    localparam int AWB   = $clog2(DEPTH);
    c1_band_mem #(.DEPTH(DEPTH)) u_mem (
      .clk, .rst_n, .flag(flags[b]), .flag_set(flag_set[b]), .flag_clr(flag_clr[b]),
      .c1_addr(c1_addr[AWB-1:0]), .c1_we(c1_we && c1_band == 3'(b)), .c1_wdata,
      .s2_addr(s2_addr[AWB-1:0]), .rdata(band_rdata[b]));
  end
  assign band_flags = flags;

  always_comb begin
    c1_rdata = '0;
    s2_rdata = '0;
    for (int b = 0; b < NB; b++) begin
      if (int'(c1_band) == b) c1_rdata = band_rdata[b];
      if (int'(s2_band) == b) s2_rdata = band_rdata[b];   // S2 demultiplexer
    end
  end

  // ---------------- S2
  logic [$clog2(PDEPTH)-1:0]            pm_raddr;
  logic [NUM_PATCH-1:0][1:0][C1W-1:0]   pm_rdata;
  s2_patch_mem #(.NUM_PATCH(NUM_PATCH), .DEPTH(PDEPTH)) u_pm (
    .clk, .we(patch_we), .waddr(patch_addr), .wpatch(patch_idx), .wsel(patch_sel),
    .wdata(patch_data), .raddr(pm_raddr), .rdata(pm_rdata));

  logic                               upd_valid, img_done, c2_busy;
  logic [1:0]                         upd_k;
  logic [NUM_PATCH-1:0][C2W-1:0]      upd_dist;
  s2_stage #(.IMG_W(IMG_W), .NUM_FILT(NUM_FILT), .NUM_PATCH(NUM_PATCH)) u_s2 (
    .clk, .rst_n, .band_flag(flags), .flag_clr, .c1_band(s2_band), .c1_addr(s2_addr),
    .c1_rdata(s2_rdata), .pm_raddr, .pm_rdata, .upd_valid, .upd_k, .upd_dist,
    .img_done, .c2_busy, .waiting(s2_waiting));

  // ---------------- C2
  c2_stage #(.NUM_PATCH(NUM_PATCH)) u_c2 (
    .clk, .rst_n, .upd_valid, .upd_k, .upd_dist, .img_done,
    .out_valid(c2_valid), .out_ready(c2_ready), .out_idx(c2_idx), .out_data(c2_data),
    .out_last(c2_last), .busy(c2_busy));
endmodule
