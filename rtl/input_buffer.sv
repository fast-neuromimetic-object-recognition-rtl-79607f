// input_buffer: FIFO of up to SLOTS complete grayscale images.
//
// The receive side accepts one 8-bit pixel per cycle (valid/ready), raster
// order, IMG_W*IMG_W pixels per image. When the last pixel of an image is
// written the image becomes readable. The S1 stage reads the oldest complete
// image at any address (combinational read, `rd_pix` follows `rd_addr` in the
// same cycle) and frees its slot with a one-cycle `rd_release` pulse, after
// which the next image, if any, is readable on the following cycle.
// Four slots of 8-bit pixels follow the paper; the handshake, raster order and
// release pulse are this design's own choices.
module input_buffer #(
  parameter int IMG_W = 128,
  parameter int SLOTS = 4,
  localparam int NPIX = IMG_W*IMG_W,
  localparam int AW   = $clog2(NPIX)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [hmax_pkg::PIX_W-1:0] in_pix,
  output logic                      rd_avail,
  input  logic [AW-1:0]             rd_addr,
  output logic [hmax_pkg::PIX_W-1:0] rd_pix,
  input  logic                      rd_release,
  output logic [$clog2(SLOTS+1)-1:0] full_count
);
  import hmax_pkg::*;
  localparam int SW = $clog2(SLOTS);

  logic [PIX_W-1:0] mem [SLOTS*NPIX];
  logic [SW-1:0]    rd_slot, wr_slot;
  logic [AW-1:0]    wr_addr;
  logic [$clog2(SLOTS+1)-1:0] full;

  assign full_count = full;
  assign in_ready   = (full < SLOTS[$clog2(SLOTS+1)-1:0]);
  assign rd_avail   = (full != 0);
  assign rd_pix     = mem[{rd_slot, rd_addr}];

  wire wr_done = in_valid && in_ready && (wr_addr == AW'(NPIX-1));

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[{wr_slot, wr_addr}] <= in_pix;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_slot <= '0; wr_slot <= '0; wr_addr <= '0; full <= '0;
    end else begin
      if (in_valid && in_ready) begin
        wr_addr <= wr_done ? '0 : wr_addr + 1'b1;
        if (wr_done) wr_slot <= wr_slot + 1'b1;
      end
      if (rd_release && rd_avail) rd_slot <= rd_slot + 1'b1;
      full <= full + {{($bits(full)-1){1'b0}}, wr_done} - {{($bits(full)-1){1'b0}}, rd_release && rd_avail};
    end
  end

  a_release_when_avail: assert property (@(posedge clk) disable iff (!rst_n) rd_release |-> rd_avail);
endmodule
