// s2_stage: S2 layer with its control module and the C1 read demultiplexer.
//
// For each band b = 0..NB-1 in turn, the stage waits until C1 has set the
// band's flag, then for each patch size k = 0..3 (side s = 4, 8, 12, 16) whose
// patch fits in the band's valid C1 grid (g = nb units per side) it visits
// every location (x, y), 0 <= x, y <= g - s, in raster order. At each location
// it streams the s*s positions of the patch, two orientation-pair beats per
// position, to the S2 filter bank: 2*kappa cycles per location, one C1 read and
// one patch-memory word per cycle, so a band takes sum_k (g-s+1)^2 * 2*kappa
// cycles, the paper's S2 time formula. Each finished location gives NUM_PATCH distances
// that go to C2 (upd_valid / upd_k / upd_dist). When the band is done the stage
// clears the band flag (giving the memory back to C1); after the last band it
// pulses img_done so C2 sends out the image's results. Before starting band 0
// of a new image it waits until C2 has finished sending the previous results.
// The processing order (size band, then patch size, then location, all patches
// of a size in parallel, two orientations per cycle) and the flag protocol
// follow the paper; the position/orientation order inside a patch and the
// pipeline (C1 read combinational, patch word one cycle later, bank 2 cycles)
// are this design's own.
module s2_stage #(
  parameter int IMG_W     = 128,
  parameter int NUM_FILT  = 16,
  parameter int NUM_PATCH = 320,
  localparam int NB   = NUM_FILT/2,
  localparam int NB0  = hmax_pkg::band_nb(IMG_W, 0),
  localparam int MAW  = $clog2(NB0*NB0),
  localparam int PDEPTH = hmax_pkg::patch_base(hmax_pkg::NUM_PSIZE),
  localparam int PAW  = $clog2(PDEPTH)
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  input  logic [NB-1:0]                           band_flag,
  output logic [NB-1:0]                           flag_clr,
  // C1 demultiplexer
  output logic [2:0]                              c1_band,
  output logic [MAW-1:0]                          c1_addr,
  input  hmax_pkg::c1_word_t                      c1_rdata,
  // patch coefficients
  output logic [PAW-1:0]                          pm_raddr,
  input  logic [NUM_PATCH-1:0][1:0][hmax_pkg::C1W-1:0] pm_rdata,
  // C2
  output logic                                    upd_valid,
  output logic [1:0]                              upd_k,
  output logic [NUM_PATCH-1:0][hmax_pkg::C2W-1:0] upd_dist,
  output logic                                    img_done,
  input  logic                                    c2_busy,
  // status
  output logic                                    waiting
);
  import hmax_pkg::*;

  typedef enum logic [1:0] {W_BAND, W_RUN, W_DRAIN} s2state_t;
  s2state_t state;

  logic [2:0]         b;
  logic [1:0]         k;
  logic [COORD_W-1:0] x, y;
  logic [4:0]         px, py;
  logic               op;
  logic [3:0]         drain;

  // geometry of the current band / patch size
  int nb, g, s;
  always_comb begin
    nb = 2;
    for (int i = 0; i < NB; i++) if (int'(b) == i) nb = band_nb(IMG_W, i);
    g = nb;
    s = patch_side(int'(k));
  end

  // first patch size at or after kk that fits the band
  function automatic logic fits(input int kk, input int gg);
    return (kk < NUM_PSIZE) && (patch_side(kk) <= gg);
  endfunction

  wire run       = (state == W_RUN);
  wire beat_last = (int'(py) == s-1) && (int'(px) == s-1) && op;

  assign c1_band  = b;
  assign c1_addr  = MAW'((int'(y) + int'(py)) * nb + int'(x) + int'(px));
  assign pm_raddr = PAW'(patch_base(int'(k)) + 2*(int'(py)*s + int'(px)) + int'(op));
  assign waiting  = (state == W_BAND) && !band_flag[b];

  // pipeline: issue (t) -> C1 pair, patch word, tags (t+1) -> bank (t+3)
  logic                  va, fa, la;
  logic [1:0]            ka, kb, kc;
  logic [1:0][C1W-1:0]   c1_pair;
  always_ff @(posedge clk) begin
    c1_pair <= op ? {c1_rdata[3], c1_rdata[2]} : {c1_rdata[1], c1_rdata[0]};
    fa <= (py == 0) && (px == 0) && !op;
    la <= beat_last;
    ka <= k; kb <= ka; kc <= kb;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) va <= 1'b0;
    else        va <= run;
  end

  s2_filter_bank #(.NUM_PATCH(NUM_PATCH)) u_bank (
    .clk, .rst_n, .in_valid(va), .first(fa), .last(la), .c1_in(c1_pair),
    .coef(pm_rdata), .out_valid(upd_valid), .distance(upd_dist));
  assign upd_k = kc;

  // control module
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= W_BAND; b <= '0; k <= '0; x <= '0; y <= '0; px <= '0; py <= '0; op <= 1'b0;
      drain <= '0; flag_clr <= '0; img_done <= 1'b0;
    end else begin
      flag_clr <= '0;
      img_done <= 1'b0;
      unique case (state)
        W_BAND: if (band_flag[b] && !(b == 3'd0 && c2_busy)) begin
          x <= '0; y <= '0; px <= '0; py <= '0; op <= 1'b0; k <= '0;
          if (fits(0, g)) state <= W_RUN;
          else begin state <= W_DRAIN; drain <= 4'd6; end
        end
        W_RUN: begin
          op <= !op;
          if (op) begin
            if (int'(px) == s-1) begin
              px <= '0;
              if (int'(py) == s-1) begin
                py <= '0;
                if (int'(x) == g-s) begin
                  x <= '0;
                  if (int'(y) == g-s) begin
                    y <= '0;
                    if (fits(int'(k)+1, g)) k <= k + 1'b1;
                    else begin state <= W_DRAIN; drain <= 4'd6; end
                  end else y <= y + 1'b1;
                end else x <= x + 1'b1;
              end else py <= py + 1'b1;
            end else px <= px + 1'b1;
          end
        end
        W_DRAIN: begin
          if (drain == 0) begin
            flag_clr[b] <= 1'b1;
            state <= W_BAND;
            if (int'(b) == NB-1) begin b <= '0; img_done <= 1'b1; end
            else b <= b + 1'b1;
          end else drain <= drain - 1'b1;
        end
        default: state <= W_BAND;
      endcase
    end
  end

  a_read_only_owned: assert property (@(posedge clk) disable iff (!rst_n) run |-> band_flag[b]);
endmodule
