// c1_stage: C1 local maximum, computed on the S1 stream as it arrives.
//
// Band b (filters 2b and 2b+1, pooling period D = 4 + b) is pooled on the grid
// of the larger filter, M = IMG_W - d(2b+1) + 1 positions per side; the smaller
// filter's map, two positions wider, is centred on it (offset 1). That grid is
// cut into nb = M / D non-overlapping D x D blocks (a right/bottom remainder
// smaller than D is dropped). For every block the stage keeps the maximum over
// both filter sizes and all four orientations separately:
//   * a running horizontal max over D columns,
//   * a line of nb partial block maxima across the D rows of a block row,
//   * a read-modify-write of the band memory for the second filter size.
// When the last block of the larger filter is complete (S1 results beyond the
// last block are ignored, so this comes slightly before S1's last result for
// the band) the stage makes one pass over
// the band memory, replacing block (i,j) by the max of blocks (i,j), (i,j+1),
// (i+1,j), (i+1,j+1) (5 cycles each: 4 reads, 1 write) for i,j < nb, where a
// neighbour past the last row or column is replaced by the block itself. That
// gives max pooling over 2D x 2D subsampled every D, as the paper describes,
// with nb x nb units per band, the count the paper's C1 and S2 size formulas
// use (the units of the last row and column pool over D x 2D, 2D x D or D x D).
// It then pulses flag_set[b], handing the memory to S2. `ready` is low during
// that pass. C1 result (i,j) of band b ends at address i*nb + j.
// Memory port: combinational read of the word at mem_addr in the band selected
// by mem_band; write at the clock edge.
// Max over both scales and the two-step block pooling follow the paper; the
// centring of the smaller map, the dropped remainder and the in-place pass are
// this design's own.
module c1_stage #(
  parameter int IMG_W    = 128,
  parameter int NUM_FILT = 16,
  localparam int NB   = NUM_FILT/2,
  localparam int NB0  = hmax_pkg::band_nb(IMG_W, 0),
  localparam int MAW  = $clog2(NB0*NB0)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  s1_valid,
  input  hmax_pkg::s1_result_t  s1_res,
  output logic [2:0]            mem_band,
  output logic [MAW-1:0]        mem_addr,
  output logic                  mem_we,
  output hmax_pkg::c1_word_t    mem_wdata,
  input  hmax_pkg::c1_word_t    mem_rdata,
  output logic [NB-1:0]         flag_set,
  output logic                  ready
);
  import hmax_pkg::*;

  typedef enum logic [0:0] {C_STREAM, C_POOL} cstate_t;
  cstate_t state;

  c1_word_t acc [NB0];
  c1_word_t hmax_r, pool_tmp;
  logic [2:0] cur_band;            // band being pooled
  logic [COORD_W-1:0] pi, pj;
  logic [2:0] phase;

  function automatic c1_word_t wmax(input c1_word_t a, input c1_word_t b);
    c1_word_t m;
    for (int o = 0; o < NORIENT; o++) m[o] = (a[o] > b[o]) ? a[o] : b[o];
    return m;
  endfunction

  // per-band geometry of the incoming result (constant divisors per band)
  int nb, dl, rp, cp, br, bc, pr, pc;
  logic in_rng;
  always_comb begin
    int off;
    nb = 1; dl = 4; br = 0; bc = 0; pr = 0; pc = 0;
    off = s1_res.scale ? 0 : 1;
    rp  = int'(s1_res.row) - off;
    cp  = int'(s1_res.col) - off;
    for (int b = 0; b < NB; b++) begin
      if (int'(s1_res.band) == b) begin
        nb = band_nb(IMG_W, b);
        dl = band_delta(b);
        if (rp >= 0) begin br = rp / band_delta(b); pr = rp % band_delta(b); end
        if (cp >= 0) begin bc = cp / band_delta(b); pc = cp % band_delta(b); end
      end
    end
    in_rng = (rp >= 0) && (cp >= 0) && (br < nb) && (bc < nb);
  end

  int pnb;
  always_comb begin
    pnb = 1;
    for (int b = 0; b < NB; b++) if (int'(cur_band) == b) pnb = band_nb(IMG_W, b);
  end

  // streaming datapath (combinational part)
  c1_word_t hm, am;
  logic     blk_col_end, blk_row_end;
  always_comb begin
    hm          = (pc == 0) ? s1_res.mag : wmax(hmax_r, s1_res.mag);
    am          = (pr == 0) ? hm : wmax(acc[bc], hm);
    blk_col_end = s1_valid && in_rng && (pc == dl - 1);
    blk_row_end = blk_col_end && (pr == dl - 1);
  end

  // memory port mux
  int i2, j2;
  always_comb begin
    i2 = int'(pi) + ((phase == 3'd2 || phase == 3'd3) ? 1 : 0);
    j2 = int'(pj) + ((phase == 3'd1 || phase == 3'd3) ? 1 : 0);
    if (i2 > pnb - 1) i2 = pnb - 1;   // last row / column: pool the blocks that exist
    if (j2 > pnb - 1) j2 = pnb - 1;
    if (state == C_STREAM) begin
      mem_band  = s1_res.band;
      mem_addr  = MAW'(br * nb + bc);
      mem_we    = blk_row_end;
      mem_wdata = s1_res.scale ? wmax(am, mem_rdata) : am;
    end else begin
      mem_band  = cur_band;
      mem_addr  = MAW'(i2 * pnb + j2);
      mem_we    = (phase == 3'd4);
      mem_wdata = pool_tmp;
    end
  end

  assign ready = (state == C_STREAM);

  always_ff @(posedge clk) begin
    if (state == C_STREAM && s1_valid && in_rng) begin
      hmax_r <= hm;
      if (blk_col_end) acc[bc] <= am;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_STREAM; flag_set <= '0; cur_band <= '0;
      pi <= '0; pj <= '0; phase <= '0; pool_tmp <= '0;
    end else begin
      flag_set <= '0;
      unique case (state)
        C_STREAM: if (s1_valid && s1_res.last && s1_res.scale) begin
          state <= C_POOL; cur_band <= s1_res.band; pi <= '0; pj <= '0; phase <= '0;
        end
        C_POOL: begin
          if (phase == 3'd0)      pool_tmp <= mem_rdata;
          else if (phase < 3'd4)  pool_tmp <= wmax(pool_tmp, mem_rdata);
          if (phase == 3'd4) begin
            phase <= '0;
            if (int'(pj) == pnb - 1) begin
              pj <= '0;
              if (int'(pi) == pnb - 1) begin
                state <= C_STREAM;
                flag_set[cur_band] <= 1'b1;
              end else pi <= pi + 1'b1;
            end else pj <= pj + 1'b1;
          end else phase <= phase + 1'b1;
        end
        default: state <= C_STREAM;
      endcase
    end
  end

  a_stream_only_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
                                             s1_valid |-> state == C_STREAM);
endmodule
