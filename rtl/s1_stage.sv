// s1_stage: S1 layer with its control module.
//
// For each image and each of NUM_FILT filter sizes f (side d = 7 + 2f) the
// stage makes two passes of its one-dimensional filter bank:
//   pass 1 (vertical): reads the image column by column from the input buffer
//     (mux input 0) and writes, for every position with full vertical support,
//     G, E and O filtered columns and the column sum of squared pixels into the
//     intermediate RAM;
//   pass 2 (horizontal): reads the intermediate RAM row by row (mux input 1)
//     and forms F0 = E(x)G(y), F90 = G(x)E(y), F45 = EE + OO, F135 = EE - OO and
//     the support energy; these are normalised and streamed to C1 in raster
//     order, only where the filter has full support.
// Every pass scans all IMG_W*IMG_W positions, one per cycle, so one image
// takes about 2 * IMG_W^2 * NUM_FILT cycles, the paper's S1 time.
// Before pass 2 of a filter the stage waits until the band's C1 memory is not
// held by S2 (band_flag low) and C1 is ready; pass 1 is always done first, so
// the stall only delays the second pass. The image is released from the input
// buffer as soon as the first pass of the largest filter has finished.
// Interfaces: combinational image read; coefficient write port into the LUT;
// s1_valid/s1_res stream with no back-pressure (C1 always accepts).
// The pass order, kernel pairing and scheduling rules follow the paper; the
// scan orders, the choice of vertical first and the 3-cycle bank and
// ROOT_W+S1W+2 cycle normaliser latencies are this design's own.
module s1_stage #(
  parameter int IMG_W    = 128,
  parameter int NUM_FILT = 16,
  localparam int NB = NUM_FILT/2,
  localparam int AW = $clog2(IMG_W*IMG_W),
  localparam int FW = $clog2(NUM_FILT)
) (
  input  logic clk,
  input  logic rst_n,
  // input buffer
  input  logic                        img_avail,
  output logic [AW-1:0]               img_addr,
  input  logic [hmax_pkg::PIX_W-1:0]  img_pix,
  output logic                        img_release,
  // filter coefficient load
  input  logic                        coef_we,
  input  logic [FW-1:0]               coef_filt,
  input  logic [1:0]                  coef_kern,
  input  logic [4:0]                  coef_idx,
  input  logic signed [hmax_pkg::CW-1:0] coef_data,
  // C1 hand-shake
  input  logic [NB-1:0]               band_flag,
  input  logic                        c1_ready,
  // results
  output logic                        s1_valid,
  output hmax_pkg::s1_result_t        s1_res,
  // status
  output logic                        stall_flag,
  output logic                        busy
);
  import hmax_pkg::*;
  localparam int BANK_LAT = 3;
  localparam int NORM_LAT = ROOT_W + S1W + 2;

  typedef enum logic [2:0] {S_IDLE, S_P1, S_P1_DRAIN, S_WAIT, S_P2, S_P2_DRAIN} state_t;
  state_t state;

  logic [FW-1:0]       f;
  logic [COORD_W-1:0]  r, c;
  logic [5:0]          drain;
  logic [COORD_W-1:0]  d, half;
  assign d    = COORD_W'(filt_diam(int'(f)));
  assign half = COORD_W'(3 + int'(f));
  wire [2:0] band = 3'(f >> 1);

  // ---------------- coefficient LUT
  logic signed [2:0][HALF-1:0][CW-1:0] kcoef;
  s1_coeff_lut #(.NUM_FILT(NUM_FILT)) u_lut (
    .clk, .wr_en(coef_we), .wr_filt(coef_filt), .wr_kern(coef_kern),
    .wr_idx(coef_idx), .wr_data(coef_data), .rd_filt(f), .rd_coef(kcoef));

  // ---------------- intermediate RAM
  logic                   im_we;
  logic [AW-1:0]          im_waddr, im_raddr;
  logic [3:0][IW-1:0]     im_wdata, im_rdata;
  s1_intermediate_ram #(.IMG_W(IMG_W)) u_im (
    .clk, .we(im_we), .waddr(im_waddr), .wdata(im_wdata), .raddr(im_raddr), .rdata(im_rdata));

  // ---------------- filter bank with its input mux
  wire pass2   = (state == S_P2) || (state == S_P2_DRAIN);
  wire issuing = (state == S_P1) || (state == S_P2);
  logic signed [3:0][IW-1:0]           lane_in;
  logic        [IW-1:0]                sq_in;
  logic signed [3:0][HALF-1:0][CW-1:0] lane_coef;
  logic [3:0]                          lane_odd;
  logic                                bank_ov;
  logic signed [3:0][ACC_W-1:0]        lane_out;
  logic        [EN_W-1:0]              sq_out;

  assign img_addr = AW'(r * IMG_W + c);
  assign im_raddr = AW'(r * IMG_W + c);

  always_comb begin
    if (!pass2) begin                 // mux input 0: image, vertical pass
      for (int l = 0; l < 4; l++) lane_in[l] = IW'(img_pix);
      sq_in     = IW'(img_pix);
      lane_coef = {kcoef[0], kcoef[2], kcoef[0], kcoef[1]};   // lanes 3..0: E, O, E, G
      lane_odd  = 4'b0100;
    end else begin                    // mux input 1: intermediate, horizontal pass
      lane_in   = {im_rdata[2], im_rdata[1], im_rdata[1], im_rdata[0]};  // O, E, E, G
      sq_in     = im_rdata[3];
      lane_coef = {kcoef[2], kcoef[0], kcoef[1], kcoef[0]};   // lanes 3..0: O, E, G, E
      lane_odd  = 4'b1000;
    end
  end

  s1_filter_bank u_bank (
    .clk, .rst_n, .in_valid(issuing), .lane_in, .sq_in, .sq_mode(!pass2),
    .half(half[4:0]), .coef(lane_coef), .odd(lane_odd),
    .out_valid(bank_ov), .lane_out, .sq_out);

  // position tags travelling with the bank pipeline
  logic [COORD_W-1:0] tr [BANK_LAT], tc [BANK_LAT];
  always_ff @(posedge clk) begin
    tr[0] <= r; tc[0] <= c;
    for (int i = 1; i < BANK_LAT; i++) begin tr[i] <= tr[i-1]; tc[i] <= tc[i-1]; end
  end
  wire [COORD_W-1:0] orow = tr[BANK_LAT-1];
  wire [COORD_W-1:0] ocol = tc[BANK_LAT-1];

  function automatic logic [IW-1:0] sat_iw(input logic signed [ACC_W-1:0] x);
    if (x >  $signed(ACC_W'((1 << (IW-1)) - 1))) return IW'((1 << (IW-1)) - 1);
    if (x < -$signed(ACC_W'(1 << (IW-1))))       return IW'(1 << (IW-1));
    return x[IW-1:0];
  endfunction

  // pass 1 write-back: valid once the vertical window is full
  always_comb begin
    im_we    = bank_ov && !pass2 && (orow >= d - 1'b1);
    im_waddr = AW'((int'(orow) - int'(d) + 1) * IMG_W + int'(ocol));
    for (int l = 0; l < 3; l++) im_wdata[l] = sat_iw(lane_out[l]);
    im_wdata[3] = (sq_out > EN_W'((1 << (IW-1)) - 1)) ? IW'((1 << (IW-1)) - 1) : IW'(sq_out);
  end

  // pass 2: combine orientations and normalise
  logic                         nv;
  logic signed [3:0][ACC_W-1:0] resp;
  assign nv = bank_ov && pass2 && (ocol >= d - 1'b1) && (int'(orow) <= IMG_W - int'(d));
  assign resp[0] = lane_out[0];
  assign resp[1] = lane_out[1];
  assign resp[2] = lane_out[2] + lane_out[3];
  assign resp[3] = lane_out[2] - lane_out[3];

  s1_result_t tag_in, tags [NORM_LAT];
  always_comb begin
    tag_in       = '0;
    tag_in.band  = band;
    tag_in.scale = f[0];
    tag_in.row   = orow;
    tag_in.col   = ocol - (d - 1'b1);
    tag_in.last  = (int'(orow) == IMG_W - int'(d)) && (ocol == COORD_W'(IMG_W - 1));
  end
  always_ff @(posedge clk) begin
    tags[0] <= tag_in;
    for (int i = 1; i < NORM_LAT; i++) tags[i] <= tags[i-1];
  end

  logic                       n_ov;
  logic [3:0][S1W-1:0]        n_mag;
  s1_normalize u_norm (.clk, .rst_n, .in_valid(nv), .resp, .energy(sq_out),
                       .out_valid(n_ov), .mag(n_mag));

  always_comb begin
    s1_res     = tags[NORM_LAT-1];
    s1_res.mag = n_mag;
  end
  assign s1_valid = n_ov;

  // ---------------- control module
  wire scan_end = (r == COORD_W'(IMG_W-1)) && (c == COORD_W'(IMG_W-1));
  assign stall_flag = (state == S_WAIT) && band_flag[band];
  assign busy       = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; f <= '0; r <= '0; c <= '0; drain <= '0; img_release <= 1'b0;
    end else begin
      img_release <= 1'b0;
      unique case (state)
        S_IDLE: if (img_avail) begin
          state <= S_P1; f <= '0; r <= '0; c <= '0;
        end
        S_P1: begin                   // column-major scan
          if (r == COORD_W'(IMG_W-1)) begin r <= '0; c <= c + 1'b1; end
          else r <= r + 1'b1;
          if (scan_end) begin state <= S_P1_DRAIN; drain <= 6'(BANK_LAT); end
        end
        S_P1_DRAIN: begin
          if (drain == 0) begin
            state <= S_WAIT;
            if (f == FW'(NUM_FILT-1)) img_release <= 1'b1;
          end else drain <= drain - 1'b1;
        end
        S_WAIT: if (!band_flag[band] && c1_ready) begin
          state <= S_P2; r <= '0; c <= '0;
        end
        S_P2: begin                   // row-major scan
          if (c == COORD_W'(IMG_W-1)) begin c <= '0; r <= r + 1'b1; end
          else c <= c + 1'b1;
          if (scan_end) begin state <= S_P2_DRAIN; drain <= 6'(BANK_LAT + NORM_LAT); end
        end
        S_P2_DRAIN: begin
          if (drain == 0) begin
            r <= '0; c <= '0;
            if (f == FW'(NUM_FILT-1)) begin state <= S_IDLE; f <= '0; end
            else begin state <= S_P1; f <= f + 1'b1; end
          end else drain <= drain - 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_write_when_s2_owns: assert property (@(posedge clk) disable iff (!rst_n)
                                            s1_valid |-> !band_flag[s1_res.band]);
endmodule
