// s1_filter_bank: the S1 one-dimensional filter bank.
//
// Four FIR lanes and one energy lane, each fed one sample per cycle. Every lane
// keeps the last MAX_D samples in a shift register and applies a symmetric
// kernel of side 2*half+1 (half = 3..18) given as its centre-to-edge half:
// mirrored taps are first added (even kernel) or subtracted (odd kernel), so a
// lane needs only HALF = 19 multipliers for a 37-tap filter. With the squarer
// of the energy lane that is 4*19 + 1 = 77 multipliers, the S1 count the paper
// reports. The energy lane squares its input when `sq_mode` is set (first
// pass, raw pixels) and passes it unchanged otherwise (second pass, row sums of
// squares), then sums the last 2*half+1 values: the l2-norm support sum.
//
// The result for the window whose newest sample entered with `in_valid` at
// cycle t appears with `out_valid` at cycle t+3 (shift, multiply, add stages).
// Kernel sample order: the newest sample is at offset +half from the centre,
// so an odd kernel gives sum_i O[i]*(x[c+i] - x[c-i]).
// The folding of symmetric taps follows the paper; pipeline depth and widths
// are this design's own.
module s1_filter_bank #(
  parameter int HALF  = hmax_pkg::HALF,
  parameter int MAX_D = hmax_pkg::MAX_D
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic signed [3:0][hmax_pkg::IW-1:0]   lane_in,
  input  logic        [hmax_pkg::IW-1:0]        sq_in,
  input  logic                                  sq_mode,
  input  logic [4:0]                            half,
  input  logic signed [3:0][HALF-1:0][hmax_pkg::CW-1:0] coef,
  input  logic [3:0]                            odd,
  output logic                                  out_valid,
  output logic signed [3:0][hmax_pkg::ACC_W-1:0] lane_out,
  output logic        [hmax_pkg::EN_W-1:0]      sq_out
);
  import hmax_pkg::*;
  localparam int PW = IW + 1 + CW;   // product width

  logic signed [IW-1:0] sr [4][MAX_D];
  logic        [IW-1:0] sq_sr [MAX_D];
  logic v0, v1;
  logic signed [PW-1:0] prod [4][HALF];
  logic        [EN_W-1:0] en1;
  logic [5:0]            h6;
  assign h6 = {1'b0, half};

  // the one squarer of the bank (first pass: raw pixels)
  logic [2*PIX_W-1:0] pix_sq;
  assign pix_sq = sq_in[PIX_W-1:0] * sq_in[PIX_W-1:0];

  // stage 0: shift the new sample in
  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int l = 0; l < 4; l++) begin
        sr[l][0] <= lane_in[l];
        for (int i = 1; i < MAX_D; i++) sr[l][i] <= sr[l][i-1];
      end
      sq_sr[0] <= sq_mode ? IW'(pix_sq) : sq_in;
      for (int i = 1; i < MAX_D; i++) sq_sr[i] <= sq_sr[i-1];
    end
  end

  // stage 1: pre-add mirrored taps and multiply; sum the energy window
  always_ff @(posedge clk) begin
    logic [EN_W-1:0] e;
    for (int l = 0; l < 4; l++) begin
      for (int i = 0; i < HALF; i++) begin
        logic signed [IW:0] pre;
        if (i == 0)
          pre = odd[l] ? '0 : (IW+1)'(sr[l][h6]);
        else if (i <= int'(half))
          pre = odd[l] ? (IW+1)'(sr[l][int'(half)-i]) - (IW+1)'(sr[l][int'(half)+i])
                       : (IW+1)'(sr[l][int'(half)-i]) + (IW+1)'(sr[l][int'(half)+i]);
        else
          pre = '0;
        prod[l][i] <= pre * $signed(coef[l][i]);
      end
    end
    e = '0;
    for (int i = 0; i < MAX_D; i++)
      if (i <= 2*int'(half)) e += EN_W'(sq_sr[i]);
    en1 <= e;
  end

  // stage 2: adder tree
  always_ff @(posedge clk) begin
    for (int l = 0; l < 4; l++) begin
      logic signed [ACC_W-1:0] s;
      s = '0;
      for (int i = 0; i < HALF; i++) s += ACC_W'(prod[l][i]);
      lane_out[l] <= s;
    end
    sq_out <= en1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0 <= 1'b0; v1 <= 1'b0; out_valid <= 1'b0;
    end else begin
      v0 <= in_valid; v1 <= v0; out_valid <= v1;
    end
  end

  a_half_range: assert property (@(posedge clk) disable iff (!rst_n)
                                 in_valid |-> (int'(half) < HALF && 2*int'(half) < MAX_D));
endmodule
