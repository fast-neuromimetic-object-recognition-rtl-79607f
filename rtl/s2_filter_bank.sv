// s2_filter_bank: the S2 multiply-accumulate array.
//
// Every cycle with `in_valid` it receives two C1 values (an orientation pair at
// one position) and, for each of NUM_PATCH patches, the two matching patch
// coefficients. It forms the 2*NUM_PATCH squared differences (one multiplier
// each, 640 at the paper's 320 patches) and adds them to one accumulator per
// patch. `first` restarts the accumulators with this beat; after the beat marked
// `last` the accumulators hold the squared Euclidean distance of every patch to
// the C1 region, presented on `distance` with `out_valid` for one cycle.
// Timing: a beat entering at cycle t is in the squares register at t+1 and in
// the accumulators at t+2, so `out_valid` follows the `last` beat by 2 cycles.
// The parallelism (all patches of one size, two orientations per cycle) and the
// 42-bit distance follow the paper; taking the distance squared (no square root,
// which does not change which distance is smallest) is this design's choice.
module s2_filter_bank #(
  parameter int NUM_PATCH = 320
) (
  input  logic                                         clk,
  input  logic                                         rst_n,
  input  logic                                         in_valid,
  input  logic                                         first,
  input  logic                                         last,
  input  logic [1:0][hmax_pkg::C1W-1:0]                c1_in,
  input  logic [NUM_PATCH-1:0][1:0][hmax_pkg::C1W-1:0] coef,
  output logic                                         out_valid,
  output logic [NUM_PATCH-1:0][hmax_pkg::C2W-1:0]      distance
);
  import hmax_pkg::*;
  localparam int SQW = 2*C1W + 1;

  logic [SQW-1:0] sq [NUM_PATCH];
  logic           v1, f1, l1;

  always_ff @(posedge clk) begin
    for (int p = 0; p < NUM_PATCH; p++) begin
      logic signed [C1W:0] d0, d1;
      logic signed [2*C1W+1:0] s0, s1;
      d0 = $signed({1'b0, c1_in[0]}) - $signed({1'b0, coef[p][0]});
      d1 = $signed({1'b0, c1_in[1]}) - $signed({1'b0, coef[p][1]});
      s0 = d0 * d0;
      s1 = d1 * d1;
      sq[p] <= SQW'(s0[2*C1W-1:0]) + SQW'(s1[2*C1W-1:0]);
    end
    if (v1) begin
      for (int p = 0; p < NUM_PATCH; p++)
        distance[p] <= (f1 ? '0 : distance[p]) + C2W'(sq[p]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; f1 <= 1'b0; l1 <= 1'b0; out_valid <= 1'b0;
    end else begin
      v1 <= in_valid; f1 <= first; l1 <= last && in_valid;
      out_valid <= v1 && l1;
    end
  end
endmodule
