// s1_normalize: l2 normalisation of the four S1 orientation responses.
//
// Input, one per cycle: four signed filter responses and the unsigned sum of
// squared pixels under the filter support. Output: for each orientation
//   mag = min(|resp| / isqrt(energy), 2^16-1),  and 0 when isqrt(energy) = 0,
// all divisions truncating. The square root is computed one result bit per
// pipeline stage (ROOT_W stages, shift-and-add only, no multipliers) and each
// division one quotient bit per stage (S1W stages, restoring division), so the
// unit accepts a new input every cycle and its latency is LAT = ROOT_W + S1W + 2
// cycles. The sign is dropped as the paper prescribes (only the magnitude
// goes to C1); normalising by the l2 norm of the support follows the paper,
// while the integer rounding and saturation are this design's own.
module s1_normalize (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic signed [3:0][hmax_pkg::ACC_W-1:0] resp,
  input  logic        [hmax_pkg::EN_W-1:0]       energy,
  output logic                                   out_valid,
  output logic        [3:0][hmax_pkg::S1W-1:0]   mag
);
  import hmax_pkg::*;
  localparam int RS  = ROOT_W;       // sqrt stages
  localparam int DS  = S1W;          // division stages
  localparam int LAT = RS + DS + 2;
  localparam int MW  = ACC_W;        // magnitude width

  // ---- square root pipeline: stage s decides root bit RS-1-s
  logic [EN_W-1:0]      sq_rad  [RS+1];
  logic [ROOT_W-1:0]    sq_root [RS+1];
  logic [2*ROOT_W:0]    sq_sqr  [RS+1];   // root^2
  logic [3:0][MW-1:0]   sq_mag  [RS+1];

  always_ff @(posedge clk) begin
    for (int o = 0; o < 4; o++)
      sq_mag[0][o] <= resp[o][ACC_W-1] ? MW'(-resp[o]) : MW'(resp[o]);
    sq_rad[0]  <= energy;
    sq_root[0] <= '0;
    sq_sqr[0]  <= '0;
    for (int s = 0; s < RS; s++) begin
      int b;
      logic [2*ROOT_W+1:0] t;
      b = RS - 1 - s;
      t = (2*ROOT_W+2)'(sq_sqr[s]) + ((2*ROOT_W+2)'(sq_root[s]) << (b+1)) + ((2*ROOT_W+2)'(1) << (2*b));
      if (t <= (2*ROOT_W+2)'(sq_rad[s])) begin
        sq_root[s+1] <= sq_root[s] | (ROOT_W'(1) << b);
        sq_sqr[s+1]  <= t[2*ROOT_W:0];
      end else begin
        sq_root[s+1] <= sq_root[s];
        sq_sqr[s+1]  <= sq_sqr[s];
      end
      sq_rad[s+1] <= sq_rad[s];
      sq_mag[s+1] <= sq_mag[s];
    end
  end

  // ---- overflow / zero check, then division pipeline: stage s decides quotient bit DS-1-s
  logic [ROOT_W-1:0]        dv_den [DS+1];
  logic [3:0][MW-1:0]       dv_rem [DS+1];
  logic [3:0][S1W-1:0]      dv_q   [DS+1];
  logic [3:0]               dv_sat [DS+1];

  always_ff @(posedge clk) begin
    dv_den[0] <= sq_root[RS];
    for (int o = 0; o < 4; o++) begin
      dv_rem[0][o] <= sq_mag[RS][o];
      dv_q[0][o]   <= '0;
      // quotient would need more than S1W bits, or the support is all zero
      dv_sat[0][o] <= (sq_root[RS] == '0) ? 1'b0
                    : ((MW+1)'(sq_mag[RS][o]) >= ((MW+1)'(sq_root[RS]) << DS));
    end
    for (int s = 0; s < DS; s++) begin
      int b;
      b = DS - 1 - s;
      dv_den[s+1] <= dv_den[s];
      dv_sat[s+1] <= dv_sat[s];
      for (int o = 0; o < 4; o++) begin
        logic [MW:0] d;
        d = (MW+1)'(dv_den[s]) << b;
        if (dv_den[s] != '0 && (MW+1)'(dv_rem[s][o]) >= d) begin
          dv_rem[s+1][o] <= MW'((MW+1)'(dv_rem[s][o]) - d);
          dv_q[s+1][o]   <= dv_q[s][o] | (S1W'(1) << b);
        end else begin
          dv_rem[s+1][o] <= dv_rem[s][o];
          dv_q[s+1][o]   <= dv_q[s][o];
        end
      end
    end
  end

  always_comb begin
    for (int o = 0; o < 4; o++)
      mag[o] = dv_sat[DS][o] ? '1 : dv_q[DS][o];
  end

  logic [LAT-1:0] vpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LAT-2:0], in_valid};
  end
  assign out_valid = vpipe[LAT-1];
endmodule
