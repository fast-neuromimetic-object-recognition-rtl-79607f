// s1_coeff_lut: S1 filter coefficient look-up table.
//
// For each of NUM_FILT filter sizes it holds three 1-D half kernels of HALF
// signed 16-bit coefficients, index 0 being the kernel centre:
//   kernel 0 = E (even Gabor), 1 = G (Gaussian), 2 = O (odd Gabor, O[0] = 0).
// Only the centre-to-edge half is stored because every kernel is even or odd
// symmetric; filter f uses entries 0..3+f (the paper's 3+j coefficients).
// The table is written by the host one coefficient per cycle (`wr_en`), and
// read combinationally for the filter size selected by `rd_filt`.
// Paper: 16-bit coefficients stored on chip, half kernels (3+j values).
// The paper's memory count has two kernels per size; three are stored here
// because its 45/135 degree filters need E and O and its 0/90 degree filters
// need E and G.
module s1_coeff_lut #(
  parameter int NUM_FILT = 16,
  parameter int HALF     = hmax_pkg::HALF,
  parameter int CW       = hmax_pkg::CW
) (
  input  logic                        clk,
  input  logic                        wr_en,
  input  logic [$clog2(NUM_FILT)-1:0] wr_filt,
  input  logic [1:0]                  wr_kern,
  input  logic [$clog2(HALF)-1:0]     wr_idx,
  input  logic signed [CW-1:0]        wr_data,
  input  logic [$clog2(NUM_FILT)-1:0] rd_filt,
  output logic signed [2:0][HALF-1:0][CW-1:0] rd_coef
);
  logic [2:0][HALF-1:0][CW-1:0] mem [NUM_FILT];

  always_ff @(posedge clk) begin
    if (wr_en && wr_kern != 2'd3 && int'(wr_idx) < HALF)
      mem[wr_filt][wr_kern[1:0]][wr_idx] <= wr_data;
  end

  assign rd_coef = mem[rd_filt];
endmodule
