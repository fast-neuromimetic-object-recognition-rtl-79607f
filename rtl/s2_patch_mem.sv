// s2_patch_mem: S2 patch coefficient memory.
//
// DEPTH wide words, each holding two 16-bit coefficients (an orientation pair)
// for every one of NUM_PATCH patches, so that one read feeds all 2*NUM_PATCH
// multipliers of the S2 filter bank. Patch size k (side s = 4(k+1), kappa = s*s
// positions) occupies words patch_base(k) + 2*(y*s + x) + p, where p = 0 holds
// orientations 0 and 1 and p = 1 holds orientations 2 and 3 of position (x,y).
// With 4 sizes that is 2*(16+64+144+256) = 960 words.
// Written by the host one coefficient per cycle; read synchronously (data one
// cycle after the address, as in a block RAM).
// Storing every patch on chip (320 per size, 4 orientations, 16 bits) follows
// the paper; the word layout is this design's own.
module s2_patch_mem #(
  parameter int NUM_PATCH = 320,
  parameter int DEPTH     = 960,
  localparam int AW = $clog2(DEPTH),
  localparam int PW = $clog2(NUM_PATCH)
) (
  input  logic                                   clk,
  input  logic                                   we,
  input  logic [AW-1:0]                          waddr,
  input  logic [PW-1:0]                          wpatch,
  input  logic                                   wsel,
  input  logic [hmax_pkg::C1W-1:0]               wdata,
  input  logic [AW-1:0]                          raddr,
  output logic [NUM_PATCH-1:0][1:0][hmax_pkg::C1W-1:0] rdata
);
  import hmax_pkg::*;
  logic [NUM_PATCH-1:0][1:0][C1W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && int'(waddr) < DEPTH && int'(wpatch) < NUM_PATCH) mem[waddr][wpatch][wsel] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
