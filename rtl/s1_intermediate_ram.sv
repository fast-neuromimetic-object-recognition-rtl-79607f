// s1_intermediate_ram: intermediate S1 results held between the two passes of
// the separable filter.
//
// One word per image pixel, each word holding NBUF signed IW-bit first-pass
// results: [0] Gaussian G (for 0 deg), [1] even Gabor E (for 90, 45, 135 deg),
// [2] odd Gabor O (for 45, 135 deg), [3] windowed sum of squared pixels (for
// the l2 norm). One write port and one combinational read port.
// The 23-bit width follows the paper. The paper counts five buffers (one per
// orientation plus the norm); here the E result that 90, 45 and 135 degrees
// all start from is stored once, so four are kept.
module s1_intermediate_ram #(
  parameter int IMG_W = 128,
  parameter int NBUF  = 4,
  parameter int IW    = hmax_pkg::IW,
  localparam int AW   = $clog2(IMG_W*IMG_W)
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic [AW-1:0]              waddr,
  input  logic [NBUF-1:0][IW-1:0]    wdata,
  input  logic [AW-1:0]              raddr,
  output logic [NBUF-1:0][IW-1:0]    rdata
);
  logic [NBUF-1:0][IW-1:0] mem [IMG_W*IMG_W];

  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;
  assign rdata = mem[raddr];
endmodule
