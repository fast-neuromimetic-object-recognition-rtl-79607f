// c1_band_mem: C1 result memory of one size band, with its ownership flag.
//
// DEPTH words of four 16-bit C1 values (one per orientation). While `flag` is
// low the C1 port owns the memory (reads and writes); `flag_set` from C1 hands
// it to S2, which then has the read port until it pulses `flag_clr`, returning
// the memory to C1. Ownership changes take effect on the next cycle. Reads are
// combinational through the address of the current owner.
// The one-memory-and-one-flag-per-band scheme and its set/clear protocol follow
// the paper; S2 only reads, as nothing in the paper has it write C1 results.
module c1_band_mem #(
  parameter int DEPTH = 900,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  output logic                flag,
  input  logic                flag_set,
  input  logic                flag_clr,
  input  logic [AW-1:0]       c1_addr,
  input  logic                c1_we,
  input  hmax_pkg::c1_word_t  c1_wdata,
  input  logic [AW-1:0]       s2_addr,
  output hmax_pkg::c1_word_t  rdata
);
  import hmax_pkg::*;
  c1_word_t mem [DEPTH];

  wire [AW-1:0] addr = flag ? s2_addr : c1_addr;
  assign rdata = (int'(addr) < DEPTH) ? mem[addr] : '0;

  always_ff @(posedge clk) begin
    if (c1_we && !flag && int'(c1_addr) < DEPTH) mem[c1_addr] <= c1_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        flag <= 1'b0;
    else if (flag_set) flag <= 1'b1;
    else if (flag_clr) flag <= 1'b0;
  end

  a_set_when_low:  assert property (@(posedge clk) disable iff (!rst_n) flag_set |-> !flag);
  a_clr_when_high: assert property (@(posedge clk) disable iff (!rst_n) flag_clr |-> flag);
  a_c1_write_owned: assert property (@(posedge clk) disable iff (!rst_n) c1_we |-> !flag);
endmodule
