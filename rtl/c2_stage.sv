// c2_stage: C2 global pooling and result buffer.
//
// Keeps, for each of the 4*NUM_PATCH patches, the smallest S2 distance seen so
// far in the current image: every update (upd_valid) carries the distances of
// all NUM_PATCH patches of one size k at one location, and all of them are
// compared with the stored minima in the same cycle. A per-size valid bit makes
// the first update of an image overwrite instead of compare, so no clearing
// pass is needed. On img_done the stage sends all results, patch index
// k*NUM_PATCH + p in increasing order, over a valid/ready stream towards the
// transmit buffer (out_last on the final one), clearing each size's valid bit as
// it goes; a size that never fitted any band reads as all ones. `busy` is high
// while sending; no updates may arrive then.
// The running minimum of the distance and the 1280 x 42-bit result memory
// follow the paper (its figure labels the block "global max"; the text's
// minimum of a distance is what is built). The stream interface is this
// design's own.
module c2_stage #(
  parameter int NUM_PATCH = 320,
  localparam int NOUT = hmax_pkg::NUM_PSIZE * NUM_PATCH,
  localparam int OW   = $clog2(NOUT)
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  input  logic                                    upd_valid,
  input  logic [1:0]                              upd_k,
  input  logic [NUM_PATCH-1:0][hmax_pkg::C2W-1:0] upd_dist,
  input  logic                                    img_done,
  output logic                                    out_valid,
  input  logic                                    out_ready,
  output logic [OW-1:0]                           out_idx,
  output logic [hmax_pkg::C2W-1:0]                out_data,
  output logic                                    out_last,
  output logic                                    busy
);
  import hmax_pkg::*;
  localparam int PW = $clog2(NUM_PATCH);

  logic [NUM_PATCH-1:0][C2W-1:0] mem [NUM_PSIZE];
  logic [NUM_PSIZE-1:0]          row_valid;
  logic [1:0]                    rk;
  logic [PW-1:0]                 rp;

  always_ff @(posedge clk) begin
    if (upd_valid) begin
      for (int p = 0; p < NUM_PATCH; p++)
        if (!row_valid[upd_k] || upd_dist[p] < mem[upd_k][p])
          mem[upd_k][p] <= upd_dist[p];
    end
  end

  assign out_valid = busy;
  assign out_idx   = OW'(int'(rk) * NUM_PATCH + int'(rp));
  assign out_data  = row_valid[rk] ? mem[rk][rp] : '1;
  assign out_last  = busy && (rk == 2'(NUM_PSIZE-1)) && (int'(rp) == NUM_PATCH-1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_valid <= '0; busy <= 1'b0; rk <= '0; rp <= '0;
    end else begin
      if (upd_valid) row_valid[upd_k] <= 1'b1;
      if (img_done) begin
        busy <= 1'b1; rk <= '0; rp <= '0;
      end else if (busy && out_ready) begin
        if (int'(rp) == NUM_PATCH-1) begin
          rp <= '0;
          row_valid[rk] <= 1'b0;
          if (rk == 2'(NUM_PSIZE-1)) busy <= 1'b0;
          else rk <= rk + 1'b1;
        end else rp <= rp + 1'b1;
      end
    end
  end

  a_no_update_while_sending: assert property (@(posedge clk) disable iff (!rst_n) upd_valid |-> !busy);
  a_done_when_idle:          assert property (@(posedge clk) disable iff (!rst_n) img_done |-> !busy);
endmodule
