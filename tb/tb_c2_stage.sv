// Testbench for c2_stage with 5 patches per size: random updates (random sizes,
// random gaps, some sizes left without any update) followed by img_done and a
// readout with a randomly stalling ready. Checks every read value against the
// running minimum model (all ones for a size that got no update), the index
// order, out_last, that busy ends exactly after the last accepted word, that
// one word moves per ready cycle, and that the next image starts from scratch.
module tb_c2_stage;
  import hmax_pkg::*;
  localparam int NP = 5, NOUT = 4*NP;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask
  logic upd_valid = 0, img_done = 0, out_valid, out_ready = 0, out_last, busy;
  logic [1:0] upd_k = 0;
  logic [NP-1:0][C2W-1:0] upd_dist = '0;
  logic [$clog2(NOUT)-1:0] out_idx;
  logic [C2W-1:0] out_data;
  c2_stage #(.NUM_PATCH(NP)) dut (.*);
  longint model[4][NP];
  bit     seen[4];
  int n, got, ready_cycles;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int img = 0; img < 6; img++) begin
      int skip; skip = $urandom_range(0, 4);   // size that gets no updates (4 = none)
      for (int k = 0; k < 4; k++) begin seen[k] = 0; for (int p = 0; p < NP; p++) model[k][p] = 64'h3FF_FFFF_FFFF; end
      for (n = 0; n < 300; n++) begin
        @(negedge clk);
        upd_valid = ($urandom_range(3) != 0);
        do upd_k = 2'($urandom_range(3)); while (int'(upd_k) == skip);
        for (int p = 0; p < NP; p++) upd_dist[p] = (img == 0 && n == 0) ? '1 : C2W'({$urandom, $urandom});
        if (upd_valid) begin
          seen[upd_k] = 1;
          for (int p = 0; p < NP; p++) if (longint'(upd_dist[p]) < model[upd_k][p]) model[upd_k][p] = longint'(upd_dist[p]);
        end
      end
      @(negedge clk); upd_valid = 0; img_done = 1;
      @(negedge clk); img_done = 0;
      got = 0; ready_cycles = 0;
      while (busy) begin
        out_ready = ($urandom_range(2) != 0);
        #1;
        if (out_ready) begin
          longint e; e = seen[got/NP] ? model[got/NP][got%NP] : 64'h3FF_FFFF_FFFF;
          ready_cycles++;
          check(out_valid, "valid while busy");
          check(int'(out_idx) == got, $sformatf("idx %0d exp %0d", out_idx, got));
          check(longint'(out_data) == e, $sformatf("img %0d idx %0d data %0h exp %0h", img, got, out_data, e));
          check(out_last == (got == NOUT-1), "out_last");
          got++;
        end
        @(negedge clk);
      end
      out_ready = 0;
      check(got == NOUT && ready_cycles == NOUT, $sformatf("image %0d: %0d words", img, got));
      check(!out_valid, "valid low after readout");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
