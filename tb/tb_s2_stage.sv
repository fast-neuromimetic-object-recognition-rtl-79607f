// Testbench for s2_stage on a 64 x 64 image geometry with 4 filter sizes (two
// bands, 14 x 14 and 10 x 10 C1 blocks) and 3 patches per size. The testbench
// plays the C1 band memories (combinational read through the stage's band /
// address demultiplexer), the patch memory (one-cycle read) and C2. It raises
// the band flags late, holds c2_busy high at the start of the second image,
// and checks: every distance of every update against a direct sum of squared
// differences, the update order and patch size, that nothing is read from a
// band whose flag is low, flag_clr per band, img_done once per image, no start
// while c2_busy, and the busy cycles per band = sum over patch sizes of
// locations * 2 * kappa (+ fixed overhead).
module tb_s2_stage;
  import hmax_pkg::*;
  localparam int IW_ = 64, NF_ = 4, NP = 3, NBND = NF_/2;
  localparam int NB0 = band_nb(IW_, 0), MAW = $clog2(NB0*NB0);
  localparam int PD = patch_base(4), PAW = $clog2(PD);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  logic [NBND-1:0] band_flag = '0, flag_clr;
  logic [2:0] c1_band; logic [MAW-1:0] c1_addr; c1_word_t c1_rdata;
  logic [PAW-1:0] pm_raddr;
  logic [NP-1:0][1:0][15:0] pm_rdata;
  logic upd_valid, img_done, c2_busy = 0, waiting;
  logic [1:0] upd_k;
  logic [NP-1:0][C2W-1:0] upd_dist;
  s2_stage #(.IMG_W(IW_), .NUM_FILT(NF_), .NUM_PATCH(NP)) dut (.*);

  c1_word_t c1mem[NBND][NB0*NB0];
  logic [NP-1:0][1:0][15:0] pmem[PD];
  assign c1_rdata = c1mem[c1_band][c1_addr];
  always_ff @(posedge clk) pm_rdata <= pmem[pm_raddr];

  // expected updates: {k, dist[p]} in issue order
  int  exp_k[$]; longint exp_d[$];
  int  exp_cycles[NBND];
  task automatic build_expected();
    exp_k.delete(); exp_d.delete();
    for (int b = 0; b < NBND; b++) begin
      int nb, g; nb = band_nb(IW_, b); g = nb; exp_cycles[b] = 0;
      for (int k = 0; k < 4; k++) begin
        int s; s = patch_side(k);
        if (s > g) continue;
        exp_cycles[b] += (g-s+1)*(g-s+1)*2*patch_kappa(k);
        for (int y = 0; y <= g-s; y++) for (int x = 0; x <= g-s; x++) begin
          exp_k.push_back(k);
          for (int p = 0; p < NP; p++) begin
            longint acc; acc = 0;
            for (int py = 0; py < s; py++) for (int px = 0; px < s; px++) for (int o = 0; o < 4; o++) begin
              longint a, c;
              a = longint'(c1mem[b][(y+py)*nb + x+px][o]);
              c = longint'(pmem[patch_base(k) + 2*(py*s+px) + o/2][p][o%2]);
              acc += (a-c)*(a-c);
            end
            exp_d.push_back(acc);
          end
        end
      end
    end
  endtask

  int nupd = 0, ndone = 0, clr_count[NBND], busy_start[NBND], busy_cycles[NBND], cyc = 0;
  int upd_while_busy = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (int'(dut.state) == 1 && !band_flag[c1_band]) begin failures++; $display("FAIL: read of unowned band"); end
    if (upd_valid) begin
      if (c2_busy) upd_while_busy++;
      check(nupd < exp_k.size() && int'(upd_k) == exp_k[nupd], $sformatf("update %0d size", nupd));
      for (int p = 0; p < NP; p++)
        check(nupd < exp_k.size() && longint'(upd_dist[p]) == exp_d[nupd*NP+p], $sformatf("update %0d patch %0d", nupd, p));
      nupd++;
    end
    if (img_done) ndone++;
    for (int b = 0; b < NBND; b++) if (flag_clr[b]) begin
      clr_count[b]++; band_flag[b] <= 1'b0;
      busy_cycles[b] = cyc - busy_start[b];
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int img;
  initial begin
    for (int b = 0; b < NBND; b++) begin clr_count[b] = 0; busy_start[b] = 0; busy_cycles[b] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    for (img = 0; img < 2; img++) begin
      for (int b = 0; b < NBND; b++) for (int a = 0; a < NB0*NB0; a++)
        c1mem[b][a] = (img == 0) ? c1_word_t'({$urandom, $urandom}) : c1_word_t'({4{16'($urandom_range(0, 3000))}});
      for (int a = 0; a < PD; a++) for (int p = 0; p < NP; p++) for (int o = 0; o < 2; o++)
        pmem[a][p][o] = (img == 0) ? 16'($urandom) : 16'($urandom_range(0, 3000));
      build_expected();
      nupd = 0;
      if (img == 1) c2_busy = 1;
      repeat (20) @(negedge clk);
      check(waiting && nupd == 0, "waits for band flag");
      for (int b = 0; b < NBND; b++) begin
        band_flag[b] = 1'b1; busy_start[b] = cyc;
        if (img == 1 && b == 0) begin
          repeat (30) @(negedge clk);
          check(int'(dut.state) == 0 && nupd == 0, "does not start band 0 while C2 is busy");
          c2_busy = 0; busy_start[b] = cyc;
        end
        while (band_flag[b]) @(negedge clk);
        check(busy_cycles[b] >= exp_cycles[b] && busy_cycles[b] <= exp_cycles[b] + 12,
              $sformatf("band %0d took %0d cycles, 2*kappa*locations = %0d", b, busy_cycles[b], exp_cycles[b]));
      end
      repeat (5) @(negedge clk);
      check(nupd == exp_k.size(), $sformatf("image %0d: %0d updates, expected %0d", img, nupd, exp_k.size()));
      check(ndone == img+1, "img_done once per image");
    end
    for (int b = 0; b < NBND; b++) check(clr_count[b] == 2, "flag_clr once per band per image");
    check(upd_while_busy == 0, "no update while C2 busy");
    $display("S2 band cycles: %0d %0d (expected %0d %0d + overhead)", busy_cycles[0], busy_cycles[1], exp_cycles[0], exp_cycles[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
