// End-to-end testbench for hmax_top on 64 x 64 images with the four smallest
// filter sizes (two bands) and 3 patches per size. It loads Gabor kernels and
// patches through the top's load ports (patch 0 of every size is cut from the
// C1 output of image 0, so its distance for image 0 must be 0), streams
// NIMG images back to back as fast as the input buffer accepts them, and reads
// the C2 results. The first image's results are refused for a long time, which
// must back up C2 -> S2 (waits with band 0 owned) -> S1 (stalls on band 0's
// flag) -> input buffer (full, pixel stream held). Checks:
//   every C2 result of every image equals the bit-exact reference model;
//   result order, last marker, one result set per image;
//   each mechanism happened at least once: S1 stall, input buffer full,
//     S2 waiting for a band, C2 back-pressure (counted in cycles);
//   the image period without stalls is 2 * N * NUM_FILT cycles (+ <= 60 per
//     filter), the paper's S1 rate.
module tb_hmax_top;
  import hmax_pkg::*;
  import hmax_ref_pkg::*;
  localparam int IW_ = 64, NF_ = 4, NP_ = 3, NIMG = 5, PSTEP = 1, HOLD = 120000;
  localparam int N = IW_*IW_, NOUT = 4*NP_, PD = patch_base(4);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  logic pix_valid = 0, pix_ready, coef_we = 0, patch_we = 0, patch_sel = 0, c2_ready = 0;
  logic [7:0] pix_data = 0;
  logic [$clog2(NF_)-1:0] coef_filt = 0; logic [1:0] coef_kern = 0; logic [4:0] coef_idx = 0;
  logic signed [15:0] coef_data = 0;
  logic [$clog2(PD)-1:0] patch_addr = 0; logic [$clog2(NP_)-1:0] patch_idx = 0; logic [15:0] patch_data = 0;
  logic c2_valid, c2_last, s1_stall, s1_busy, s2_waiting, img_released;
  logic [$clog2(NOUT)-1:0] c2_idx; logic [C2W-1:0] c2_data;
  logic [NF_/2-1:0] band_flags; logic [2:0] images_buffered;
  hmax_top #(.IMG_W(IW_), .NUM_FILT(NF_), .NUM_PATCH(NP_)) dut (.*);

  int     pix[NIMG][];
  longint expc2[NIMG][NOUT];

  // ---- mechanism counters and rate measurement
  int cyc = 0, n_stall = 0, n_full = 0, n_s2wait = 0, n_c2bp = 0;
  int rel_cyc[$], stall_at_rel[$];
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (s1_stall) n_stall++;
    if (pix_valid && !pix_ready) n_full++;
    if (s2_waiting) n_s2wait++;
    if (c2_valid && !c2_ready) n_c2bp++;
    if (img_released) begin rel_cyc.push_back(cyc); stall_at_rel.push_back(n_stall); end
  end

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures); $finish;
  end

  // ---- reference model for all images
  task automatic prepare();
    W = IW_; NF = NF_; NP = NP_;
    for (int f = 0; f < NF_; f++) make_gabor(f);
    for (int i = 0; i < NIMG; i++) begin
      pix[i] = new[N];
      foreach (pix[i][a]) pix[i][a] = (i == 0) ? $urandom_range(255)
                                  : ((a % IW_) * (a / IW_) * (i + 1) / 16 + $urandom_range(60)) % 256;
    end
    for (int i = 0; i < NIMG; i++) begin
      img = pix[i];
      for (int f = 0; f < NF_; f++) ref_s1(f);
      for (int b = 0; b < NF_/2; b++) ref_c1(b);
      if (i == 0) begin
        for (int k = 0; k < 4; k++) begin
          int s = side(k), kap = s*s;
          patch[k] = new[NP_*4*kap];
          foreach (patch[k][a]) patch[k][a] = $urandom_range(0, 20000);
          if (s <= nbk(0) - 1)
            for (int o = 0; o < 4; o++) for (int py = 0; py < s; py++) for (int px = 0; px < s; px++)
              patch[k][o*kap + py*s + px] = c1m[0][o][(1+py)*nbk(0) + 1+px];
        end
      end
      ref_c2(PSTEP);
      for (int k = 0; k < 4; k++) for (int p = 0; p < NP_; p++) expc2[i][k*NP_+p] = c2r[k][p];
    end
  endtask

  // ---- result reader
  int nres = 0, nimg_out = 0, nzero = 0;
  initial begin
    wait (rst_n);
    while (nimg_out < NIMG) begin
      @(negedge clk);
      c2_ready = (nimg_out == 0) ? (cyc > HOLD) : ($urandom_range(2) != 0);
      #1;
      if (c2_valid && c2_ready) begin
        int k, p;
        k = int'(c2_idx) / NP_; p = int'(c2_idx) % NP_;
        check(int'(c2_idx) == nres, $sformatf("image %0d result index %0d exp %0d", nimg_out, c2_idx, nres));
        if (p % PSTEP == 0)
          check(longint'(c2_data) == expc2[nimg_out][int'(c2_idx)],
                $sformatf("image %0d C2[%0d][%0d] = %0d exp %0d", nimg_out, k, p, c2_data, expc2[nimg_out][int'(c2_idx)]));
        if (nimg_out == 0 && p == 0 && k < 3) begin check(c2_data == 0, "patch cut from image 0 matches it"); nzero++; end
        check(c2_last == (nres == NOUT-1), "c2_last");
        if (nres == NOUT-1) begin nres = 0; nimg_out++; end else nres++;
      end
    end
  end

  initial begin
    prepare();
    repeat (3) @(posedge clk); rst_n = 1;
    for (int f = 0; f < NF_; f++) for (int kk = 0; kk < 3; kk++) for (int i = 0; i < 19; i++) begin
      @(negedge clk); coef_we = 1; coef_filt = $bits(coef_filt)'(f); coef_kern = 2'(kk); coef_idx = 5'(i); coef_data = 16'(kern[f][kk][i]);
    end
    @(negedge clk); coef_we = 0;
    for (int k = 0; k < 4; k++) begin
      int s, kap;
      s = side(k); kap = s*s;
      for (int pos = 0; pos < kap; pos++) for (int o = 0; o < 4; o++) for (int p = 0; p < NP_; p++) begin
        @(negedge clk); patch_we = 1; patch_addr = $bits(patch_addr)'(patch_base(k) + 2*pos + o/2);
        patch_idx = $bits(patch_idx)'(p); patch_sel = o[0]; patch_data = 16'(patch[k][(p*4+o)*kap + pos]);
      end
    end
    @(negedge clk); patch_we = 0;
    for (int i = 0; i < NIMG; i++)
      for (int a = 0; a < N; a++) begin
        pix_valid = 1; pix_data = 8'(pix[i][a]);
        @(posedge clk); while (!pix_ready) @(posedge clk);
        @(negedge clk);
      end
    pix_valid = 0;
    wait (nimg_out == NIMG);
    while (s1_busy) @(negedge clk);   // S1 may still emit rows below the last pooling block
    repeat (20) @(negedge clk);
    check(!c2_valid && !s1_busy, $sformatf("idle at the end (c2_valid %0b s1_busy %0b s1 state %0d f %0d)", c2_valid, s1_busy, int'(dut.u_s1.state), int'(dut.u_s1.f)));
    check(nzero == 3, "zero-distance patches seen");
    $display("mechanism cycles: S1 stall %0d, input buffer full %0d, S2 waiting %0d, C2 back-pressure %0d",
             n_stall, n_full, n_s2wait, n_c2bp);
    check(n_stall > 0, "S1 stall never happened");
    check(n_full > 0, "input buffer full never happened");
    check(n_s2wait > 0, "S2 wait never happened");
    check(n_c2bp > 0, "C2 back-pressure never happened");
    check(rel_cyc.size() == NIMG, "every image released");
    begin
      int nrate = 0;
      for (int i = 1; i < rel_cyc.size(); i++) if (stall_at_rel[i] == stall_at_rel[i-1]) begin
        int per;
        per = rel_cyc[i] - rel_cyc[i-1];
        $display("image period %0d cycles (2*N*NUM_FILT = %0d)", per, 2*N*NF_);
        check(per >= 2*N*NF_ && per <= 2*N*NF_ + 60*NF_, $sformatf("image period %0d", per));
        nrate++;
      end
      check(nrate > 0, "an unstalled image period was measured");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
