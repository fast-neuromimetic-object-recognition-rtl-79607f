// Testbench for s1_stage on a 24 x 24 image with the four smallest filter sizes
// (two bands). The testbench plays the input buffer and loads Gabor kernels
// built from the paper's sigma/lambda table. It holds band 0's flag high at the
// start (S2 still owns the memory) and drops c1_ready for a while, checks that
// S1 stalls before its second pass and emits nothing meanwhile, compares every
// S1 result with the reference model, checks result counts, the `last` marker,
// the release of the image after the last first pass, and the cycle count
// against 2 * N * NUM_FILT.
module tb_s1_stage;
  import hmax_pkg::*;
  import hmax_ref_pkg::*;
  localparam int IW_ = 24, NF_ = 4, N = IW_*IW_;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  logic img_avail = 0, img_release, coef_we = 0, c1_ready = 1, s1_valid, stall_flag, busy;
  logic [$clog2(N)-1:0] img_addr;
  logic [7:0] img_pix;
  logic [1:0] coef_filt = 0; logic [1:0] coef_kern = 0; logic [4:0] coef_idx = 0;
  logic signed [15:0] coef_data = 0;
  logic [1:0] band_flag = 2'b01;
  s1_result_t s1_res;
  s1_stage #(.IMG_W(IW_), .NUM_FILT(NF_)) dut (.*);

  assign img_pix = 8'(img[img_addr]);

  int cyc = 0, stall_cycles = 0, wait_cycles = 0, released_at = -1, outs[4] = '{0,0,0,0}, lasts[4] = '{0,0,0,0}, out_while_stalled = 0;
  int first_pass2_out = -1, last_out = -1;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (stall_flag) stall_cycles++;
    if (int'(dut.state) == 3) wait_cycles++;   // S_WAIT
    if (img_release) released_at = cyc;
    if (s1_valid) begin
      int f; f = 2*int'(s1_res.band) + int'(s1_res.scale);
      if (band_flag[s1_res.band]) out_while_stalled++;
      outs[f]++;
      if (s1_res.last) lasts[f]++;
      if (first_pass2_out < 0) first_pass2_out = cyc;
      for (int o = 0; o < 4; o++) begin
        int idx, ev;
        idx = int'(s1_res.row)*IW_ + int'(s1_res.col);
        ev = s1m[f][o][idx];
        check(int'(s1_res.mag[o]) == ev, $sformatf("f%0d o%0d (%0d,%0d) got %0d exp %0d", f, o, s1_res.row, s1_res.col, s1_res.mag[o], ev));
      end
      if (f == NF_-1) check(released_at > 0, "image released before the last second pass");
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_test();
    int start;
    W = IW_; NF = NF_;
    img = new[N];
    foreach (img[i]) img[i] = $urandom_range(255);
    for (int f = 0; f < NF_; f++) begin make_gabor(f); ref_s1(f); end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int f = 0; f < NF_; f++) for (int k = 0; k < 3; k++) for (int i = 0; i < 19; i++) begin
      @(negedge clk); coef_we = 1; coef_filt = 2'(f); coef_kern = 2'(k); coef_idx = 5'(i); coef_data = 16'(kern[f][k][i]);
    end
    @(negedge clk); coef_we = 0; img_avail = 1; start = cyc;
    // band 0 memory still owned by S2 for a while
    repeat (N + 500) @(negedge clk);
    check(stall_flag, "stalled on band flag");
    check(first_pass2_out < 0, "no output while the band flag is high");
    band_flag = 2'b00;
    // C1 busy: hold c1_ready low around the start of band 1
    wait (outs[1] > 0);
    wait (s1_valid && s1_res.last && s1_res.band == 0 && s1_res.scale == 1);
    @(negedge clk); c1_ready = 0;
    repeat (N + 300) @(negedge clk);
    check(outs[2] == 0, "no band-1 output while C1 not ready");
    c1_ready = 1;
    wait (released_at > 0);
    @(negedge clk); img_avail = 0;
    wait (lasts[NF_-1] == 1);
    wait (!busy);
    last_out = cyc;
    repeat (50) @(negedge clk);
    for (int f = 0; f < NF_; f++) begin
      int m = IW_ - diam(f) + 1;
      check(outs[f] == m*m, $sformatf("filter %0d outputs %0d exp %0d", f, outs[f], m*m));
      check(lasts[f] == 1, "one last marker per filter");
    end
    check(out_while_stalled == 0, "never output into a band owned by S2");
    check(stall_cycles > 0, "stall happened");
    check(!busy, $sformatf("idle after the image, state %0d", int'(dut.state)));
    begin
      int active = last_out - start - wait_cycles;
      $display("S1 busy cycles for one image: %0d (2*N*NUM_FILT = %0d)", active, 2*N*NF_);
      check(active >= 2*N*NF_ && active <= 2*N*NF_ + 60*NF_,
            $sformatf("S1 cycles %0d vs 2*N*NF = %0d", active, 2*N*NF_));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  initial run_test();
endmodule
