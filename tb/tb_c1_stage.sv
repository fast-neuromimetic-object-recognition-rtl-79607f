// Testbench for c1_stage on a 40 x 40 image with two bands (filters 7..13).
// Random S1 maps are streamed in raster order with random gaps, smaller filter
// first, into band memories modelled in the testbench. Checks every C1 value
// (i, j < nb) against the reference pooling, the flag_set pulse per band,
// `ready` low during the pooling pass and the pass length of 5 cycles per value.
module tb_c1_stage;
  import hmax_pkg::*;
  import hmax_ref_pkg::*;
  localparam int IW_ = 40, NF_ = 4;
  localparam int NB0 = band_nb(IW_, 0);
  localparam int MAW = $clog2(NB0*NB0);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  logic s1_valid = 0, mem_we, ready;
  s1_result_t s1_res = '0;
  logic [2:0] mem_band; logic [MAW-1:0] mem_addr;
  c1_word_t mem_wdata, mem_rdata;
  logic [1:0] flag_set;
  c1_stage #(.IMG_W(IW_), .NUM_FILT(NF_)) dut (.*);

  c1_word_t bmem [2][NB0*NB0];
  assign mem_rdata = bmem[mem_band[0]][mem_addr];
  always @(posedge clk) if (mem_we) bmem[mem_band[0]][mem_addr] <= mem_wdata;

  int flags_seen[2] = '{0, 0}, notready = 0, cyc = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (!ready) notready++;
    for (int b = 0; b < 2; b++) if (flag_set[b]) flags_seen[b]++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int bi, si, ri, ci, nbv, t0v, fv, mv;
  initial begin
    W = IW_; NF = NF_;
    for (int f = 0; f < NF_; f++)
      for (int o = 0; o < 4; o++) begin
        s1m[f][o] = new[W*W];
        for (int i = 0; i < W*W; i++) s1m[f][o][i] = $urandom_range(65535);
      end
    for (int b = 0; b < 2; b++) for (int a = 0; a < NB0*NB0; a++) bmem[b][a] = c1_word_t'({$urandom, $urandom});
    repeat (3) @(posedge clk); rst_n = 1;
    for (bi = 0; bi < 2; bi++) begin
      nbv = nbk(bi);
      ref_c1(bi);
      while (!ready) @(negedge clk);
      for (si = 0; si < 2; si++) begin
        fv = 2*bi + si; mv = W - diam(fv) + 1;
        for (ri = 0; ri < mv; ri++)
          for (ci = 0; ci < mv; ci++) begin
            @(negedge clk);
            while ($urandom_range(4) == 0) begin s1_valid = 0; @(negedge clk); end
            s1_valid = 1;
            s1_res.band = 3'(bi); s1_res.scale = si[0];
            s1_res.row = 8'(ri); s1_res.col = 8'(ci);
            s1_res.last = (ri == mv-1) && (ci == mv-1);
            for (int o = 0; o < 4; o++) s1_res.mag[o] = 16'(s1m[fv][o][ri*W+ci]);
          end
        if (si == 0) begin @(negedge clk); s1_valid = 0; end
      end
      t0v = notready;
      @(negedge clk); s1_valid = 0;
      while (flags_seen[bi] != 1) @(negedge clk);
      @(negedge clk);
      check(notready - t0v == 5*nbv*nbv, $sformatf("pool pass %0d cycles", notready - t0v));
      for (int o = 0; o < 4; o++)
        for (int i = 0; i < nbv; i++)
          for (int j = 0; j < nbv; j++)
            check(int'(bmem[bi][i*nbv+j][o]) == c1m[bi][o][i*nbv+j],
                  $sformatf("band %0d o%0d (%0d,%0d) got %0d exp %0d", bi, o, i, j, bmem[bi][i*nbv+j][o], c1m[bi][o][i*nbv+j]));
    end
    check(flags_seen[0] == 1 && flags_seen[1] == 1, "one flag per band");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
