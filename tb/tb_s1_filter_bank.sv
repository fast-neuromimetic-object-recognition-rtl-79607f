// Testbench for s1_filter_bank: streams random samples with random gaps through
// the four lanes and the energy lane for several kernel half-lengths, even and
// odd kernels and both energy modes, and compares every output (after the
// 3-cycle latency) with a direct sum over the sample history.
module tb_s1_filter_bank;
  import hmax_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  logic in_valid = 0, sq_mode = 0, out_valid;
  logic signed [3:0][IW-1:0] lane_in = '0;
  logic [IW-1:0] sq_in = '0;
  logic [4:0] half = 3;
  logic signed [3:0][HALF-1:0][CW-1:0] coef = '0;
  logic [3:0] odd = '0;
  logic signed [3:0][ACC_W-1:0] lane_out;
  logic [EN_W-1:0] sq_out;
  s1_filter_bank dut (.*);

  longint hist[4][$], hsq[$];
  logic [3:0][63:0] exp_l[$];
  longint exp_q[$];
  int sent;

  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // output checker: outputs come in order
  always @(posedge clk) if (rst_n && out_valid) begin
    if (exp_q.size() == 0) check(0, "unexpected output");
    else begin
      logic signed [3:0][63:0] el; longint eq;
      el = exp_l.pop_front(); eq = exp_q.pop_front();
      for (int l = 0; l < 4; l++)
        if ($signed(el[l]) != -64'sd999999999) check(longint'($signed(lane_out[l])) == $signed(el[l]), $sformatf("lane %0d got %0d exp %0d", l, lane_out[l], el[l]));
      if (eq >= 0) check(longint'(sq_out) == eq, $sformatf("energy got %0d exp %0d", sq_out, eq));
    end
  end

  task automatic run_test();
    int lat_t0, lat_t1;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int run = 0; run < 8; run++) begin
      int h = (run < 2) ? 18 : $urandom_range(3, 18);
      @(negedge clk);
      half = 5'(h); sq_mode = run[0]; odd = 4'($urandom);
      for (int l = 0; l < 4; l++)
        for (int i = 0; i < HALF; i++)
          coef[l][i] = (odd[l] && i == 0) ? 16'sd0 : 16'($urandom_range(65535) - 32768);
      for (int l = 0; l < 4; l++) hist[l].delete(); hsq.delete();
      for (int n = 0; n < 300; n++) begin
        @(negedge clk);
        in_valid = ($urandom_range(3) != 0);
        for (int l = 0; l < 4; l++) lane_in[l] = IW'($urandom_range(8388607) - 4194304);
        sq_in = sq_mode ? IW'($urandom_range(255)) : IW'($urandom_range(2400000));
        if (in_valid) begin
          logic signed [3:0][63:0] el; longint q;
          for (int l = 0; l < 4; l++) hist[l].push_front(longint'($signed(lane_in[l])));
          hsq.push_front(sq_mode ? longint'(sq_in)*longint'(sq_in) : longint'(sq_in));
          if (hsq.size() >= 2*h+1) begin
            for (int l = 0; l < 4; l++) begin
              el[l] = 0;
              for (int x = -h; x <= h; x++) begin
                longint k = longint'($signed(coef[l][(x < 0) ? -x : x]));
                if (odd[l]) k = (x > 0) ? k : (x < 0) ? -k : 0;
                el[l] += k * hist[l][h - x];      // hist[0] is the newest = offset +h
              end
            end
            q = 0; for (int i = 0; i <= 2*h; i++) q += hsq[i];
            exp_q.push_back(q);
          end else begin
            for (int l = 0; l < 4; l++) el[l] = 64'(-999999999);
            exp_q.push_back(-1);
          end
          exp_l.push_back(el);
        end
      end
      @(negedge clk); in_valid = 0;
      repeat (6) @(negedge clk);
    end
    // latency: one isolated sample
    @(negedge clk); in_valid = 1; lat_t0 = $time/10;
    for (int l = 0; l < 4; l++) hist[l].push_front(0);
    begin logic signed [3:0][63:0] el; for (int l = 0; l < 4; l++) el[l] = 64'(-999999999); exp_l.push_back(el); exp_q.push_back(-1); end
    lat_t1 = 0;
    do begin @(negedge clk); in_valid = 0; lat_t1++; end while (!out_valid);
    check(lat_t1 == 3, $sformatf("latency %0d", lat_t1));
    repeat (5) @(negedge clk);
    check(exp_q.size() == 0, "all outputs seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  initial run_test();
endmodule
