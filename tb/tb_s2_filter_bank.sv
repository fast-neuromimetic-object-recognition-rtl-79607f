// Testbench for s2_filter_bank: random groups of beats (with gaps) for 6
// patches, each group framed by first/last; every distance is compared with the
// directly computed sum of squared differences, and the 2-cycle latency from
// the last beat is checked.
module tb_s2_filter_bank;
  import hmax_pkg::*;
  localparam int NP = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask
  logic in_valid = 0, first = 0, last = 0, out_valid;
  logic [1:0][15:0] c1_in = '0;
  logic [NP-1:0][1:0][15:0] coef = '0;
  logic [NP-1:0][C2W-1:0] distance;
  s2_filter_bank #(.NUM_PATCH(NP)) dut (.*);
  longint acc[NP];
  longint expd[$];
  int nout = 0, g, n, len, wait_n;
  initial begin
    repeat (60000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(negedge clk) if (rst_n && out_valid) begin
    for (int p = 0; p < NP; p++) check(longint'(distance[p]) == expd[nout*NP + p], $sformatf("group %0d patch %0d", nout, p));
    nout++;
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (g = 0; g < 60; g++) begin
      len = (g < 2) ? 512 : $urandom_range(1, 40);
      for (int p = 0; p < NP; p++) acc[p] = 0;
      for (n = 0; n < len; n++) begin
        @(negedge clk);
        while ($urandom_range(5) == 0) begin in_valid = 0; first = 0; last = 0; @(negedge clk); end
        in_valid = 1; first = (n == 0); last = (n == len-1);
        for (int o = 0; o < 2; o++) c1_in[o] = (g == 0) ? 16'hFFFF : 16'($urandom);
        for (int p = 0; p < NP; p++) for (int o = 0; o < 2; o++) begin
          longint df;
          coef[p][o] = (g == 0) ? 16'h0000 : 16'($urandom);
          df = longint'(c1_in[o]) - longint'(coef[p][o]);
          acc[p] += df*df;
        end
      end
      for (int p = 0; p < NP; p++) expd.push_back(acc[p]);
      @(negedge clk); in_valid = 0; first = 0; last = 0;
      wait_n = 1;
      while (!out_valid) begin @(negedge clk); wait_n++; end
      check(wait_n == 2, $sformatf("latency %0d", wait_n));
    end
    repeat (4) @(negedge clk);
    check(nout == 60, "all groups out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
