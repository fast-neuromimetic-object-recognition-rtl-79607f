// Testbench for s2_patch_mem: writes every coefficient of 8 patches one at a
// time, then reads all words back with the one-cycle read latency.
module tb_s2_patch_mem;
  import hmax_pkg::*;
  localparam int NP = 8, D = 960;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask
  logic we = 0, wsel = 0; logic [9:0] waddr = 0, raddr = 0; logic [2:0] wpatch = 0;
  logic [15:0] wdata = 0;
  logic [NP-1:0][1:0][15:0] rdata;
  s2_patch_mem #(.NUM_PATCH(NP), .DEPTH(D)) dut (.*);
  logic [NP-1:0][1:0][15:0] model[D];
  int a, p, h;
  initial begin
    repeat (60000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (a = 0; a < D; a++) for (p = 0; p < NP; p++) for (h = 0; h < 2; h++) begin
      @(negedge clk); we = 1; waddr = 10'(a); wpatch = 3'(p); wsel = h[0]; wdata = 16'($urandom);
      model[a][p][h] = wdata;
    end
    @(negedge clk); we = 0;
    for (a = 0; a < D; a++) begin
      raddr = 10'(a); @(negedge clk);
      check(rdata == model[a], $sformatf("word %0d", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
