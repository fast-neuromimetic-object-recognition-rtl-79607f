// Testbench for s1_coeff_lut: writes a random table through the load port and
// reads every filter size back, including that writes to kernel 3 are ignored.
module tb_s1_coeff_lut;
  import hmax_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask
  logic wr_en = 0; logic [3:0] wr_filt = 0, rd_filt = 0; logic [1:0] wr_kern = 0;
  logic [4:0] wr_idx = 0; logic signed [15:0] wr_data = 0;
  logic signed [2:0][18:0][15:0] rd_coef;
  s1_coeff_lut dut (.*);
  int model[16][3][19];
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int f = 0; f < 16; f++) for (int k = 0; k < 4; k++) for (int i = 0; i < 19; i++) begin
      int v = $urandom_range(65535) - 32768;
      @(negedge clk); wr_en = 1; wr_filt = 4'(f); wr_kern = 2'(k); wr_idx = 5'(i); wr_data = 16'(v);
      if (k < 3) model[f][k][i] = v;
    end
    @(negedge clk); wr_en = 0;
    for (int f = 15; f >= 0; f--) begin
      rd_filt = 4'(f); #1;
      for (int k = 0; k < 3; k++) for (int i = 0; i < 19; i++)
        check(int'($signed(rd_coef[k][i])) == model[f][k][i], $sformatf("f%0d k%0d i%0d", f, k, i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
