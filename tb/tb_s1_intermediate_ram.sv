// Testbench for s1_intermediate_ram: random writes of four 23-bit values per
// word against a model, reads at random addresses, write-then-read timing.
module tb_s1_intermediate_ram;
  import hmax_pkg::*;
  localparam int W = 16, N = W*W;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask
  logic we = 0; logic [7:0] waddr = 0, raddr = 0;
  logic [3:0][22:0] wdata = 0, rdata;
  s1_intermediate_ram #(.IMG_W(W)) dut (.*);
  logic [3:0][22:0] model[N];
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int a = 0; a < N; a++) begin
      @(negedge clk); we = 1; waddr = 8'(a);
      for (int l = 0; l < 4; l++) wdata[l] = 23'($urandom);
      model[a] = wdata;
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      we = $urandom_range(1); waddr = 8'($urandom); raddr = 8'($urandom);
      for (int l = 0; l < 4; l++) wdata[l] = 23'($urandom);
      #1 check(rdata == model[raddr], $sformatf("read %0d", raddr));
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
