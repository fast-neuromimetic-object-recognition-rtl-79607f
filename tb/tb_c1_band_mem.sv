// Testbench for c1_band_mem: C1 writes while the flag is low, flag_set hands
// the memory to S2 (reads now follow the S2 address, C1 writes are refused by
// the hand-over), flag_clr returns it; contents checked against a model.
module tb_c1_band_mem;
  import hmax_pkg::*;
  localparam int D = 100;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask
  logic flag, flag_set = 0, flag_clr = 0, c1_we = 0;
  logic [6:0] c1_addr = 0, s2_addr = 0;
  c1_word_t c1_wdata = '0, rdata;
  c1_band_mem #(.DEPTH(D)) dut (.*);
  c1_word_t model[D];
  int ai;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    check(!flag, "flag low after reset");
    for (int round = 0; round < 3; round++) begin
      // C1 phase
      for (ai = 0; ai < D; ai++) begin
        @(negedge clk); c1_we = 1; c1_addr = 7'(ai); c1_wdata = c1_word_t'({$urandom, $urandom});
        model[ai] = c1_wdata;
      end
      @(negedge clk); c1_we = 0;
      for (ai = 0; ai < D; ai += 7) begin
        c1_addr = 7'(ai); s2_addr = 7'(D-1-ai); #1 check(rdata == model[ai], "C1 reads its own port");
      end
      flag_set = 1; @(negedge clk); flag_set = 0;
      check(flag, "flag high after set");
      // S2 phase: reads follow s2_addr
      for (ai = 0; ai < D; ai++) begin
        s2_addr = 7'(ai); c1_addr = 7'(D-1-ai); #1 check(rdata == model[ai], $sformatf("S2 read %0d", ai));
      end
      @(negedge clk); flag_clr = 1; @(negedge clk); flag_clr = 0;
      check(!flag, "flag low after clear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
