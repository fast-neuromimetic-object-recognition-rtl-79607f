// Testbench for s1_normalize: random responses and window energies (including
// zero energy, perfect squares and saturating quotients) at one input per
// cycle; every output is compared with |resp| / floor(sqrt(energy)) computed
// directly, and the latency of ROOT_W + S1W + 2 cycles is checked.
module tb_s1_normalize;
  import hmax_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask
  logic in_valid = 0, out_valid;
  logic signed [3:0][ACC_W-1:0] resp = '0;
  logic [EN_W-1:0] energy = '0;
  logic [3:0][S1W-1:0] mag;
  s1_normalize dut (.*);

  logic [3:0][63:0] expq[$];
  longint tin[$];

  function automatic longint isq(longint v);
    longint r = 0; while ((r+1)*(r+1) <= v) r++; return r;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    logic signed [3:0][63:0] e; longint t0;
    e = expq.pop_front(); t0 = tin.pop_front();
    check(($time/10) - t0 == ROOT_W + S1W + 2, $sformatf("latency %0d", ($time/10) - t0));
    for (int o = 0; o < 4; o++) check(longint'(mag[o]) == $signed(e[o]), $sformatf("o%0d got %0d exp %0d", o, mag[o], e[o]));
  end

  task automatic run_test();
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(4) != 0);
      case ($urandom_range(3))
        0: energy = '0;
        1: begin longint r = $urandom_range(9435); energy = EN_W'(r*r); end
        default: energy = EN_W'($urandom_range(89019225));
      endcase
      for (int o = 0; o < 4; o++) begin
        longint r = isq(longint'(energy));
        longint lim = (r + 1) * 70000;
        longint v = ($urandom_range(3) == 0) ? longint'({$urandom, $urandom} & 64'h1FFF_FFFF_FFFF)
                                             : longint'($urandom_range(32'(lim > 64'hFFFF_FFFF ? 64'hFFFF_FFFF : lim)));
        if ($urandom_range(1)) v = -v;
        resp[o] = ACC_W'(v);
      end
      if (in_valid) begin
        logic signed [3:0][63:0] e; longint r = isq(longint'(energy));
        for (int o = 0; o < 4; o++) begin
          longint a; a = longint'($signed(resp[o])); if (a < 0) a = -a;
          e[o] = (r == 0) ? 0 : ((a / r > 65535) ? 65535 : a / r);
        end
        expq.push_back(e); tin.push_back($time/10);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (40) @(negedge clk);
    check(expq.size() == 0, "all outputs seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  initial run_test();
endmodule
