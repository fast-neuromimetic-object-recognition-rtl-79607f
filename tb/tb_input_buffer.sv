// Testbench for input_buffer: fills the four slots with random images at one
// pixel per cycle, checks that a fifth image is held off (in_ready low) until a
// slot is released, reads every pixel back at random addresses and checks the
// FIFO order and the write rate of one image per IMG_W*IMG_W cycles.
module tb_input_buffer;
  import hmax_pkg::*;
  localparam int W = 8, N = W*W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  logic in_valid = 0, in_ready, rd_avail, rd_release = 0;
  logic [7:0] in_pix = 0, rd_pix;
  logic [$clog2(N)-1:0] rd_addr = 0;
  logic [2:0] full_count;
  input_buffer #(.IMG_W(W), .SLOTS(4)) dut (.*);

  byte unsigned imgs[6][N];
  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int t0, t1, wr_img;
    foreach (imgs[i, j]) imgs[i][j] = 8'($urandom);
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    check(!rd_avail && in_ready, "empty after reset");
    // write four images back to back
    t0 = $time / 10;
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < N; j++) begin
        in_valid <= 1; in_pix <= imgs[i][j];
        @(posedge clk);
        check(in_ready, "ready while a slot is free");
        if (i == 0 && j == N-1) begin #1 check(rd_avail, "image 0 readable after its last pixel"); end
      end
    t1 = $time / 10;
    check(t1 - t0 == 4*N, $sformatf("4 images in %0d cycles", t1 - t0));
    in_valid <= 1; in_pix <= imgs[4][0];
    #1 check(!in_ready, "full after four images");
    check(full_count == 4, "count 4");
    repeat (5) @(posedge clk);
    #1 check(!in_ready, "still full");
    in_valid <= 0;
    // read image 0, release, then image 4 can be written
    for (int r = 0; r < 2; r++) begin
      for (int j = 0; j < N; j++) begin
        rd_addr = $clog2(N)'($urandom_range(N-1));
        #1 check(rd_pix == imgs[r][rd_addr], $sformatf("image %0d pixel %0d", r, rd_addr));
      end
      @(negedge clk); rd_release = 1; @(negedge clk); rd_release = 0;
    end
    check(full_count == 2, "count 2 after two releases");
    wr_img = 4;
    for (int i = 4; i < 6; i++)
      for (int j = 0; j < N; j++) begin
        in_valid <= 1; in_pix <= imgs[i][j];
        @(posedge clk);
      end
    in_valid <= 0;
    @(negedge clk);
    check(full_count == 4, "full again");
    for (int r = 2; r < 6; r++) begin
      for (int j = 0; j < N; j += 3) begin
        rd_addr = $clog2(N)'(j);
        #1 check(rd_pix == imgs[r][j], $sformatf("fifo order image %0d", r));
      end
      @(negedge clk); rd_release = 1; @(negedge clk); rd_release = 0;
    end
    check(!rd_avail && full_count == 0, "empty at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
