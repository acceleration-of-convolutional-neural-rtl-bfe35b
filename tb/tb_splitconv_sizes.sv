// tb_splitconv_sizes: end-to-end runs with other split sizes.
//
// The method lets the patch size follow the hardware budget and evaluates
// kernels from 3x3 up to 15x15. Two engines run side by side:
//   * 16x16 transforms, 7x7 kernels (S = 10), 23x23 maps, 2 -> 2 channels;
//   * 32x32 transforms, 15x15 kernels (S = 18), 40x40 maps, 1 -> 1 channel.
// Every output pixel is compared with a direct spatial convolution.
module tb_splitconv_sizes;
  logic clk = 1'b0, rst_n = 1'b0;
  int ca, fa, ka, cb, fb, kb;
  logic da, db;

  splitconv_run_check #(.FFT_N(16), .K(7), .N(23), .NCIN(2), .NCOUT(2)) u_a (
    .clk, .rst_n, .checks(ca), .failures(fa), .clocks(ka), .finished(da));
  splitconv_run_check #(.FFT_N(32), .K(15), .N(40), .NCIN(1), .NCOUT(1)) u_b (
    .clk, .rst_n, .checks(cb), .failures(fb), .clocks(kb), .finished(db));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", ca + cb, fa + fb + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (da && db);
    $display("16x16, K=7, 23x23, 2->2: %0d clocks; 32x32, K=15, 40x40, 1->1: %0d clocks", ka, kb);
    $display("TB_RESULT checks=%0d failures=%0d", ca + cb, fa + fb);
    $finish;
  end
endmodule
