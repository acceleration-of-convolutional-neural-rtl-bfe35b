// tb_fft1d: self-checking test of the pipelined radix-2 FFT at the default
// size (8 points) and at 16 and 32 points, each against a floating-point DFT,
// with the log2(N)-clock latency checked on every clock.
module tb_fft1d;
  logic clk = 1'b0, rst_n = 1'b0;
  int c8, f8, c16, f16, c32, f32;
  logic d8, d16, d32;
  int checks, failures;

  fft1d_check #(.N(8))  u8  (.clk, .rst_n, .checks(c8),  .failures(f8),  .finished(d8));
  fft1d_check #(.N(16)) u16 (.clk, .rst_n, .checks(c16), .failures(f16), .finished(d16));
  fft1d_check #(.N(32)) u32 (.clk, .rst_n, .checks(c32), .failures(f32), .finished(d32));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c8 + c16 + c32, f8 + f16 + f32 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (d8 && d16 && d32);
    @(posedge clk);
    checks = c8 + c16 + c32;
    failures = f8 + f16 + f32;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
