// tb_fft2d: self-checking test of the 8x8 row-column FFT engine.
//
// For several random complex integer blocks: runs a forward transform and
// compares all 64 bins with a direct 2-D DFT in floating point; then feeds
// the spectrum back with inverse=1 and checks that 64 times the original
// block comes back. The consumer drops out_ready at random to exercise the
// output handshake. The unstalled forward transform must take 38 clocks from
// start to done.
module tb_fft2d;
  import splitconv_pkg::*;

  localparam int NBLK = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, inverse, busy, in_valid, in_ready, out_valid, out_ready, done;
  cplx_t [7:0] in_row, out_row;
  logic [2:0] out_idx;
  int checks = 0, failures = 0;
  int cycle = 0;

  real xr [8][8], xi [8][8];
  cplx_t [7:0] spec [8];

  fft2d dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic real fx2r(input fx_t v);
    return real'(v) / real'(64'sd1 <<< FRAC);
  endfunction

  function automatic bit close(input real a, input real b);
    return (a - b) < 1e-3 && (b - a) < 1e-3;
  endfunction

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // run one transform; rows from src, results to spec; returns clocks start..done
  task automatic run(input bit inv, input cplx_t [7:0] src [8], input bit stall, output int clocks);
    int t0, r;
    @(posedge clk);
    start <= 1'b1; inverse <= inv;
    t0 = cycle;
    @(posedge clk);
    start <= 1'b0;
    for (int i = 0; i < 8; i++) begin
      in_valid <= 1'b1; in_row <= src[i];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    in_valid <= 1'b0;
    r = 0;
    while (r < 8) begin
      out_ready <= stall ? ($urandom_range(0, 2) != 0) : 1'b1;
      @(posedge clk);
      if (out_valid && out_ready) begin
        checks++;
        if (out_idx != 3'(r)) failures++;
        spec[r] = out_row;
        r++;
        if (r == 8 && !done) begin
          // done is registered: it must be high on the next clock
          @(posedge clk);
          checks++;
          if (!done) failures++;
          clocks = cycle - t0;
          out_ready <= 1'b0;
          return;
        end
      end
    end
  endtask

  initial begin
    cplx_t [7:0] src [8];
    int clocks;
    start = 0; inverse = 0; in_valid = 0; in_row = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < NBLK; b++) begin
      for (int r = 0; r < 8; r++)
        for (int c = 0; c < 8; c++) begin
          int a, q;
          a = $signed($urandom_range(0, 512)) - 256;
          q = (b == 0) ? 0 : $signed($urandom_range(0, 512)) - 256;
          xr[r][c] = a; xi[r][c] = q;
          src[r][c].re = fx_t'(a) <<< FRAC;
          src[r][c].im = fx_t'(q) <<< FRAC;
        end
      run(1'b0, src, b[0], clocks);
      if (b == 0) begin
        checks++;
        if (clocks != 40) begin  // 38 engine clocks plus the two tb edges around them
          failures++;
          $display("forward transform took %0d clocks from start to done", clocks - 1);
        end
      end
      // forward: compare with the 2-D DFT
      for (int k = 0; k < 8; k++)
        for (int l = 0; l < 8; l++) begin
          real er, ei;
          er = 0.0; ei = 0.0;
          for (int m = 0; m < 8; m++)
            for (int n = 0; n < 8; n++) begin
              real ang;
              ang = -2.0 * 3.14159265358979323846 * real'(m * k + n * l) / 8.0;
              er += xr[m][n] * $cos(ang) - xi[m][n] * $sin(ang);
              ei += xr[m][n] * $sin(ang) + xi[m][n] * $cos(ang);
            end
          checks++;
          if (!close(fx2r(spec[k][l].re), er) || !close(fx2r(spec[k][l].im), ei)) begin
            failures++;
            if (failures < 10)
              $display("block %0d bin (%0d,%0d): got %f,%f expected %f,%f", b, k, l,
                       fx2r(spec[k][l].re), fx2r(spec[k][l].im), er, ei);
          end
        end
      // inverse: must return 64 x the block
      src = spec;
      run(1'b1, src, 1'b1, clocks);
      for (int m = 0; m < 8; m++)
        for (int n = 0; n < 8; n++) begin
          checks++;
          if (!close(fx2r(spec[m][n].re), 64.0 * xr[m][n]) ||
              !close(fx2r(spec[m][n].im), 64.0 * xi[m][n])) begin
            failures++;
            if (failures < 10)
              $display("inverse block %0d (%0d,%0d): got %f,%f expected %f,%f", b, m, n,
                       fx2r(spec[m][n].re), fx2r(spec[m][n].im), 64.0 * xr[m][n], 64.0 * xi[m][n]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
