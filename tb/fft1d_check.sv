// fft1d_check: stimulus and checker for one fft1d instance of size N, used by
// tb_fft1d. Streams NVEC random complex integer vectors back to back (the
// first one an impulse), compares each output vector with a direct N-point
// DFT in floating point to within 1e-3, and checks on every clock that
// out_valid equals in_valid delayed by log2(N) clocks.
module fft1d_check
  import splitconv_pkg::*;
#(
  parameter int unsigned N = 8,
  parameter int unsigned NVEC = 40
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic finished
);
  localparam int L = $clog2(N);

  logic in_valid, out_valid;
  cplx_t [N-1:0] in_vec, out_vec;
  real xr [NVEC][N], xi [NVEC][N];
  logic [L-1:0] vhist;

  fft1d #(.N(N)) dut (.*);

  function automatic real fx2r(input fx_t v);
    return real'(v) / real'(64'sd1 <<< FRAC);
  endfunction

  initial begin
    checks = 0; failures = 0; finished = 0; vhist = '0;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid !== vhist[L-1]) failures++;
    end
    vhist <= L'({vhist, in_valid});
  end

  initial begin
    in_valid = 1'b0;
    in_vec   = '0;
    @(posedge rst_n);
    @(posedge clk);
    for (int v = 0; v < int'(NVEC); v++) begin
      for (int i = 0; i < int'(N); i++) begin
        int a, b;
        a = (v == 0) ? (i == 0 ? 1 : 0) : $signed($urandom_range(0, 60000)) - 30000;
        b = (v == 0) ? 0 : $signed($urandom_range(0, 60000)) - 30000;
        xr[v][i] = a; xi[v][i] = b;
        in_vec[i].re <= fx_t'(a) <<< FRAC;
        in_vec[i].im <= fx_t'(b) <<< FRAC;
      end
      in_valid <= 1'b1;
      @(posedge clk);
    end
    in_valid <= 1'b0;
  end

  initial begin
    int v;
    v = 0;
    @(posedge rst_n);
    while (v < int'(NVEC)) begin
      @(posedge clk);
      if (out_valid) begin
        for (int k = 0; k < int'(N); k++) begin
          real er, ei;
          er = 0.0; ei = 0.0;
          for (int n = 0; n < int'(N); n++) begin
            real ang;
            ang = -2.0 * 3.14159265358979323846 * real'(n * k) / real'(N);
            er += xr[v][n] * $cos(ang) - xi[v][n] * $sin(ang);
            ei += xr[v][n] * $sin(ang) + xi[v][n] * $cos(ang);
          end
          checks++;
          if ((fx2r(out_vec[k].re) - er) > 1e-3 || (er - fx2r(out_vec[k].re)) > 1e-3 ||
              (fx2r(out_vec[k].im) - ei) > 1e-3 || (ei - fx2r(out_vec[k].im)) > 1e-3) begin
            failures++;
            if (failures < 8)
              $display("N=%0d vector %0d bin %0d: got %f,%f expected %f,%f", N, v, k,
                       fx2r(out_vec[k].re), fx2r(out_vec[k].im), er, ei);
          end
        end
        v++;
      end
    end
    finished = 1;
  end
endmodule
