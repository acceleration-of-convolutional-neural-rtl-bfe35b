// fft1d: N-point radix-2 decimation-in-time FFT (Cooley-Tukey), fully
// pipelined, one vector of N complex samples per clock.
//
// The input is taken in natural order and permuted to bit-reversed order by
// wiring. log2(N) butterfly stages follow, each ending in a register; stage s
// combines pairs at span h = 2^s with twiddles W_N^(j*N/(2h)), j < h.
// Twiddles 1 and -j are swaps and negations; the others are constants in
// Q1.30 computed at elaboration, applied by a complex multiplier with
// rounding to the datapath's FRAC bits. The output is
// X[k] = sum_n x[n] W_N^(nk) in natural order, unscaled (grows by up to N).
//
// Timing: out_valid/out_vec follow in_valid/in_vec by exactly log2(N) clocks
// (3 for the default N = 8); a new vector may enter on every clock. The
// transform is the Cooley-Tukey FFT the method builds on; the radix, the
// pipelining and the fixed-point format are this design's choices.
module fft1d
  import splitconv_pkg::*;
#(
  parameter int unsigned N = 8,
  localparam int unsigned L = $clog2(N)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  cplx_t [N-1:0]     in_vec,
  output logic              out_valid,
  output cplx_t [N-1:0]     out_vec
);

  typedef tw_t tw_arr_t [N/2];

  function automatic tw_arr_t mk_re();
    tw_arr_t t;
    for (int k = 0; k < int'(N / 2); k++) t[k] = tw_re(k, N);
    return t;
  endfunction

  function automatic tw_arr_t mk_im();
    tw_arr_t t;
    for (int k = 0; k < int'(N / 2); k++) t[k] = tw_im(k, N);
    return t;
  endfunction

  localparam tw_arr_t TWR = mk_re();
  localparam tw_arr_t TWI = mk_im();

  // x * W_N^k
  function automatic cplx_t twiddle(input cplx_t x, input int unsigned k);
    cplx_t y;
    if (k == 0) begin
      y = x;
    end else if (k == N / 4) begin  // -j
      y.re = x.im;
      y.im = -x.re;
    end else begin
      y = cmul_tw(x, TWR[k], TWI[k]);
    end
    return y;
  endfunction

  cplx_t [N-1:0] s0;
  logic [L-1:0]  vld_q;

  always_comb begin
    for (int i = 0; i < int'(N); i++) s0[i] = in_vec[bitrev(i, L)];
  end

  for (genvar s = 0; s < int'(L); s++) begin : g_stage
    localparam int unsigned H = 1 << s;
    cplx_t [N-1:0] d, q;
    cplx_t [N-1:0] x;

    if (s == 0) begin : g_first
      assign x = s0;
    end else begin : g_next
      assign x = g_stage[s-1].q;
    end

    always_comb begin
      d = x;
      for (int i = 0; i < int'(N); i++) begin
        if (((i >> s) & 1) == 0) begin
          cplx_t b;
          b = twiddle(x[i + int'(H)], (i & int'(H - 1)) * int'(N / (2 * H)));
          d[i]              = cadd(x[i], b);
          d[i + int'(H)]    = csub(x[i], b);
        end
      end
    end

    always_ff @(posedge clk) q <= d;
  end

  assign out_vec = g_stage[L-1].q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld_q <= '0;
    else        vld_q <= L'({vld_q, in_valid});
  end

  assign out_valid = vld_q[L-1];

endmodule
