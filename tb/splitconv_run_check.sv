// splitconv_run_check: one engine instance with its own stimulus and checker,
// used by tb_splitconv_sizes to test transform sizes other than 8x8.
//
// Loads random 8-bit maps (NCIN channels of N x N) and KxK kernels, runs the
// engine with n_cin = NCIN and n_cout = NCOUT, and compares every output
// pixel with a direct spatial convolution
//   y_o(r,c) = sum_i sum_(a,b) w_(o,i)[a][b] * x_i[r+K/2-a][c+K/2-b].
module splitconv_run_check
  import splitconv_pkg::*;
#(
  parameter int unsigned FFT_N = 16,
  parameter int unsigned K     = 7,
  parameter int unsigned N     = 23,
  parameter int unsigned NCIN  = 2,
  parameter int unsigned NCOUT = 2
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output int   clocks,
  output logic finished
);
  localparam int IN_AW  = $clog2(NCIN * N * N);
  localparam int W_AW   = $clog2(NCOUT * NCIN * K * K);
  localparam int OUT_AW = $clog2(NCOUT * N * N);

  logic start, busy, done;
  logic [$clog2(NCIN+1)-1:0] n_cin;
  logic [$clog2(NCOUT+1)-1:0] n_cout;
  logic in_wr_en, w_wr_en, out_rd_en;
  logic [IN_AW-1:0] in_wr_addr;
  logic [W_AW-1:0] w_wr_addr;
  logic [OUT_AW-1:0] out_rd_addr;
  logic signed [7:0] in_wr_data, w_wr_data;
  logic signed [31:0] out_rd_data;
  logic signed [7:0] img [NCIN][N][N];
  logic signed [7:0] wt [NCOUT][NCIN][K][K];

  splitconv_top #(.FFT_N(FFT_N), .IMG_N(N), .K(K), .MAX_CIN(NCIN), .MAX_COUT(NCOUT)) dut (.*);

  initial begin
    longint t0;
    checks = 0; failures = 0; finished = 0; clocks = 0;
    start = 0; n_cin = '0; n_cout = '0;
    in_wr_en = 0; w_wr_en = 0; out_rd_en = 0;
    in_wr_addr = '0; w_wr_addr = '0; out_rd_addr = '0; in_wr_data = '0; w_wr_data = '0;
    @(posedge rst_n);
    for (int c = 0; c < int'(NCIN); c++)
      for (int r = 0; r < int'(N); r++)
        for (int x = 0; x < int'(N); x++) begin
          img[c][r][x] = 8'($urandom);
          @(negedge clk);
          in_wr_en = 1; in_wr_addr = IN_AW'((c * N + r) * N + x); in_wr_data = img[c][r][x];
        end
    for (int o = 0; o < int'(NCOUT); o++)
      for (int c = 0; c < int'(NCIN); c++)
        for (int a = 0; a < int'(K); a++)
          for (int b = 0; b < int'(K); b++) begin
            wt[o][c][a][b] = 8'($urandom);
            @(negedge clk);
            w_wr_en = 1; w_wr_addr = W_AW'(((o * NCIN + c) * K + a) * K + b); w_wr_data = wt[o][c][a][b];
          end
    @(negedge clk);
    in_wr_en = 0; w_wr_en = 0;
    n_cin = ($clog2(NCIN+1))'(NCIN); n_cout = ($clog2(NCOUT+1))'(NCOUT); start = 1;
    t0 = $time;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    clocks = int'(($time - t0) / 10);
    for (int o = 0; o < int'(NCOUT); o++)
      for (int r = 0; r < int'(N); r++)
        for (int x = 0; x < int'(N); x++) begin
          longint e;
          e = 0;
          for (int c = 0; c < int'(NCIN); c++)
            for (int a = 0; a < int'(K); a++)
              for (int b = 0; b < int'(K); b++) begin
                int yy, xx;
                yy = r + int'(K / 2) - a;
                xx = x + int'(K / 2) - b;
                if (yy >= 0 && yy < int'(N) && xx >= 0 && xx < int'(N))
                  e += longint'(wt[o][c][a][b]) * longint'(img[c][yy][xx]);
              end
          out_rd_en = 1; out_rd_addr = OUT_AW'((o * N + r) * N + x);
          @(negedge clk);
          out_rd_en = 0;
          checks++;
          if (longint'(out_rd_data) != e) begin
            failures++;
            if (failures < 8)
              $display("FFT_N=%0d K=%0d cout %0d pixel (%0d,%0d): got %0d expected %0d",
                       FFT_N, K, o, r, x, out_rd_data, e);
          end
        end
    finished = 1;
  end
endmodule
