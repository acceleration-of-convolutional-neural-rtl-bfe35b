// tb_vgg_conv13_slice: a slice of a late VGG16 convolution layer.
//
// VGG16's last three convolution layers take 512 input maps of 14x14 pixels
// and produce 512 output maps with 3x3 kernels. This testbench builds the
// engine for 14x14 maps, 512 input channels and 2 output channels, loads
// random 8-bit maps and kernels, and checks both output channels (all 512
// input channels accumulated in the frequency domain before one inverse FFT
// each) against a direct spatial convolution. It exercises the dynamic range
// of the spectral accumulators; the full layer would be 256 such runs.
module tb_vgg_conv13_slice;
  import splitconv_pkg::*;

  localparam int N = 14, K = 3, CIN = 512, COUT = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy, done;
  logic [9:0] n_cin;
  logic [1:0] n_cout;
  logic in_wr_en, w_wr_en, out_rd_en;
  logic [16:0] in_wr_addr;
  logic [13:0] w_wr_addr;
  logic [8:0] out_rd_addr;
  logic signed [7:0] in_wr_data, w_wr_data;
  logic signed [31:0] out_rd_data;

  logic signed [7:0] img [CIN][N][N];
  logic signed [7:0] wt [COUT][CIN][K][K];
  int checks = 0, failures = 0;

  splitconv_top #(.IMG_N(N), .K(K), .MAX_CIN(CIN), .MAX_COUT(COUT)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0, t1;
    start = 0; n_cin = 10'(CIN); n_cout = 2'(COUT);
    in_wr_en = 0; w_wr_en = 0; out_rd_en = 0;
    in_wr_addr = '0; w_wr_addr = '0; out_rd_addr = '0; in_wr_data = '0; w_wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < CIN; c++)
      for (int r = 0; r < N; r++)
        for (int x = 0; x < N; x++) begin
          img[c][r][x] = 8'($urandom);
          @(negedge clk);
          in_wr_en = 1; in_wr_addr = 17'((c * N + r) * N + x); in_wr_data = img[c][r][x];
        end
    for (int o = 0; o < COUT; o++)
      for (int c = 0; c < CIN; c++)
        for (int a = 0; a < K; a++)
          for (int b = 0; b < K; b++) begin
            wt[o][c][a][b] = 8'($urandom);
            @(negedge clk);
            w_wr_en = 1; w_wr_addr = 14'(((o * CIN + c) * K + a) * K + b); w_wr_data = wt[o][c][a][b];
          end
    @(negedge clk);
    in_wr_en = 0; w_wr_en = 0; start = 1;
    t0 = $time;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    t1 = $time;
    $display("512 -> 2 channels, 14x14: %0d clocks", (t1 - t0) / 10);
    for (int o = 0; o < COUT; o++)
      for (int r = 0; r < N; r++)
        for (int x = 0; x < N; x++) begin
          longint e;
          e = 0;
          for (int c = 0; c < CIN; c++)
            for (int a = 0; a < K; a++)
              for (int b = 0; b < K; b++) begin
                int yy, xx;
                yy = r + K / 2 - a;
                xx = x + K / 2 - b;
                if (yy >= 0 && yy < N && xx >= 0 && xx < N)
                  e += longint'(wt[o][c][a][b]) * longint'(img[c][yy][xx]);
              end
          out_rd_en = 1; out_rd_addr = 9'((o * N + r) * N + x);
          @(negedge clk);
          out_rd_en = 0;
          checks++;
          if (longint'(out_rd_data) != e) begin
            failures++;
            if (failures < 10) $display("cout %0d pixel (%0d,%0d): got %0d expected %0d", o, r, x, out_rd_data, e);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
