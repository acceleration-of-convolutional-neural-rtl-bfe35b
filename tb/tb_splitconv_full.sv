// tb_splitconv_full: one complete run of the engine at its default size.
//
// The default configuration holds one 224x224 input map and one 3x3 filter.
// The testbench loads a random map and filter, runs the convolution (38 x 38
// tiles of 6x6) and compares all 50176 output pixels with a direct spatial
// convolution computed in the testbench. It also checks that the average time
// per tile stays under 395 clocks, the latency reported for an 8x8
// single-channel block of the reference FPGA implementation.
module tb_splitconv_full;
  import splitconv_pkg::*;

  localparam int N = 224, K = 3, S = 6, NT = 38;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy, done;
  logic [0:0] n_cin, n_cout;
  logic in_wr_en, w_wr_en, out_rd_en;
  logic [15:0] in_wr_addr, out_rd_addr;
  logic [3:0] w_wr_addr;
  logic signed [7:0] in_wr_data, w_wr_data;
  logic signed [31:0] out_rd_data;

  logic signed [7:0] img [N][N];
  logic signed [7:0] wt [K][K];
  int checks = 0, failures = 0;

  splitconv_top dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0, t1, clocks;
    start = 0; n_cin = 1; n_cout = 1;
    in_wr_en = 0; w_wr_en = 0; out_rd_en = 0;
    in_wr_addr = '0; w_wr_addr = '0; out_rd_addr = '0; in_wr_data = '0; w_wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < N; r++)
      for (int x = 0; x < N; x++) begin
        img[r][x] = 8'($urandom);
        @(negedge clk);
        in_wr_en = 1; in_wr_addr = 16'(r * N + x); in_wr_data = img[r][x];
      end
    for (int a = 0; a < K; a++)
      for (int b = 0; b < K; b++) begin
        wt[a][b] = 8'($urandom);
        @(negedge clk);
        w_wr_en = 1; w_wr_addr = 4'(a * K + b); w_wr_data = wt[a][b];
      end
    @(negedge clk);
    in_wr_en = 0; w_wr_en = 0;
    start = 1;
    t0 = $time;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    t1 = $time;
    clocks = (t1 - t0) / 10;
    $display("full run: %0d clocks, %0d per tile", clocks, clocks / (NT * NT));
    checks++;
    if (clocks >= longint'(395) * NT * NT) failures++;
    for (int r = 0; r < N; r++)
      for (int x = 0; x < N; x++) begin
        int e;
        e = 0;
        for (int a = 0; a < K; a++)
          for (int b = 0; b < K; b++) begin
            int yy, xx;
            yy = r + K / 2 - a;
            xx = x + K / 2 - b;
            if (yy >= 0 && yy < N && xx >= 0 && xx < N) e += int'(wt[a][b]) * int'(img[yy][xx]);
          end
        out_rd_en = 1; out_rd_addr = 16'(r * N + x);
        @(negedge clk);
        out_rd_en = 0;
        checks++;
        if (out_rd_data != e) begin
          failures++;
          if (failures < 10) $display("pixel (%0d,%0d): got %0d expected %0d", r, x, out_rd_data, e);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
