// tb_splitconv_top: end-to-end test of the split-convolution engine at a
// reduced size (14x14 maps, 3x3 kernels, up to 3 input and 2 output channels).
//
// For each run the testbench loads random 8-bit maps and kernels through the
// host ports, starts the engine, waits for done and reads back every output
// pixel, comparing it with a direct spatial convolution
//   y_o(r,c) = sum_i sum_(a,b) w_(o,i)[a][b] * x_i[r+1-a][c+1-b]
// (zero outside the map). Runs use (n_cin, n_cout) = (3,2), (1,1) and (2,2),
// the last with extreme values (all +127 / -128). It counts how often each
// mechanism of the engine occurred and fails if one never did: filter
// transforms, patch transforms, inverse transforms, border padding reads
// skipped, partial tiles cropped at the map edge, accumulation over input
// channels, several output channels per patch, and back-pressure from the
// Hadamard unit and from crop_concat onto the transform engine.
module tb_splitconv_top;
  import splitconv_pkg::*;

  localparam int N = 14, K = 3, MCIN = 3, MCOUT = 2;
  localparam int NT = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy, done;
  logic [1:0] n_cin, n_cout;
  logic in_wr_en, w_wr_en, out_rd_en;
  logic [9:0] in_wr_addr;
  logic [5:0] w_wr_addr;
  logic [8:0] out_rd_addr;
  logic signed [7:0] in_wr_data, w_wr_data;
  logic signed [31:0] out_rd_data;

  logic signed [7:0] img [MCIN][N][N];
  logic signed [7:0] wt [MCOUT][MCIN][K][K];
  int checks = 0, failures = 0;

  // mechanism counters
  int n_filter_fft = 0, n_patch_fft = 0, n_ifft = 0, n_pad = 0, n_partial = 0;
  int n_accum = 0, n_multi_cout = 0, n_hm_stall = 0, n_cc_stall = 0;

  splitconv_top #(.IMG_N(N), .K(K), .MAX_CIN(MCIN), .MAX_COUT(MCOUT)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (dut.fft_start && dut.phase == PH_FILTER) n_filter_fft++;
    if (dut.fft_start && dut.phase == PH_PATCH)  n_patch_fft++;
    if (dut.fft_start && dut.phase == PH_INV)    n_ifft++;
    if (dut.u_patch.active && !dut.u_patch.in_img) n_pad++;
    if (dut.cc_start && (dut.tile_r == 2'(NT - 1) || dut.tile_c == 2'(NT - 1))) n_partial++;
    if (dut.u_hadamard.state == 2'd2 && !dut.first_cin) n_accum++;
    if (dut.u_hadamard.state == 2'd2 && dut.u_hadamard.co != 0) n_multi_cout++;
    if (dut.phase == PH_PATCH && dut.f_out_valid && !dut.f_out_ready) n_hm_stall++;
    if (dut.phase == PH_INV && dut.f_out_valid && !dut.f_out_ready) n_cc_stall++;
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int nci, input int nco, input int mode);
    int t0, t1;
    // load
    for (int c = 0; c < nci; c++)
      for (int r = 0; r < N; r++)
        for (int x = 0; x < N; x++) begin
          img[c][r][x] = (mode == 1) ? (((r + x + c) % 2 == 0) ? 8'sd127 : -8'sd128) : 8'($urandom);
          @(negedge clk);
          in_wr_en = 1; in_wr_addr = 10'((c * N + r) * N + x); in_wr_data = img[c][r][x];
        end
    for (int o = 0; o < nco; o++)
      for (int c = 0; c < nci; c++)
        for (int a = 0; a < K; a++)
          for (int b = 0; b < K; b++) begin
            wt[o][c][a][b] = (mode == 1) ? (((a + b + c) % 2 == 0) ? 8'sd127 : -8'sd128) : 8'($urandom);
            @(negedge clk);
            w_wr_en = 1; w_wr_addr = 6'(((o * MCIN + c) * K + a) * K + b); w_wr_data = wt[o][c][a][b];
          end
    @(negedge clk);
    in_wr_en = 0; w_wr_en = 0;
    n_cin = 2'(nci); n_cout = 2'(nco); start = 1;
    t0 = $time;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    t1 = $time;
    $display("run cin=%0d cout=%0d: %0d clocks", nci, nco, (t1 - t0) / 10);
    // read back and compare
    for (int o = 0; o < nco; o++)
      for (int r = 0; r < N; r++)
        for (int x = 0; x < N; x++) begin
          longint e;
          e = 0;
          for (int c = 0; c < nci; c++)
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
            if (failures < 10)
              $display("cout %0d pixel (%0d,%0d): got %0d expected %0d", o, r, x, out_rd_data, e);
          end
        end
  endtask

  initial begin
    start = 0; n_cin = 1; n_cout = 1;
    in_wr_en = 0; w_wr_en = 0; out_rd_en = 0;
    in_wr_addr = '0; w_wr_addr = '0; out_rd_addr = '0; in_wr_data = '0; w_wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(3, 2, 0);
    run(1, 1, 0);
    run(2, 2, 1);
    $display("filter FFTs %0d, patch FFTs %0d, IFFTs %0d, padded positions %0d, edge tiles %0d",
             n_filter_fft, n_patch_fft, n_ifft, n_pad, n_partial);
    $display("accumulations %0d, extra-cout products %0d, Hadamard stalls %0d, crop stalls %0d",
             n_accum, n_multi_cout, n_hm_stall, n_cc_stall);
    checks++; if (n_filter_fft != 6 + 1 + 4) failures++;
    checks++; if (n_patch_fft != 9 * (3 + 1 + 2)) failures++;
    checks++; if (n_ifft != 9 * (2 + 1 + 2)) failures++;
    checks++; if (n_pad == 0) failures++;
    checks++; if (n_partial == 0) failures++;
    checks++; if (n_accum == 0) failures++;
    checks++; if (n_multi_cout == 0) failures++;
    checks++; if (n_hm_stall == 0) failures++;
    checks++; if (n_cc_stall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
