// tb_patch_extractor: self-checking test of patch splitting and padding.
//
// A 14x14, two-channel random image lives in a behavioural RAM with one clock
// of read latency. For every tile of both channels (3x3 tiles of 6x6, the last
// row and column of tiles only partly inside the image) the testbench
// requests the padded 8x8 patch, accepts rows with a randomly stalling
// out_ready, and compares every element with the image pixel at
// (6*tile + a - 1, 6*tile + b - 1), or zero outside the image. It also checks
// that reads never leave the image and that an unstalled patch takes 65 clocks
// from start to the last row.
module tb_patch_extractor;
  import splitconv_pkg::*;

  localparam int N = 14, K = 3, CIN = 2, S = 6, NT = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy, rd_en, out_valid, out_ready;
  logic [1:0] tile_r, tile_c;
  logic [0:0] cin;
  logic [8:0] rd_addr;
  logic signed [7:0] rd_data;
  cplx_t [7:0] out_row;
  logic signed [7:0] img [CIN*N*N];
  int checks = 0, failures = 0, cycle = 0, zeros = 0;

  patch_extractor #(.IMG_N(N), .K(K), .MAX_CIN(CIN)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (rd_en) rd_data <= img[rd_addr];
  always @(posedge clk) if (rd_en && int'(rd_addr) >= CIN*N*N) begin
    failures++;
    $display("read outside the buffer: %0d", rd_addr);
  end

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; tile_r = 0; tile_c = 0; cin = 0; out_ready = 0;
    for (int i = 0; i < CIN*N*N; i++) img[i] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < CIN; c++)
      for (int tr = 0; tr < NT; tr++)
        for (int tc = 0; tc < NT; tc++) begin
          int r, t0;
          bit stall;
          stall = (tr + tc) % 2 == 1;
          @(posedge clk);
          start <= 1; tile_r <= 2'(tr); tile_c <= 2'(tc); cin <= 1'(c);
          t0 = cycle;
          @(posedge clk);
          start <= 0;
          r = 0;
          while (r < 8) begin
            out_ready <= stall ? ($urandom_range(0, 3) == 0) : 1'b1;
            @(posedge clk);
            if (out_valid && out_ready) begin
              for (int b = 0; b < 8; b++) begin
                int y, x;
                logic signed [31:0] e;
                y = tr * S + r - K / 2;
                x = tc * S + b - K / 2;
                e = (y >= 0 && y < N && x >= 0 && x < N) ? 32'(img[(c * N + y) * N + x]) : 0;
                if (e == 0) zeros++;
                checks++;
                if (out_row[b] !== to_cplx(e)) begin
                  failures++;
                  $display("ch %0d tile (%0d,%0d) elem (%0d,%0d): got %0d expected %0d",
                           c, tr, tc, r, b, out_row[b].re >>> FRAC, e);
                end
              end
              r++;
            end
          end
          if (!stall && c == 0 && tr == 0 && tc == 0) begin
            checks++;
            if (cycle - t0 != 67) begin  // 65 engine clocks plus the two tb edges
              failures++;
              $display("patch took %0d clocks", cycle - t0);
            end
          end
          out_ready <= 0;
          @(posedge clk);
          checks++;
          if (busy) failures++;
        end
    checks++;
    if (zeros < 50) failures++;  // the border padding must have been exercised
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
