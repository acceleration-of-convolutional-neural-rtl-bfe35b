// tb_crop_concat: self-checking test of cropping, rounding and concatenation.
//
// For every 6x6 tile of a 14x14 output map (two channels, 3x3 tiles, the last
// ones partly outside the map) the testbench presents eight rows whose real
// parts are 64*v*2^FRAC plus a random error below one half LSB of the result
// (so rounding must recover v) and whose rows/columns 0..1 hold garbage. At
// the end every pixel of both channels must have been written exactly once
// with its value v, and nothing outside the map may have been written.
module tb_crop_concat;
  import splitconv_pkg::*;

  localparam int N = 14, K = 3, COUT = 2, S = 6, NT = 3, OUT_W = 32;
  localparam int SH = FRAC + 6;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy, done, in_valid, in_ready, wr_en;
  logic [1:0] tile_r, tile_c;
  logic [0:0] cout;
  cplx_t [7:0] in_row;
  logic [2:0] in_idx;
  logic [8:0] wr_addr;
  logic signed [OUT_W-1:0] wr_data;
  int checks = 0, failures = 0;
  int expect_v [COUT*N*N];
  int nwrites [COUT*N*N];

  crop_concat #(.IMG_N(N), .K(K), .MAX_COUT(COUT), .OUT_W(OUT_W)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (wr_en) begin
    if (int'(wr_addr) >= COUT*N*N) begin
      failures++;
      $display("write outside the map: %0d", wr_addr);
    end else begin
      nwrites[wr_addr]++;
      checks++;
      if (wr_data != expect_v[wr_addr]) begin
        failures++;
        $display("pixel %0d: got %0d expected %0d", wr_addr, wr_data, expect_v[wr_addr]);
      end
    end
  end

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; tile_r = 0; tile_c = 0; cout = 0; in_valid = 0; in_row = '0; in_idx = 0;
    for (int i = 0; i < COUT*N*N; i++) begin
      expect_v[i] = $signed($urandom_range(0, 2000000)) - 1000000;
      nwrites[i] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int o = 0; o < COUT; o++)
      for (int tr = 0; tr < NT; tr++)
        for (int tc = 0; tc < NT; tc++) begin
          @(posedge clk);
          start <= 1; tile_r <= 2'(tr); tile_c <= 2'(tc); cout <= 1'(o);
          @(posedge clk);
          start <= 0;
          for (int m = 0; m < 8; m++) begin
            @(negedge clk);
            for (int n = 0; n < 8; n++) begin
              int r, c;
              fx_t v, err;
              r = tr * S + m - (K - 1);
              c = tc * S + n - (K - 1);
              err = fx_t'($urandom_range(0, (1 << 25) - 2)) - (fx_t'(1) <<< 24) + 1;
              if (m >= K - 1 && n >= K - 1 && r < N && c < N)
                v = (fx_t'(expect_v[(o * N + r) * N + c]) <<< SH) + err;
              else
                v = fx_t'({$urandom, $urandom}) >>> 8;
              in_row[n].re = v;
              in_row[n].im = fx_t'({$urandom, $urandom});
            end
            in_idx = 3'(m);
            in_valid = 1;
            while (!in_ready) @(negedge clk);
            @(posedge clk);
            #1 in_valid = 0;
          end
          while (!done) @(posedge clk);
          checks++;
          @(posedge clk);
          if (busy) failures++;
        end
    for (int i = 0; i < COUT*N*N; i++) begin
      checks++;
      if (nwrites[i] != 1) begin
        failures++;
        $display("pixel %0d written %0d times", i, nwrites[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
