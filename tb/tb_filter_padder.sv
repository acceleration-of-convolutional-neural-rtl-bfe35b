// tb_filter_padder: self-checking test of filter zero-padding.
//
// A behavioural weight RAM (one clock read latency) holds random 3x3 filters
// for 3 output x 2 input channels. For each pair the testbench requests the
// padded 8x8 filter, accepts rows with a randomly stalling out_ready, and
// checks that element (r, c) is the weight w[r][c] for r, c < 3 and zero
// elsewhere; it also checks that an unstalled filter takes 65 clocks.
module tb_filter_padder;
  import splitconv_pkg::*;

  localparam int K = 3, CIN = 2, COUT = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy, rd_en, out_valid, out_ready;
  logic [1:0] cout;
  logic [0:0] cin;
  logic [5:0] rd_addr;
  logic signed [7:0] rd_data;
  cplx_t [7:0] out_row;
  logic signed [7:0] wm [COUT*CIN*K*K];
  int checks = 0, failures = 0, cycle = 0;

  filter_padder #(.K(K), .MAX_CIN(CIN), .MAX_COUT(COUT)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (rd_en) rd_data <= wm[rd_addr];

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; cout = 0; cin = 0; out_ready = 0;
    for (int i = 0; i < COUT*CIN*K*K; i++) wm[i] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int o = 0; o < COUT; o++)
      for (int c = 0; c < CIN; c++) begin
        int r, t0;
        bit stall;
        stall = (o + c) % 2 == 1;
        @(posedge clk);
        start <= 1; cout <= 2'(o); cin <= 1'(c);
        t0 = cycle;
        @(posedge clk);
        start <= 0;
        r = 0;
        while (r < 8) begin
          out_ready <= stall ? ($urandom_range(0, 3) == 0) : 1'b1;
          @(posedge clk);
          if (out_valid && out_ready) begin
            for (int b = 0; b < 8; b++) begin
              logic signed [31:0] e;
              e = (r < K && b < K) ? 32'(wm[((o * CIN + c) * K + r) * K + b]) : 0;
              checks++;
              if (out_row[b] !== to_cplx(e)) begin
                failures++;
                $display("filter (%0d,%0d) elem (%0d,%0d): got %0d expected %0d",
                         o, c, r, b, out_row[b].re >>> FRAC, e);
              end
            end
            r++;
          end
        end
        if (!stall) begin
          checks++;
          if (cycle - t0 != 67) begin  // 65 engine clocks plus the two tb edges
            failures++;
            $display("filter took %0d clocks", cycle - t0);
          end
        end
        out_ready <= 0;
        @(posedge clk);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
