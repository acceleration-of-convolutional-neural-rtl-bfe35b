// tb_hadamard_mac: self-checking test of the Hadamard multiply-accumulate.
//
// Three input channels of random integer-valued 8x8 spectra are streamed in,
// each multiplied against random filter spectra of two output channels held
// in a behavioural RAM. After the channels, both output channels are drained
// and every bin is compared with sum_cin X_cin * W_(cout,cin), computed in the
// testbench with integer complex arithmetic (exact for integer-valued data).
// A second round with first=1 checks that the accumulator is reloaded, not
// added to. The row throughput (2*n_cout clocks per row) is checked too.
module tb_hadamard_mac;
  import splitconv_pkg::*;

  localparam int CIN = 3, COUT = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [1:0] n_cout, cin;
  logic first, busy, in_valid, in_ready, ws_rd_en, drain_start, out_valid, out_ready;
  cplx_t [7:0] in_row, ws_rd_data, out_row;
  logic [2:0] in_idx, out_idx;
  logic [5:0] ws_rd_addr;
  logic [0:0] drain_cout;
  cplx_t [7:0] wsm [COUT*CIN*8];
  longint xre [CIN][8][8], xim [CIN][8][8];
  longint wre [COUT][CIN][8][8], wim [COUT][CIN][8][8];
  int checks = 0, failures = 0, cycle = 0;

  hadamard_mac #(.MAX_CIN(CIN), .MAX_COUT(COUT)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (ws_rd_en) ws_rd_data <= wsm[ws_rd_addr];

  function automatic fx_t fx(input longint v);
    return fx_t'(v) <<< FRAC;
  endfunction

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    n_cout = 2'(COUT); cin = 0; first = 0; in_valid = 0; in_row = '0; in_idx = 0;
    drain_start = 0; drain_cout = 0; out_ready = 0;
    for (int round = 0; round < 2; round++) begin
      int ncin;
      ncin = (round == 0) ? CIN : 1;
      for (int o = 0; o < COUT; o++)
        for (int c = 0; c < CIN; c++)
          for (int r = 0; r < 8; r++)
            for (int b = 0; b < 8; b++) begin
              wre[o][c][r][b] = $signed($urandom_range(0, 2000)) - 1000;
              wim[o][c][r][b] = $signed($urandom_range(0, 2000)) - 1000;
              wsm[(o * CIN + c) * 8 + r][b].re = fx(wre[o][c][r][b]);
              wsm[(o * CIN + c) * 8 + r][b].im = fx(wim[o][c][r][b]);
            end
      if (round == 0) begin
        repeat (3) @(posedge clk);
        rst_n = 1;
      end
      for (int c = 0; c < ncin; c++)
        for (int r = 0; r < 8; r++) begin
          int t0;
          for (int b = 0; b < 8; b++) begin
            xre[c][r][b] = $signed($urandom_range(0, 20000)) - 10000;
            xim[c][r][b] = $signed($urandom_range(0, 20000)) - 10000;
          end
          @(posedge clk);
          in_valid <= 1; cin <= 2'(c); first <= (c == 0); in_idx <= 3'(r);
          for (int b = 0; b < 8; b++) begin
            in_row[b].re <= fx(xre[c][r][b]);
            in_row[b].im <= fx(xim[c][r][b]);
          end
          t0 = cycle;
          do @(posedge clk); while (!in_ready);
          checks++;
          if (cycle - t0 != 2 * COUT + 1) begin  // plus the edge that presents the row
            failures++;
            $display("row took %0d clocks", cycle - t0);
          end
          in_valid <= 0;
        end
      // drain and compare
      for (int o = 0; o < COUT; o++) begin
        int r;
        @(posedge clk);
        drain_start <= 1; drain_cout <= 1'(o);
        @(posedge clk);
        drain_start <= 0;
        r = 0;
        while (r < 8) begin
          out_ready <= ($urandom_range(0, 1) == 1);
          @(posedge clk);
          if (out_valid && out_ready) begin
            checks++;
            if (out_idx != 3'(r)) failures++;
            for (int b = 0; b < 8; b++) begin
              longint er, ei;
              er = 0; ei = 0;
              for (int c = 0; c < ncin; c++) begin
                er += xre[c][r][b] * wre[o][c][r][b] - xim[c][r][b] * wim[o][c][r][b];
                ei += xre[c][r][b] * wim[o][c][r][b] + xim[c][r][b] * wre[o][c][r][b];
              end
              checks++;
              if (out_row[b].re !== fx(er) || out_row[b].im !== fx(ei)) begin
                failures++;
                if (failures < 10)
                  $display("round %0d cout %0d bin (%0d,%0d): got %0d,%0d expected %0d,%0d",
                           round, o, r, b, out_row[b].re >>> FRAC, out_row[b].im >>> FRAC, er, ei);
              end
            end
            r++;
          end
        end
        out_ready <= 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
