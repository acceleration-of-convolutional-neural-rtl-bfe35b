// fft2d: FFT_N x FFT_N two-dimensional FFT and inverse FFT by row-column
// decomposition.
//
// One pipelined fft1d is shared by both passes. A full FFT_N x FFT_N complex
// buffer holds the block: it is filled one row per clock, transformed row by
// row (results written back in place log2(FFT_N) clocks later), then column
// by column, and then read out one row per clock. Reading row/column i and
// writing back an earlier one never touch the same element, so the buffer
// serves as its own transpose memory.
//
// Inverse transform: with inverse=1 at start the block is conjugated on entry
// and on exit, so the engine returns FFT_N^2 * IFFT(X) = conj(FFT(conj(X)));
// the 1/FFT_N^2 is left to the consumer (crop_concat folds it into its
// rounding).
//
// Interface: start (with inverse) while idle; then FFT_N rows on
// in_valid/in_ready (in_ready is high throughout LOAD); FFT_N result rows on
// out_valid/out_ready with out_idx the row number; done pulses with the last
// accepted row. Timing with no stalls: 4*FFT_N + 2*log2(FFT_N)
// clocks from start to done, 38 for the default 8x8. The method applies the
// 2-D FFT to each padded patch and filter and the inverse FFT to each
// product; the row-column architecture is this design's.
module fft2d
  import splitconv_pkg::*;
#(
  parameter int unsigned FFT_N = 8,
  localparam int unsigned LW   = $clog2(FFT_N)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic                  inverse,
  output logic                  busy,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  cplx_t [FFT_N-1:0]     in_row,
  output logic                  out_valid,
  input  logic                  out_ready,
  output cplx_t [FFT_N-1:0]     out_row,
  output logic [LW-1:0]         out_idx,
  output logic                  done
);

  typedef cplx_t [FFT_N-1:0] row_t;
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_ROW, S_COL, S_OUT} state_t;
  state_t state;

  row_t         buf_q [FFT_N];
  logic         inv_q;
  logic [LW:0]  rd_cnt;   // vectors issued to fft1d in this pass (0..FFT_N)
  logic [LW-1:0] wr_cnt;  // vectors written back in this pass
  logic [LW-1:0] cnt;     // load / output row counter

  logic f_in_valid, f_out_valid;
  row_t f_in_vec, f_out_vec;

  localparam logic [LW-1:0] LAST = LW'(FFT_N - 1);

  fft1d #(.N(FFT_N)) u_fft1d (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (f_in_valid),
    .in_vec    (f_in_vec),
    .out_valid (f_out_valid),
    .out_vec   (f_out_vec)
  );

  // feed the transform unit
  always_comb begin
    f_in_valid = 1'b0;
    f_in_vec   = buf_q[rd_cnt[LW-1:0]];
    if ((state == S_ROW || state == S_COL) && !rd_cnt[LW]) f_in_valid = 1'b1;
    if (state == S_COL) begin
      for (int i = 0; i < int'(FFT_N); i++) f_in_vec[i] = buf_q[i][rd_cnt[LW-1:0]];
    end
  end

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_OUT);
  assign out_idx   = cnt;
  assign busy      = (state != S_IDLE);

  always_comb begin
    for (int i = 0; i < int'(FFT_N); i++)
      out_row[i] = inv_q ? conj(buf_q[cnt][i]) : buf_q[cnt][i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      inv_q  <= 1'b0;
      rd_cnt <= '0;
      wr_cnt <= '0;
      cnt    <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          inv_q <= inverse;
          cnt   <= '0;
          state <= S_LOAD;
        end
        S_LOAD: if (in_valid) begin
          cnt <= cnt + LW'(1);
          if (cnt == LAST) begin
            rd_cnt <= '0;
            wr_cnt <= '0;
            state  <= S_ROW;
          end
        end
        S_ROW, S_COL: begin
          if (!rd_cnt[LW]) rd_cnt <= rd_cnt + (LW+1)'(1);
          if (f_out_valid) begin
            wr_cnt <= wr_cnt + LW'(1);
            if (wr_cnt == LAST) begin
              rd_cnt <= '0;
              cnt    <= '0;
              state  <= (state == S_ROW) ? S_COL : S_OUT;
            end
          end
        end
        S_OUT: if (out_ready) begin
          cnt <= cnt + LW'(1);
          if (cnt == LAST) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // buffer writes: load, row write-back, column write-back
  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) begin
      for (int i = 0; i < int'(FFT_N); i++)
        buf_q[cnt][i] <= inv_q ? conj(in_row[i]) : in_row[i];
    end else if (state == S_ROW && f_out_valid) begin
      buf_q[wr_cnt] <= f_out_vec;
    end else if (state == S_COL && f_out_valid) begin
      for (int i = 0; i < int'(FFT_N); i++) buf_q[i][wr_cnt] <= f_out_vec[i];
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   f_in_valid |-> (state == S_ROW || state == S_COL));
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_IDLE) |-> !f_out_valid);

endmodule
