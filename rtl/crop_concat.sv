// crop_concat: crops the inverse-transformed patch and writes it into the
// output feature map (concatenation of the tile results).
//
// The inverse transform delivers FFT_N^2 * (patch circularly convolved with the
// padded filter), one row per clock. Rows and columns 0..K-2 of that result
// are corrupted by the wrap-around of the circular convolution and are
// dropped; the remaining S x S block (S = FFT_N - K + 1) is exactly the
// linear convolution for the tile. Each kept element is taken from the real
// part, divided by 2^(FRAC + 2*log2(FFT_N)) (fixed-point scale and the
// 1/FFT_N^2 of the inverse transform) with round-half-up, and written to output pixel
//   (tile_r*S + m - (K-1), tile_c*S + n - (K-1))
// of channel cout, at address (cout*IMG_N + row)*IMG_N + col. Pixels beyond
// the image edge (last row/column of tiles) are skipped.
//
// Interface: start with tile and channel while idle; then the rows on
// in_valid/in_ready/in_idx. A kept row is buffered and written one pixel per
// clock, so in_ready is low for S clocks after each kept row; dropped rows are
// accepted at once. done pulses after the last write. Cropping and
// concatenating follow the method; the rounding and the write order are this
// design's choices. Results wider than OUT_W wrap.
module crop_concat
  import splitconv_pkg::*;
#(
  parameter int unsigned FFT_N    = 8,
  parameter int unsigned IMG_N    = 224,
  parameter int unsigned K        = 3,
  parameter int unsigned MAX_COUT = 1,
  parameter int unsigned OUT_W    = 32,
  localparam int unsigned S       = FFT_N - K + 1,
  localparam int unsigned NT      = (IMG_N + S - 1) / S,
  localparam int unsigned TW      = (NT > 1) ? $clog2(NT) : 1,
  localparam int unsigned OW      = (MAX_COUT > 1) ? $clog2(MAX_COUT) : 1,
  localparam int unsigned DEPTH   = MAX_COUT * IMG_N * IMG_N,
  localparam int unsigned LW      = $clog2(FFT_N),
  localparam int unsigned AW      = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [TW-1:0]           tile_r,
  input  logic [TW-1:0]           tile_c,
  input  logic [OW-1:0]           cout,
  output logic                    busy,
  output logic                    done,
  // inverse-transformed rows
  input  logic                    in_valid,
  output logic                    in_ready,
  input  cplx_t [FFT_N-1:0]        in_row,
  input  logic [LW-1:0]           in_idx,
  // output feature-map buffer write port
  output logic                    wr_en,
  output logic [AW-1:0]           wr_addr,
  output logic signed [OUT_W-1:0] wr_data
);

  localparam int SHIFT = FRAC + 2 * LW;  // fixed-point scale and 1/FFT_N^2
  localparam logic [LW-1:0] LAST = LW'(FFT_N - 1);

  typedef enum logic [1:0] {C_IDLE, C_ROWS, C_WRITE} cstate_t;
  cstate_t state;

  logic [TW-1:0] tr_q, tc_q;
  logic [OW-1:0] co_q;
  logic [LW-1:0] m_q;      // row being written
  logic [LW-1:0] n_q;      // column being written
  logic signed [OUT_W-1:0] pix [FFT_N];

  function automatic logic signed [OUT_W-1:0] round_px(input fx_t v);
    fx_t t;
    t = v + (fx_t'(1) <<< (SHIFT - 1));
    return OUT_W'(t >>> SHIFT);
  endfunction

  int orow, ocol;
  always_comb begin
    orow = int'(tr_q) * int'(S) + int'(m_q) - (int'(K) - 1);
    ocol = int'(tc_q) * int'(S) + int'(n_q) - (int'(K) - 1);
    wr_en   = (state == C_WRITE) && (orow < int'(IMG_N)) && (ocol < int'(IMG_N));
    wr_addr = AW'((int'(co_q) * int'(IMG_N) + orow) * int'(IMG_N) + ocol);
    wr_data = pix[n_q];
  end

  assign in_ready = (state == C_ROWS);
  assign busy     = (state != C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE;
      tr_q  <= '0;
      tc_q  <= '0;
      co_q  <= '0;
      m_q   <= '0;
      n_q   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        C_IDLE: if (start) begin
          tr_q  <= tile_r;
          tc_q  <= tile_c;
          co_q  <= cout;
          state <= C_ROWS;
        end
        C_ROWS: if (in_valid) begin
          if (int'(in_idx) >= int'(K) - 1) begin
            m_q   <= in_idx;
            n_q   <= LW'(K - 1);
            state <= C_WRITE;
          end
        end
        C_WRITE: begin
          n_q <= n_q + LW'(1);
          if (n_q == LAST) begin
            if (m_q == LAST) begin
              done  <= 1'b1;
              state <= C_IDLE;
            end else begin
              state <= C_ROWS;
            end
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == C_ROWS && in_valid) begin
      for (int i = 0; i < int'(FFT_N); i++) pix[i] <= round_px(in_row[i].re);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == C_ROWS && in_valid && in_idx == LAST) |-> ##1 (state == C_WRITE));

endmodule
