// filter_padder: zero-pads one K x K filter to the FFT_N x FFT_N transform size.
//
// The filter for output channel cout and input channel cin is stored row by
// row in the weight buffer at ((cout*MAX_CIN + cin)*K + r)*K + c. The padder
// walks the FFT_N x FFT_N grid one position per clock, reads the weight buffer for
// positions with r < K and c < K (1-clock read latency) and puts zero
// everywhere else (the padding p_0), so the filter sits in the top-left corner
// of the grid. Each completed row is presented on out_valid/out_row in the
// complex fixed-point format until out_ready. A filter takes FFT_N^2 clocks plus
// one. Zero-padding the filter to the patch size before its FFT follows the
// method; the placement and the read order are this design's choices.
module filter_padder
  import splitconv_pkg::*;
#(
  parameter int unsigned FFT_N    = 8,
  parameter int unsigned K        = 3,
  parameter int unsigned MAX_CIN  = 1,
  parameter int unsigned MAX_COUT = 1,
  parameter int unsigned W_W      = 8,
  localparam int unsigned CW      = (MAX_CIN > 1) ? $clog2(MAX_CIN) : 1,
  localparam int unsigned OW      = (MAX_COUT > 1) ? $clog2(MAX_COUT) : 1,
  localparam int unsigned DEPTH   = MAX_COUT * MAX_CIN * K * K,
  localparam int unsigned LW      = $clog2(FFT_N),
  localparam int unsigned AW      = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [OW-1:0]         cout,
  input  logic [CW-1:0]         cin,
  output logic                  busy,
  // weight buffer read port
  output logic                  rd_en,
  output logic [AW-1:0]         rd_addr,
  input  logic signed [W_W-1:0] rd_data,
  // padded filter, one row at a time
  output logic                  out_valid,
  input  logic                  out_ready,
  output cplx_t [FFT_N-1:0]      out_row
);

  localparam logic [LW-1:0] LAST = LW'(FFT_N - 1);

  logic        active;
  logic [2*LW-1:0] pos;             // position being issued: {row, col}
  logic        cap_v, cap_in;   // a position lands this clock; it holds a weight
  logic [LW-1:0] cap_c;
  logic [OW-1:0] co_q;
  logic [CW-1:0] ci_q;
  cplx_t [FFT_N-1:0] asm_row;
  logic        in_k, issue;

  always_comb begin
    in_k  = (int'(pos[2*LW-1:LW]) < int'(K)) && (int'(pos[LW-1:0]) < int'(K));
    issue = active && ((pos[LW-1:0] != LAST) || !out_valid || out_ready);
    rd_en   = issue && in_k;
    rd_addr = AW'(((int'(co_q) * int'(MAX_CIN) + int'(ci_q)) * int'(K) + int'(pos[2*LW-1:LW]))
                  * int'(K) + int'(pos[LW-1:0]));
  end

  assign busy = active || cap_v || out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active    <= 1'b0;
      pos       <= '0;
      cap_v     <= 1'b0;
      cap_in    <= 1'b0;
      cap_c     <= '0;
      out_valid <= 1'b0;
      co_q      <= '0;
      ci_q      <= '0;
    end else begin
      if (start && !busy) begin
        active <= 1'b1;
        pos    <= '0;
        co_q   <= cout;
        ci_q   <= cin;
      end else if (issue) begin
        pos <= pos + (2*LW)'(1);
        if (pos == '1) active <= 1'b0;
      end
      cap_v  <= issue;
      cap_in <= in_k;
      cap_c  <= pos[LW-1:0];
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (cap_v && cap_c == LAST) out_valid <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (cap_v) begin
      asm_row[cap_c] <= cap_in ? to_cplx(32'(rd_data)) : '0;
      if (cap_c == LAST) begin
        out_row    <= asm_row;
        out_row[FFT_N-1] <= cap_in ? to_cplx(32'(rd_data)) : '0;
      end
    end
  end

endmodule
