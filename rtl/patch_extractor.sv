// patch_extractor: splits the input feature map into padded patches.
//
// The image (IMG_N x IMG_N per input channel) is cut into S x S tiles,
// S = FFT_N - K + 1 (6 for an 8x8 transform and a 3x3 kernel). For tile
// (tile_r, tile_c) the engine needs the FFT_N x FFT_N patch that also covers
// the floor(K/2)-pixel border around the tile, so that neighbouring patches
// overlap. Patch element (a, b) is image pixel
//   (tile_r*S + a - K/2, tile_c*S + b - K/2),
// or zero when that pixel lies outside the image (the padding p_i).
//
// The feature-map buffer is read one pixel per clock (1-clock read latency);
// pixels outside the image are not read. Each completed row of FFT_N pixels
// is presented on out_valid/out_row (converted to the complex fixed-point
// format) until out_ready; a row handshake may occur on every FFT_N-th clock at
// best, so a patch takes FFT_N^2 clocks plus one (65 for 8x8). start is accepted when busy is
// low. Tiling with overlap floor(K/2) follows the method; the pixel-serial
// read order is this design's choice.
module patch_extractor
  import splitconv_pkg::*;
#(
  parameter int unsigned FFT_N    = 8,
  parameter int unsigned IMG_N   = 224,
  parameter int unsigned K       = 3,
  parameter int unsigned MAX_CIN = 1,
  parameter int unsigned PIX_W   = 8,
  localparam int unsigned S      = FFT_N - K + 1,
  localparam int unsigned NT     = (IMG_N + S - 1) / S,
  localparam int unsigned TW     = (NT > 1) ? $clog2(NT) : 1,
  localparam int unsigned CW     = (MAX_CIN > 1) ? $clog2(MAX_CIN) : 1,
  localparam int unsigned DEPTH  = MAX_CIN * IMG_N * IMG_N,
  localparam int unsigned LW      = $clog2(FFT_N),
  localparam int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [TW-1:0]           tile_r,
  input  logic [TW-1:0]           tile_c,
  input  logic [CW-1:0]           cin,
  output logic                    busy,
  // feature-map buffer read port
  output logic                    rd_en,
  output logic [AW-1:0]           rd_addr,
  input  logic signed [PIX_W-1:0] rd_data,
  // padded patch, one row at a time
  output logic                    out_valid,
  input  logic                    out_ready,
  output cplx_t [FFT_N-1:0]        out_row
);

  localparam int P = int'(K / 2);

  localparam logic [LW-1:0] LAST = LW'(FFT_N - 1);

  logic        active;          // issuing positions
  logic [2*LW-1:0] pos;             // position being issued: {row, col}
  logic        cap_v, cap_in;   // a position lands this clock; it lies in the image image
  logic [LW-1:0] cap_c;
  logic [TW-1:0] tr_q, tc_q;
  logic [CW-1:0] ci_q;
  cplx_t [FFT_N-1:0] asm_row;

  int y, x;
  logic in_img, issue;

  always_comb begin
    y = int'(tr_q) * int'(S) + int'(pos[2*LW-1:LW]) - P;
    x = int'(tc_q) * int'(S) + int'(pos[LW-1:0]) - P;
    in_img = (y >= 0) && (y < int'(IMG_N)) && (x >= 0) && (x < int'(IMG_N));
    // the last pixel of a row may only be issued if the output row is free
    issue = active && ((pos[LW-1:0] != LAST) || !out_valid || out_ready);
    rd_en   = issue && in_img;
    rd_addr = AW'((int'(ci_q) * int'(IMG_N) + y) * int'(IMG_N) + x);
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
      tr_q      <= '0;
      tc_q      <= '0;
      ci_q      <= '0;
    end else begin
      if (start && !busy) begin
        active <= 1'b1;
        pos    <= '0;
        tr_q   <= tile_r;
        tc_q   <= tile_c;
        ci_q   <= cin;
      end else if (issue) begin
        pos <= pos + (2*LW)'(1);
        if (pos == '1) active <= 1'b0;
      end
      cap_v  <= issue;
      cap_in <= in_img;
      cap_c  <= pos[LW-1:0];
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (cap_v && cap_c == LAST) out_valid <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (cap_v) begin
      asm_row[cap_c] <= cap_in ? to_cplx(32'(rd_data)) : '0;
      if (cap_c == LAST) begin
        out_row      <= asm_row;
        out_row[FFT_N-1]   <= cap_in ? to_cplx(32'(rd_data)) : '0;
      end
    end
  end

endmodule
