// splitconv_top: FFT-based split-convolution engine for one convolutional layer.
//
// The engine computes y_o = sum_i x_i (*) w_(o,i) ('same' 2-D convolution,
// zero border) for n_cin input maps x_i of IMG_N x IMG_N pixels and n_cout
// output maps. Instead of transforming whole maps, it splits each map into
// S x S tiles (S = FFT_N - K + 1), pads each tile with its floor(K/2)-pixel
// neighbourhood to an FFT_N x FFT_N patch (8x8 by default, FFT_N a power of
// two, K odd and < FFT_N), and works per patch in the frequency domain:
// FFT of the patch, Hadamard product with the FFT of the zero-padded filter,
// inverse FFT, crop of the S x S block that the circular convolution leaves
// uncorrupted, and write-back into the output map. Filter spectra are
// computed once per run and kept.
//
// Blocks: splitconv_ctrl (sequencer), patch_extractor (splitting/padding),
// filter_padder (filter zero-padding), fft2d (shared 2-D FFT/IFFT engine
// built on fft1d), hadamard_mac (products and input-channel accumulation),
// crop_concat (crop, rounding, write-back) and four dp_ram buffers: input
// maps, weights, filter spectra and output maps.
//
// Host interface: before start, write pixels (8-bit signed) at
// (cin*IMG_N + row)*IMG_N + col through in_wr_*, and weights (8-bit signed)
// at ((cout*MAX_CIN + cin)*K + r)*K + c through w_wr_*. Pulse start with
// n_cin/n_cout; done pulses when all outputs are written; then read
// out_rd_data one clock after out_rd_en at (cout*IMG_N + row)*IMG_N + col.
// y(r,c) = sum_(i,j) w[i][j] * x[r + K/2 - i][c + K/2 - j] (true convolution
// as in the method; load flipped kernels for a CNN's cross-correlation).
//
// Timing at 8x8 (n_cin = n_cout = 1): about 65 + 38 clocks per filter and
// 190 clocks per 6x6 tile (patch read and FFT, Hadamard, IFFT and crop,
// partly overlapped). The 8x8 default transform size,
// the 3x3 kernel, the splitting with floor(K/2) overlap, the Hadamard
// product, IFFT, crop and concatenation follow the method; the
// architecture, the single shared transform engine, the widths and all
// handshakes are this design's own.
module splitconv_top
  import splitconv_pkg::*;
#(
  parameter int unsigned FFT_N    = 8,
  parameter int unsigned IMG_N    = 224,
  parameter int unsigned K        = 3,
  parameter int unsigned MAX_CIN  = 1,
  parameter int unsigned MAX_COUT = 1,
  parameter int unsigned PIX_W    = 8,
  parameter int unsigned W_W      = 8,
  parameter int unsigned OUT_W    = 32,
  localparam int unsigned S       = FFT_N - K + 1,
  localparam int unsigned NT      = (IMG_N + S - 1) / S,
  localparam int unsigned TW      = (NT > 1) ? $clog2(NT) : 1,
  localparam int unsigned CW      = (MAX_CIN > 1) ? $clog2(MAX_CIN) : 1,
  localparam int unsigned OW      = (MAX_COUT > 1) ? $clog2(MAX_COUT) : 1,
  localparam int unsigned NCW     = $clog2(MAX_CIN + 1),
  localparam int unsigned NOW     = $clog2(MAX_COUT + 1),
  localparam int unsigned IN_D    = MAX_CIN * IMG_N * IMG_N,
  localparam int unsigned W_D     = MAX_COUT * MAX_CIN * K * K,
  localparam int unsigned LW      = $clog2(FFT_N),
  localparam int unsigned WS_D    = MAX_COUT * MAX_CIN * FFT_N,
  localparam int unsigned OUT_D   = MAX_COUT * IMG_N * IMG_N,
  localparam int unsigned IN_AW   = (IN_D > 1) ? $clog2(IN_D) : 1,
  localparam int unsigned W_AW    = (W_D > 1) ? $clog2(W_D) : 1,
  localparam int unsigned WS_AW   = (WS_D > 1) ? $clog2(WS_D) : 1,
  localparam int unsigned OUT_AW  = (OUT_D > 1) ? $clog2(OUT_D) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // run control
  input  logic                    start,
  input  logic [NCW-1:0]          n_cin,
  input  logic [NOW-1:0]          n_cout,
  output logic                    busy,
  output logic                    done,
  // input feature-map load
  input  logic                    in_wr_en,
  input  logic [IN_AW-1:0]        in_wr_addr,
  input  logic signed [PIX_W-1:0] in_wr_data,
  // weight load
  input  logic                    w_wr_en,
  input  logic [W_AW-1:0]         w_wr_addr,
  input  logic signed [W_W-1:0]   w_wr_data,
  // output feature-map read
  input  logic                    out_rd_en,
  input  logic [OUT_AW-1:0]       out_rd_addr,
  output logic signed [OUT_W-1:0] out_rd_data
);

  // ---------------- control ----------------
  phase_t        phase;
  logic [CW-1:0] cur_cin;
  logic [OW-1:0] cur_cout;
  logic [TW-1:0] tile_r, tile_c;
  logic          first_cin;
  logic fft_start, fft_inverse, fp_start, pe_start, drain_start, cc_start;
  logic fft_done, cc_done;

  splitconv_ctrl #(.FFT_N(FFT_N), .IMG_N(IMG_N), .K(K), .MAX_CIN(MAX_CIN), .MAX_COUT(MAX_COUT)) u_ctrl (
    .clk, .rst_n, .start, .n_cin, .n_cout, .busy, .done, .phase,
    .cur_cin, .cur_cout, .tile_r, .tile_c, .first_cin,
    .fft_start, .fft_inverse, .fp_start, .pe_start, .drain_start, .cc_start,
    .fft_done, .cc_done
  );

  // ---------------- buffers ----------------
  logic                    in_rd_en;
  logic [IN_AW-1:0]        in_rd_addr;
  logic signed [PIX_W-1:0] in_rd_data;
  logic                    w_rd_en;
  logic [W_AW-1:0]         w_rd_addr;
  logic signed [W_W-1:0]   w_rd_data;
  logic                    ws_wr_en, ws_rd_en;
  logic [WS_AW-1:0]        ws_wr_addr, ws_rd_addr;
  cplx_t [FFT_N-1:0]                   ws_wr_data, ws_rd_data;
  logic                    o_wr_en;
  logic [OUT_AW-1:0]       o_wr_addr;
  logic signed [OUT_W-1:0] o_wr_data;

  dp_ram #(.WIDTH(PIX_W), .DEPTH(IN_D)) u_in_mem (
    .clk, .wr_en(in_wr_en), .wr_addr(in_wr_addr), .wr_data(in_wr_data),
    .rd_en(in_rd_en), .rd_addr(in_rd_addr), .rd_data(in_rd_data)
  );

  dp_ram #(.WIDTH(W_W), .DEPTH(W_D)) u_w_mem (
    .clk, .wr_en(w_wr_en), .wr_addr(w_wr_addr), .wr_data(w_wr_data),
    .rd_en(w_rd_en), .rd_addr(w_rd_addr), .rd_data(w_rd_data)
  );

  dp_ram #(.WIDTH($bits(cplx_t [FFT_N-1:0])), .DEPTH(WS_D)) u_ws_mem (
    .clk, .wr_en(ws_wr_en), .wr_addr(ws_wr_addr), .wr_data(ws_wr_data),
    .rd_en(ws_rd_en), .rd_addr(ws_rd_addr), .rd_data(ws_rd_data)
  );

  dp_ram #(.WIDTH(OUT_W), .DEPTH(OUT_D)) u_out_mem (
    .clk, .wr_en(o_wr_en), .wr_addr(o_wr_addr), .wr_data(o_wr_data),
    .rd_en(out_rd_en), .rd_addr(out_rd_addr), .rd_data(out_rd_data)
  );

  // ---------------- producers ----------------
  logic  fp_busy, fp_valid, fp_ready;
  cplx_t [FFT_N-1:0] fp_row;
  logic  pe_busy, pe_valid, pe_ready;
  cplx_t [FFT_N-1:0] pe_row;

  filter_padder #(.FFT_N(FFT_N), .K(K), .MAX_CIN(MAX_CIN), .MAX_COUT(MAX_COUT), .W_W(W_W)) u_fpad (
    .clk, .rst_n, .start(fp_start), .cout(cur_cout), .cin(cur_cin), .busy(fp_busy),
    .rd_en(w_rd_en), .rd_addr(w_rd_addr), .rd_data(w_rd_data),
    .out_valid(fp_valid), .out_ready(fp_ready), .out_row(fp_row)
  );

  patch_extractor #(.FFT_N(FFT_N), .IMG_N(IMG_N), .K(K), .MAX_CIN(MAX_CIN), .PIX_W(PIX_W)) u_patch (
    .clk, .rst_n, .start(pe_start), .tile_r, .tile_c, .cin(cur_cin), .busy(pe_busy),
    .rd_en(in_rd_en), .rd_addr(in_rd_addr), .rd_data(in_rd_data),
    .out_valid(pe_valid), .out_ready(pe_ready), .out_row(pe_row)
  );

  // ---------------- shared transform engine ----------------
  logic       f_busy, f_in_valid, f_in_ready, f_out_valid, f_out_ready;
  cplx_t [FFT_N-1:0]      f_in_row, f_out_row;
  logic [LW-1:0] f_out_idx;

  fft2d #(.FFT_N(FFT_N)) u_fft2d (
    .clk, .rst_n, .start(fft_start), .inverse(fft_inverse), .busy(f_busy),
    .in_valid(f_in_valid), .in_ready(f_in_ready), .in_row(f_in_row),
    .out_valid(f_out_valid), .out_ready(f_out_ready), .out_row(f_out_row),
    .out_idx(f_out_idx), .done(fft_done)
  );

  // ---------------- Hadamard products ----------------
  logic       hm_busy, hm_in_valid, hm_in_ready, hm_out_valid, hm_out_ready;
  cplx_t [FFT_N-1:0]      hm_out_row;
  logic [LW-1:0] hm_out_idx;

  hadamard_mac #(.FFT_N(FFT_N), .MAX_CIN(MAX_CIN), .MAX_COUT(MAX_COUT)) u_hadamard (
    .clk, .rst_n, .n_cout, .cin(cur_cin), .first(first_cin), .busy(hm_busy),
    .in_valid(hm_in_valid), .in_ready(hm_in_ready), .in_row(f_out_row), .in_idx(f_out_idx),
    .ws_rd_en, .ws_rd_addr, .ws_rd_data,
    .drain_start, .drain_cout(cur_cout),
    .out_valid(hm_out_valid), .out_ready(hm_out_ready), .out_row(hm_out_row),
    .out_idx(hm_out_idx)
  );

  // ---------------- crop and concatenation ----------------
  logic cc_busy, cc_in_valid, cc_in_ready;

  crop_concat #(.FFT_N(FFT_N), .IMG_N(IMG_N), .K(K), .MAX_COUT(MAX_COUT), .OUT_W(OUT_W)) u_crop (
    .clk, .rst_n, .start(cc_start), .tile_r, .tile_c, .cout(cur_cout),
    .busy(cc_busy), .done(cc_done),
    .in_valid(cc_in_valid), .in_ready(cc_in_ready), .in_row(f_out_row), .in_idx(f_out_idx),
    .wr_en(o_wr_en), .wr_addr(o_wr_addr), .wr_data(o_wr_data)
  );

  // ---------------- phase routing ----------------
  always_comb begin
    f_in_valid   = 1'b0;
    f_in_row     = fp_row;
    fp_ready     = 1'b0;
    pe_ready     = 1'b0;
    hm_out_ready = 1'b0;
    f_out_ready  = 1'b0;
    hm_in_valid  = 1'b0;
    cc_in_valid  = 1'b0;
    ws_wr_en     = 1'b0;
    case (phase)
      PH_FILTER: begin
        f_in_valid  = fp_valid;
        f_in_row    = fp_row;
        fp_ready    = f_in_ready;
        f_out_ready = 1'b1;
        ws_wr_en    = f_out_valid;
      end
      PH_PATCH: begin
        f_in_valid  = pe_valid;
        f_in_row    = pe_row;
        pe_ready    = f_in_ready;
        hm_in_valid = f_out_valid;
        f_out_ready = hm_in_ready;
      end
      PH_INV: begin
        f_in_valid   = hm_out_valid;
        f_in_row     = hm_out_row;
        hm_out_ready = f_in_ready;
        cc_in_valid  = f_out_valid;
        f_out_ready  = cc_in_ready;
      end
      default: ;
    endcase
  end

  assign ws_wr_addr = WS_AW'((int'(cur_cout) * int'(MAX_CIN) + int'(cur_cin)) * int'(FFT_N)
                             + int'(f_out_idx));
  assign ws_wr_data = f_out_row;

  // the drained rows arrive in order at the transform engine
  logic [LW-1:0] fft_in_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                        fft_in_cnt <= '0;
    else if (fft_start)                fft_in_cnt <= '0;
    else if (f_in_valid && f_in_ready) fft_in_cnt <= fft_in_cnt + LW'(1);
  end
  assert property (@(posedge clk) disable iff (!rst_n)
                   (phase == PH_INV && hm_out_valid && f_in_ready) |-> (hm_out_idx == fft_in_cnt));

  // every unit is idle when the run ends and when a unit is started
  assert property (@(posedge clk) disable iff (!rst_n)
                   done |-> !(fp_busy || pe_busy || f_busy || hm_busy || cc_busy));
  assert property (@(posedge clk) disable iff (!rst_n)
                   fft_start |-> !f_busy);

  // odd kernels only: the tile overlap is floor(K/2) on both sides
  initial assert (K % 2 == 1 && K < FFT_N && (1 << LW) == FFT_N)
    else $error("FFT_N must be a power of two and K odd and below FFT_N");

endmodule
