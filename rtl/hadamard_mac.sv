// hadamard_mac: element-wise (Hadamard) product of a patch spectrum with the
// filter spectra, accumulated over input channels.
//
// For every spectrum row presented on in_valid/in_row/in_idx (row in_idx of
// the 2-D FFT of one padded patch of input channel cin), the unit loops over
// the n_cout output channels: it reads the matching row of the filter
// spectrum of (cout, cin) from the filter-spectrum buffer (1-clock latency),
// multiplies the FFT_N bins pairwise and either loads (first = 1, the first
// input channel) or adds the products into the accumulator row acc[cout][row].
// in_ready is raised with the last output channel's update, so a row costs
// 2*n_cout clocks. Summing the products of all input channels before the
// inverse FFT gives the multi-channel convolution with one IFFT per output
// channel.
//
// A drain (drain_start with drain_cout, while idle) then presents the FFT_N
// accumulated rows of that output channel on out_valid/out_row/out_idx for
// the inverse transform. The Hadamard product and its fan-out to every output
// channel's filters follow the method; the accumulator, the read schedule and
// the handshakes are this design's choices. With one input and one output
// channel (the defaults) the filter-spectrum read address is simply in_idx.
module hadamard_mac
  import splitconv_pkg::*;
#(
  parameter int unsigned FFT_N    = 8,
  parameter int unsigned MAX_CIN  = 1,
  parameter int unsigned MAX_COUT = 1,
  localparam int unsigned CW      = (MAX_CIN > 1) ? $clog2(MAX_CIN) : 1,
  localparam int unsigned OW      = (MAX_COUT > 1) ? $clog2(MAX_COUT) : 1,
  localparam int unsigned NW      = $clog2(MAX_COUT + 1),
  localparam int unsigned DEPTH   = MAX_COUT * MAX_CIN * FFT_N,
  localparam int unsigned LW      = $clog2(FFT_N),
  localparam int unsigned AW      = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NW-1:0] n_cout,     // output channels in use, 1..MAX_COUT
  input  logic [CW-1:0] cin,        // input channel of the incoming spectrum
  input  logic          first,      // first input channel: load, do not add
  output logic          busy,
  // patch spectrum rows
  input  logic          in_valid,
  output logic          in_ready,
  input  cplx_t [FFT_N-1:0] in_row,
  input  logic [LW-1:0] in_idx,
  // filter-spectrum buffer read port
  output logic          ws_rd_en,
  output logic [AW-1:0] ws_rd_addr,
  input  cplx_t [FFT_N-1:0] ws_rd_data,
  // drain of one output channel's accumulated spectrum
  input  logic          drain_start,
  input  logic [OW-1:0] drain_cout,
  output logic          out_valid,
  input  logic          out_ready,
  output cplx_t [FFT_N-1:0] out_row,
  output logic [LW-1:0] out_idx
);

  typedef enum logic [1:0] {H_IDLE, H_READ, H_MAC, H_DRAIN} hstate_t;
  hstate_t state;

  localparam logic [LW-1:0] LAST = LW'(FFT_N - 1);

  cplx_t [FFT_N-1:0] acc [MAX_COUT][FFT_N];
  logic [OW-1:0] co;
  logic [LW-1:0] cnt;
  cplx_t [FFT_N-1:0] prod;

  always_comb begin
    for (int i = 0; i < int'(FFT_N); i++) prod[i] = cmul(in_row[i], ws_rd_data[i]);
  end

  assign ws_rd_en   = (state == H_READ);
  assign ws_rd_addr = AW'((int'(co) * int'(MAX_CIN) + int'(cin)) * int'(FFT_N) + int'(in_idx));
  assign in_ready   = (state == H_MAC) && (int'(co) == int'(n_cout) - 1);
  assign out_valid  = (state == H_DRAIN);
  assign out_row    = acc[co][cnt];
  assign out_idx    = cnt;
  assign busy       = (state != H_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= H_IDLE;
      co    <= '0;
      cnt   <= '0;
    end else begin
      case (state)
        H_IDLE: begin
          if (drain_start) begin
            co    <= drain_cout;
            cnt   <= '0;
            state <= H_DRAIN;
          end else if (in_valid) begin
            co    <= '0;
            state <= H_READ;
          end
        end
        H_READ: state <= H_MAC;
        H_MAC: begin
          if (int'(co) == int'(n_cout) - 1) begin
            state <= H_IDLE;
          end else begin
            co    <= co + OW'(1);
            state <= H_READ;
          end
        end
        H_DRAIN: if (out_ready) begin
          cnt <= cnt + LW'(1);
          if (cnt == LAST) state <= H_IDLE;
        end
        default: state <= H_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == H_MAC) begin
      for (int i = 0; i < int'(FFT_N); i++)
        acc[co][in_idx][i] <= first ? prod[i] : cadd(acc[co][in_idx][i], prod[i]);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == H_IDLE && drain_start) |-> !in_valid);
  assert property (@(posedge clk) disable iff (!rst_n)
                   in_valid |-> (n_cout != '0) && (int'(n_cout) <= int'(MAX_COUT)));

endmodule
