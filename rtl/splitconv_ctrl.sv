// splitconv_ctrl: sequencer of the split-convolution engine.
//
// One run convolves n_cin input maps with n_cout x n_cin filters:
//   1. filter phase: for every (cout, cin) the filter is zero-padded and
//      transformed once; its spectrum is kept in the filter-spectrum buffer.
//   2. for every tile (row-major): for every input channel, the padded patch
//      is extracted and transformed, and its spectrum is multiplied into the
//      accumulators of all output channels (patch phase); then for every
//      output channel the accumulated spectrum is inverse-transformed,
//      cropped and written into the output map (inverse phase).
// Each input patch is thus read and transformed exactly once per run.
//
// The controller issues one-clock start pulses and waits for completion: the
// filter and patch phases end with the transform engine's done (its last
// output row has been consumed), the inverse phase with crop_concat's done.
// phase selects which units the shared transform engine is connected to.
// done pulses once at the end of the run; start is accepted when idle.
// The order of operations follows the flow of the method (FFT of patches and
// padded filters, Hadamard products, IFFT and cropping); accumulating input
// channels in the frequency domain and the loop order are this design's.
module splitconv_ctrl
  import splitconv_pkg::*;
#(
  parameter int unsigned FFT_N    = 8,
  parameter int unsigned IMG_N    = 224,
  parameter int unsigned K        = 3,
  parameter int unsigned MAX_CIN  = 1,
  parameter int unsigned MAX_COUT = 1,
  localparam int unsigned S       = FFT_N - K + 1,
  localparam int unsigned NT      = (IMG_N + S - 1) / S,
  localparam int unsigned TW      = (NT > 1) ? $clog2(NT) : 1,
  localparam int unsigned CW      = (MAX_CIN > 1) ? $clog2(MAX_CIN) : 1,
  localparam int unsigned OW      = (MAX_COUT > 1) ? $clog2(MAX_COUT) : 1,
  localparam int unsigned NCW     = $clog2(MAX_CIN + 1),
  localparam int unsigned NOW     = $clog2(MAX_COUT + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [NCW-1:0] n_cin,     // 1..MAX_CIN
  input  logic [NOW-1:0] n_cout,    // 1..MAX_COUT
  output logic           busy,
  output logic           done,
  output phase_t         phase,
  output logic [CW-1:0]  cur_cin,
  output logic [OW-1:0]  cur_cout,
  output logic [TW-1:0]  tile_r,
  output logic [TW-1:0]  tile_c,
  output logic           first_cin,
  // unit starts
  output logic           fft_start,
  output logic           fft_inverse,
  output logic           fp_start,
  output logic           pe_start,
  output logic           drain_start,
  output logic           cc_start,
  // completions
  input  logic           fft_done,
  input  logic           cc_done
);

  typedef enum logic [2:0] {
    K_IDLE, K_F_GO, K_F_WAIT, K_P_GO, K_P_WAIT, K_I_GO, K_I_WAIT, K_DONE
  } kstate_t;
  kstate_t state;

  logic last_ci, last_co, last_tc, last_tr;

  assign last_ci   = (int'(cur_cin)  == int'(n_cin) - 1);
  assign last_co   = (int'(cur_cout) == int'(n_cout) - 1);
  assign last_tc   = (int'(tile_c) == int'(NT) - 1);
  assign last_tr   = (int'(tile_r) == int'(NT) - 1);
  assign first_cin = (cur_cin == '0);
  assign busy      = (state != K_IDLE);

  always_comb begin
    fft_start   = 1'b0;
    fft_inverse = 1'b0;
    fp_start    = 1'b0;
    pe_start    = 1'b0;
    drain_start = 1'b0;
    cc_start    = 1'b0;
    phase       = PH_IDLE;
    case (state)
      K_F_GO:   begin phase = PH_FILTER; fft_start = 1'b1; fp_start = 1'b1; end
      K_F_WAIT: phase = PH_FILTER;
      K_P_GO:   begin phase = PH_PATCH; fft_start = 1'b1; pe_start = 1'b1; end
      K_P_WAIT: phase = PH_PATCH;
      K_I_GO:   begin
        phase = PH_INV; fft_start = 1'b1; fft_inverse = 1'b1;
        drain_start = 1'b1; cc_start = 1'b1;
      end
      K_I_WAIT: phase = PH_INV;
      default:  phase = PH_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= K_IDLE;
      cur_cin  <= '0;
      cur_cout <= '0;
      tile_r   <= '0;
      tile_c   <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        K_IDLE: if (start) begin
          cur_cin  <= '0;
          cur_cout <= '0;
          tile_r   <= '0;
          tile_c   <= '0;
          state    <= K_F_GO;
        end
        K_F_GO: state <= K_F_WAIT;
        K_F_WAIT: if (fft_done) begin
          if (!last_ci) begin
            cur_cin <= cur_cin + CW'(1);
            state   <= K_F_GO;
          end else begin
            cur_cin <= '0;
            if (!last_co) begin
              cur_cout <= cur_cout + OW'(1);
              state    <= K_F_GO;
            end else begin
              cur_cout <= '0;
              state    <= K_P_GO;
            end
          end
        end
        K_P_GO: state <= K_P_WAIT;
        K_P_WAIT: if (fft_done) begin
          if (!last_ci) begin
            cur_cin <= cur_cin + CW'(1);
            state   <= K_P_GO;
          end else begin
            cur_cin  <= '0;
            cur_cout <= '0;
            state    <= K_I_GO;
          end
        end
        K_I_GO: state <= K_I_WAIT;
        K_I_WAIT: if (cc_done) begin
          if (!last_co) begin
            cur_cout <= cur_cout + OW'(1);
            state    <= K_I_GO;
          end else begin
            cur_cout <= '0;
            if (!last_tc) begin
              tile_c <= tile_c + TW'(1);
              state  <= K_P_GO;
            end else if (!last_tr) begin
              tile_c <= '0;
              tile_r <= tile_r + TW'(1);
              state  <= K_P_GO;
            end else begin
              state <= K_DONE;
            end
          end
        end
        K_DONE: begin
          done  <= 1'b1;
          state <= K_IDLE;
        end
        default: state <= K_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == K_IDLE && start) |->
                   (n_cin != '0) && (int'(n_cin) <= int'(MAX_CIN)) &&
                   (n_cout != '0) && (int'(n_cout) <= int'(MAX_COUT)));

endmodule
