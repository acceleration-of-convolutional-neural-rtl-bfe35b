// tb_splitconv_ctrl: self-checking test of the engine's sequencer.
//
// The datapath units are replaced by responders that pulse fft_done or
// cc_done a random number of clocks after each start. Every start the
// controller issues is logged as (phase, cout, cin, tile_r, tile_c) and
// compared, in order, with the sequence the loop nest must produce: all
// filters first, then per tile every input channel's patch followed by every
// output channel's inverse transform. Two runs with different channel counts
// are checked, as are the start pulse combinations and a single done per run.
module tb_splitconv_ctrl;
  import splitconv_pkg::*;

  localparam int N = 14, K = 3, MCIN = 3, MCOUT = 2, NT = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy, done, first_cin;
  logic [1:0] n_cin, n_cout;
  phase_t phase;
  logic [1:0] cur_cin;
  logic [0:0] cur_cout;
  logic [1:0] tile_r, tile_c;
  logic fft_start, fft_inverse, fp_start, pe_start, drain_start, cc_start;
  logic fft_done, cc_done;
  int checks = 0, failures = 0, ndone = 0;

  typedef struct { int ph, co, ci, tr, tc; } ev_t;
  ev_t got [$];
  ev_t expq [$];

  splitconv_ctrl #(.IMG_N(N), .K(K), .MAX_CIN(MCIN), .MAX_COUT(MCOUT)) dut (.*);

  always #5 clk = ~clk;

  // responders
  int fft_wait = -1, cc_wait = -1;
  always @(posedge clk) begin
    fft_done <= 1'b0;
    cc_done  <= 1'b0;
    if (fft_wait > 0) fft_wait--;
    else if (fft_wait == 0) begin
      if (phase != PH_INV) fft_done <= 1'b1;
      fft_wait = -1;
    end
    if (cc_wait > 0) cc_wait--;
    else if (cc_wait == 0) begin cc_done <= 1'b1; cc_wait = -1; end
    if (fft_start) begin
      ev_t e;
      e.ph = int'(phase); e.co = int'(cur_cout); e.ci = int'(cur_cin);
      e.tr = int'(tile_r); e.tc = int'(tile_c);
      got.push_back(e);
      fft_wait = $urandom_range(1, 12);
      checks++;
      // matching unit starts
      case (phase)
        PH_FILTER: if (!fp_start || pe_start || cc_start || fft_inverse) failures++;
        PH_PATCH:  if (!pe_start || fp_start || cc_start || fft_inverse
                       || first_cin != (cur_cin == 0)) failures++;
        PH_INV:    begin
          if (!cc_start || !drain_start || !fft_inverse) failures++;
          cc_wait = $urandom_range(2, 15);
        end
        default: failures++;
      endcase
    end
    if (done) ndone++;
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int nci, input int nco);
    got.delete(); expq.delete();
    for (int o = 0; o < nco; o++)
      for (int c = 0; c < nci; c++) expq.push_back('{int'(PH_FILTER), o, c, 0, 0});
    for (int tr = 0; tr < NT; tr++)
      for (int tc = 0; tc < NT; tc++) begin
        for (int c = 0; c < nci; c++) expq.push_back('{int'(PH_PATCH), 0, c, tr, tc});
        for (int o = 0; o < nco; o++) expq.push_back('{int'(PH_INV), o, 0, tr, tc});
      end
    ndone = 0;
    @(negedge clk);
    n_cin = 2'(nci); n_cout = 2'(nco); start = 1;
    @(negedge clk);
    start = 0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (ndone != 1) begin failures++; $display("done pulsed %0d times", ndone); end
    checks++;
    if (got.size() != expq.size()) begin
      failures++;
      $display("%0d starts, expected %0d", got.size(), expq.size());
    end
    for (int i = 0; i < got.size() && i < expq.size(); i++) begin
      checks++;
      if (got[i] != expq[i]) begin
        failures++;
        if (failures < 10)
          $display("start %0d: got ph%0d co%0d ci%0d t(%0d,%0d) expected ph%0d co%0d ci%0d t(%0d,%0d)",
                   i, got[i].ph, got[i].co, got[i].ci, got[i].tr, got[i].tc,
                   expq[i].ph, expq[i].co, expq[i].ci, expq[i].tr, expq[i].tc);
      end
    end
  endtask

  initial begin
    start = 0; n_cin = 1; n_cout = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(3, 2);
    run(2, 1);
    run(1, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
