// tb_dp_ram: self-checking test of the dual-port RAM.
//
// Writes random words to random addresses while keeping a reference copy,
// reads them back, and checks read-during-write of the same address returns
// the old word and that the read output holds when rd_en is low.
module tb_dp_ram;
  localparam int W = 12, D = 300;
  logic clk = 1'b0;
  logic wr_en = 0, rd_en = 0;
  logic [$clog2(D)-1:0] wr_addr = '0, rd_addr = '0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic [W-1:0] ref_mem [D];
  int checks = 0, failures = 0;

  dp_ram #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill everything
    for (int a = 0; a < D; a++) begin
      @(posedge clk);
      wr_en <= 1; wr_addr <= a[$clog2(D)-1:0]; wr_data <= W'($urandom);
      #1 ref_mem[a] = wr_data;
    end
    @(posedge clk); wr_en <= 0;
    // random reads and writes
    for (int i = 0; i < 2000; i++) begin
      int ra, wa;
      logic [W-1:0] wd, expect_d;
      ra = $urandom_range(0, D - 1);
      wa = ($urandom_range(0, 3) == 0) ? ra : $urandom_range(0, D - 1);
      wd = W'($urandom);
      @(posedge clk);
      rd_en <= 1; rd_addr <= ra[$clog2(D)-1:0];
      wr_en <= 1; wr_addr <= wa[$clog2(D)-1:0]; wr_data <= wd;
      expect_d = ref_mem[ra];
      @(posedge clk);
      rd_en <= 0; wr_en <= 0;
      ref_mem[wa] = wd;
      #1;
      checks++;
      if (rd_data !== expect_d) begin
        failures++;
        $display("read %0d: got %h expected %h", ra, rd_data, expect_d);
      end
      // output holds while rd_en is low
      @(posedge clk); #1;
      checks++;
      if (rd_data !== expect_d) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
