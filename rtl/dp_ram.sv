// dp_ram: simple dual-port RAM, one write port and one read port, one clock.
//
// Used for every buffer of the engine: the input feature maps, the filter
// weights, the filter spectra and the output feature maps. A read returns the
// word at rd_addr one clock after rd_en (registered output, as in an FPGA
// block RAM). A read and a write of the same address in one clock return the
// old word. The buffers themselves follow the memory budget of the method
// (whole feature maps plus one patch); the port arrangement is this design's.
module dp_ram #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 50176,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
