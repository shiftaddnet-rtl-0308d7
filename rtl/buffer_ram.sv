// buffer_ram: on-chip buffer for one feature map or weight tensor.
//
// A simple dual-port memory: one synchronous write port and one synchronous read
// port (read data appears the cycle after the address). Reading and writing the
// same word in one cycle returns the old contents. The ShiftAddNet layer keeps its
// input map, intermediate (shift-layer) map, output map and both weight tensors in
// such buffers so that each value is fetched from off-chip memory once; their
// organisation is this implementation's choice. Contents are not reset.
module buffer_ram #(
  parameter int DEPTH = 16384,
  parameter int WIDTH = 8,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

  // A write must address an existing word.
  a_waddr_in_range: assert property (@(posedge clk) we |-> int'(waddr) < DEPTH)
    else $error("buffer_ram: write address %0d out of range", waddr);

endmodule
