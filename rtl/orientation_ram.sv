// orientation_ram: the RAM that collects one 4-bit orientation per block.
//
// 2^ADDR_W words (256 blocks of 16 x 16 pixels in a 256 x 256 image by
// default) of DATA_W = 4 bits. Stage 3 writes a block result through the
// synchronous write port; the host reads results through the asynchronous
// read port.
module orientation_ram #(
  parameter int ADDR_W = 8,
  parameter int DATA_W = 4
) (
  input  logic              clk,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic [ADDR_W-1:0] raddr,
  output logic [DATA_W-1:0] rdata
);
  logic [DATA_W-1:0] mem [2**ADDR_W];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];
endmodule
